// fp64_mac_tb: checks the binary64 MAC against the simulator's own IEEE
// double arithmetic (product rounded, then sum rounded).  Operands are random
// normal numbers with exponents near 1.0 so that no result is subnormal, plus
// hand-picked special cases (zeros, infinities, NaN, exact cancellation,
// carry-out of the rounding).  The MAC is combinational: each case is applied,
// settled for 1 time unit and compared.
module fp64_mac_tb;
  logic [63:0] a, b, c, y;
  int checks = 0, failures = 0;

  fp64_mac dut (.a(a), .b(b), .acc_in(c), .acc_out(y));

  function automatic logic [63:0] rnd_normal(input int span);
    logic [10:0] e;
    e = 11'(1023 - span + ($urandom % (2 * span + 1)));
    return {1'($urandom), e, 20'($urandom), 32'($urandom)};
  endfunction

  function automatic logic [63:0] ref_mac(input logic [63:0] ra, input logic [63:0] rb,
                                          input logic [63:0] rc);
    real p, s;
    p = $bitstoreal(ra) * $bitstoreal(rb);
    s = $bitstoreal(rc) + p;
    return $realtobits(s);
  endfunction

  task automatic apply(input logic [63:0] ta, input logic [63:0] tb_, input logic [63:0] tc,
                       input logic [63:0] exp_y);
    a = ta; b = tb_; c = tc;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH a=%h b=%h c=%h got %h exp %h", ta, tb_, tc, y, exp_y);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // special cases
    apply(64'h0, 64'h4000_0000_0000_0000, 64'h3FF0_0000_0000_0000, 64'h3FF0_0000_0000_0000); // 1 + 0*2
    apply(64'h3FF0_0000_0000_0000, 64'h4000_0000_0000_0000, 64'h0, 64'h4000_0000_0000_0000); // 0 + 1*2
    apply(64'h3FF0_0000_0000_0000, 64'h4000_0000_0000_0000, 64'hC000_0000_0000_0000, 64'h0); // -2 + 2
    apply(64'h7FF0_0000_0000_0000, 64'h3FF0_0000_0000_0000, 64'h0, 64'h7FF0_0000_0000_0000); // inf
    apply(64'h7FF0_0000_0000_0000, 64'h0, 64'h0, 64'h7FF8_0000_0000_0000);                   // inf*0
    apply(64'h7FF8_0000_0000_0001, 64'h3FF0_0000_0000_0000, 64'h0, 64'h7FF8_0000_0000_0000); // NaN
    apply(64'h3FFF_FFFF_FFFF_FFFF, 64'h3FFF_FFFF_FFFF_FFFF, 64'h0,
          ref_mac(64'h3FFF_FFFF_FFFF_FFFF, 64'h3FFF_FFFF_FFFF_FFFF, 64'h0));                  // rounding carry
    apply(64'h3FF0_0000_0000_0001, 64'h3FF0_0000_0000_0000, 64'hBFF0_0000_0000_0000,
          ref_mac(64'h3FF0_0000_0000_0001, 64'h3FF0_0000_0000_0000, 64'hBFF0_0000_0000_0000)); // 1 ulp left
    // random operands near 1.0 (all three of similar size: cancellation and alignment)
    for (int i = 0; i < 20000; i++) begin
      logic [63:0] ra, rb, rc;
      ra = rnd_normal(8);
      rb = rnd_normal(8);
      rc = rnd_normal(16);
      apply(ra, rb, rc, ref_mac(ra, rb, rc));
    end
    // random operands with wide exponent spread (far alignment, sticky bits)
    for (int i = 0; i < 20000; i++) begin
      logic [63:0] ra, rb, rc;
      ra = rnd_normal(200);
      rb = rnd_normal(200);
      rc = rnd_normal(400);
      apply(ra, rb, rc, ref_mac(ra, rb, rc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
