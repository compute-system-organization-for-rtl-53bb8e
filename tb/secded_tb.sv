// secded_tb: round-trips random words through secded_enc and secded_dec.
// Clean words must decode unchanged with no flags; every single-bit flip of
// the 72-bit codeword must be corrected and flagged 'corrected'; random
// double-bit flips must be flagged 'uncorrectable'.  Combinational, settled
// for 1 time unit per case.
module secded_tb;
  logic [63:0] d, dout;
  logic [71:0] cw, cw_bad;
  logic ce, ue;
  int checks = 0, failures = 0;

  secded_enc u_enc (.data_in(d), .cw_out(cw));
  secded_dec u_dec (.cw_in(cw_bad), .data_out(dout), .corrected(ce), .uncorrectable(ue));

  task automatic expect_ok(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s d=%h cw=%h", what, d, cw_bad);
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
    for (int n = 0; n < 200; n++) begin
      d = {32'($urandom), 32'($urandom)};
      #1;
      cw_bad = cw;
      #1;
      expect_ok("clean", dout == d && !ce && !ue);
      for (int k = 0; k < 72; k++) begin
        cw_bad = cw;
        cw_bad[k] = ~cw_bad[k];
        #1;
        expect_ok("single", dout == d && ce && !ue);
      end
      for (int t = 0; t < 20; t++) begin
        int p, q;
        p = $urandom % 72;
        q = (p + 1 + ($urandom % 71)) % 72;
        cw_bad = cw;
        cw_bad[p] = ~cw_bad[p];
        cw_bad[q] = ~cw_bad[q];
        #1;
        expect_ok("double", ue && !ce);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
