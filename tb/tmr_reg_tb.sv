// tmr_reg_tb: loads random values, upsets one copy at a time and checks that
// the voted output still equals the loaded value, that 'mismatch' reports the
// disagreement, and that the next load scrubs it.  An upset of the same bit
// in two copies must win the vote (checked against a bitwise majority model).
module tmr_reg_tb;
  localparam int W = 8;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] d, q;
  logic [2:0][W-1:0] upset;
  logic mismatch;
  int checks = 0, failures = 0;

  tmr_reg #(.W(W), .RESET_VAL(8'h5A)) dut (.clk, .rst_n, .d, .upset, .q, .mismatch);

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s q=%h d=%h", what, q, d); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = 0; upset = '0;
    #12;
    chk("reset value", q == 8'h5A && !mismatch);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      logic [W-1:0] v, m;
      int k;
      v = W'($urandom);
      m = W'($urandom) | 1;
      k = $urandom % 3;
      @(negedge clk);
      d = v; upset = '0; upset[k] = m;
      @(negedge clk);
      chk("single upset masked", q == v);
      chk("mismatch seen", mismatch);
      upset = '0;
      @(negedge clk);
      chk("scrubbed", q == v && !mismatch);
      // double upset on the same bits: majority follows the two upset copies
      upset[0] = m; upset[1] = m;
      @(negedge clk);
      chk("double upset follows majority", q == (v ^ m));
      upset = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
