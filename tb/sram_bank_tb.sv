// sram_bank_tb: random writes and reads against a reference array.  Checks
// the one-cycle read latency, that read data holds while no read is issued,
// and that a write in the same cycle as a read request wins (no read).
module sram_bank_tb;
  localparam int WORDS = 64;
  logic clk = 0, we, re;
  logic [5:0] addr;
  logic [71:0] wdata, rdata, model [WORDS], held;
  logic written [WORDS];
  int checks = 0, failures = 0;

  sram_bank #(.WORDS(WORDS), .W(72)) dut (.clk, .we, .re, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; addr = 0; wdata = 0;
    for (int i = 0; i < WORDS; i++) written[i] = 0;
    // fill
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      we = 1; addr = 6'(i); wdata = {8'($urandom), 32'($urandom), 32'($urandom)};
      model[i] = wdata; written[i] = 1;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we = ($urandom % 4) == 0;
      re = !we && (($urandom % 3) != 0);
      addr = 6'($urandom);
      wdata = {8'($urandom), 32'($urandom), 32'($urandom)};
      held = rdata;
      @(posedge clk);
      #1;
      if (we) begin
        model[addr] = wdata;
        checks++;
        if (rdata !== held) begin failures++; $display("read data changed on write"); end
      end else if (re) begin
        checks++;
        if (rdata !== model[addr]) begin
          failures++;
          $display("addr %0d got %h exp %h", addr, rdata, model[addr]);
        end
      end else begin
        checks++;
        if (rdata !== held) begin failures++; $display("read data not held"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
