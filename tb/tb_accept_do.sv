// tb_accept_do: self-checking test of the acceptance pulse stretcher.
//
// A reference model written here (a down-counter loaded with the pulse length on each
// strobe) predicts the output every cycle while random strobes arrive, sparse enough
// to see whole pulses and dense enough to retrigger running ones. A single isolated
// strobe is also checked for its exact width and its one-cycle delay.
module tb_accept_do;
  localparam int W = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic strobe = 1'b0, do_out;
  int checks = 0, failures = 0;
  int ref_cnt = 0, high_cycles = 0, retriggers = 0;

  accept_do #(.PULSE_CYCLES(W)) dut (.clk, .rst_n, .strobe, .do_out);

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (do_out != (ref_cnt > 0)) begin
      failures++; $display("FAIL: do_out=%b model count=%0d at %0t", do_out, ref_cnt, $time);
    end
    if (strobe && ref_cnt > 0) retriggers++;
    ref_cnt = strobe ? W : (ref_cnt > 0 ? ref_cnt - 1 : 0);
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    // isolated strobe: high for exactly W cycles, starting one cycle later
    @(negedge clk); strobe = 1'b1;
    @(negedge clk); strobe = 1'b0;
    for (int i = 0; i < W + 3; i++) begin
      if (do_out) high_cycles++;
      @(negedge clk);
    end
    checks++;
    if (high_cycles != W) begin failures++; $display("FAIL: width %0d exp %0d", high_cycles, W); end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk); strobe = ($urandom % 6 == 0);
    end
    @(negedge clk); strobe = 1'b0;
    repeat (W + 2) @(negedge clk);
    checks++;
    if (retriggers == 0 || do_out) begin failures++; $display("FAIL: no retrigger or stuck high"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
