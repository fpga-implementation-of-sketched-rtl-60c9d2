// stop_gen_tb: default 44-clock period (4.545 MHz at 200 MHz).  For delays
// of 0, 1, 7 and 15 steps it checks that stop repeats every 44 clocks, is
// high for 22, and rises exactly 2 x delay clocks (10 ns per step) after the
// rise seen with delay 0.
module stop_gen_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, stop, pstart;
  logic [4:0] delay;
  int checks = 0, failures = 0;

  stop_gen u_dut (.clk(clk), .rst_n(rst_n), .delay(delay), .stop(stop), .period_start(pstart));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // clock counter and rise / fall times of stop
  int cyc = 0, last_rise = -1, last_fall = -1, period = 0, width = 0, ref_rise = 0;
  logic stop_q = 1'b0;
  always @(posedge clk) begin
    cyc++;
    #1;
    if (stop && !stop_q) begin
      if (last_rise >= 0) period = cyc - last_rise;
      last_rise = cyc;
    end
    if (!stop && stop_q) begin
      last_fall = cyc;
      width = last_fall - last_rise;
    end
    stop_q = stop;
  end

  int dl[4] = '{0, 1, 7, 15};
  initial begin
    rst_n = 1'b0; delay = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    foreach (dl[j]) begin
      delay = 5'(dl[j]);
      repeat (44 * 4) @(negedge clk);
      check($sformatf("period d=%0d", dl[j]), period, 44);
      check($sformatf("width d=%0d", dl[j]), width, 22);
      // rise position relative to the reference period start (mod 44)
      if (j == 0) ref_rise = last_rise % 44;
      else check($sformatf("shift d=%0d", dl[j]), ((last_rise - ref_rise) % 44 + 44) % 44, 2 * dl[j]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
