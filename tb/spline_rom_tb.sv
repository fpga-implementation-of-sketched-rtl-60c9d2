// spline_rom_tb: reads every address of the p = 1, p = 2 and Fourier ROMs
// (256 x 16 bits) and compares with the reference spline values; also checks
// the one-clock read latency by changing the address and sampling before and
// after the edge.
module spline_rom_tb;
  import sketch_pkg::*;
  import sketch_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0]  addr;
  logic [15:0] d1, d2, df;
  int checks = 0, failures = 0;

  spline_rom #(.KIND(SPLINE_P1))      u_p1 (.clk(clk), .addr(addr), .data(d1));
  spline_rom #(.KIND(SPLINE_P2))      u_p2 (.clk(clk), .addr(addr), .data(d2));
  spline_rom #(.KIND(SPLINE_FOURIER)) u_f  (.clk(clk), .addr(addr), .data(df));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    addr = 8'd0;
    @(negedge clk);
    for (int a = 0; a < 256; a++) begin
      addr = 8'(a);
      @(negedge clk);
      check($sformatf("p1[%0d]", a), int'(d1), ref_phi_t(0, a));
      check($sformatf("p2[%0d]", a), int'(d2), ref_phi_t(1, a));
      check($sformatf("f[%0d]",  a), int'(df), ref_phi_t(2, a));
    end
    // latency: the new address is not visible before the clock edge
    addr = 8'd64;
    @(negedge clk);
    addr = 8'd10;
    #1 check("p1 holds before edge", int'(d1), 128);
    @(negedge clk);
    check("p1 after edge", int'(d1), 20);
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
