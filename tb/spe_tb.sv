// spe_tb: drives SPE #3 (i = 2) and SPE #1 (i = 0) with a time stamp every
// clock (edge values around the wrap points and random ones) and checks phi
// one clock later for each of the three spline selections.
module spe_tb;
  import sketch_pkg::*;
  import sketch_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [11:0] x;
  spline_e     p_sel;
  logic [15:0] phi0, phi2;
  int checks = 0, failures = 0;

  spe #(.IDX(0)) u_spe0 (.clk(clk), .x(x), .p_sel(p_sel), .phi(phi0));
  spe #(.IDX(2)) u_spe2 (.clk(clk), .x(x), .p_sel(p_sel), .phi(phi2));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int xs[$];
  initial begin
    xs = '{0, 1, 15, 16, 1023, 1024, 1025, 2047, 2048, 2049, 3071, 3072, 4095};
    for (int k = 0; k < 200; k++) xs.push_back(int'($urandom_range(0, 4095)));
    for (int kind = 0; kind < 3; kind++) begin
      p_sel = spline_e'(kind);
      foreach (xs[k]) begin
        x = 12'(xs[k]);
        @(negedge clk);           // rom read happened at the posedge
        check($sformatf("kind%0d i0 x=%0d", kind, xs[k]), int'(phi0), ref_phi(kind, xs[k], 0));
        check($sformatf("kind%0d i2 x=%0d", kind, xs[k]), int'(phi2), ref_phi(kind, xs[k], 2));
      end
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
