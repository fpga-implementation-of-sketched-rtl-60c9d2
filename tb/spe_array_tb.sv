// spe_array_tb: streams one random time stamp per clock into the four SPEs
// and checks every lane of the 64-bit bus one clock later, including the lane
// order (B_1 = sketch entry 0 in the most significant 16 bits) and valid.
module spe_array_tb;
  import sketch_pkg::*;
  import sketch_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, vin, vout;
  logic [11:0] x;
  spline_e p_sel;
  logic [0:3][15:0] bus;
  logic [63:0] flat;
  int checks = 0, failures = 0;

  spe_array u_dut (.clk(clk), .rst_n(rst_n), .valid_in(vin), .x(x), .p_sel(p_sel),
                   .valid_out(vout), .b_bus(bus));
  assign flat = bus;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int prev_x, prev_v;
  initial begin
    rst_n = 1'b0; vin = 1'b0; x = '0; p_sel = SPLINE_P1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    prev_v = -1;
    for (int k = 0; k < 600; k++) begin
      if (k == 200) p_sel = SPLINE_P2;
      if (k == 400) p_sel = SPLINE_FOURIER;
      x   = 12'($urandom_range(0, 4095));
      vin = 1'($urandom_range(0, 1));
      @(negedge clk);
      check("valid", int'(vout), int'(vin));
      if (k != 200 && k != 400) begin
        for (int i = 0; i < 4; i++)
          check($sformatf("k%0d lane%0d", k, i), int'(flat[63 - 16*i -: 16]),
                ref_phi(int'(p_sel), int'(x), i));
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
