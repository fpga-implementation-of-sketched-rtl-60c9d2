// pc_accum_tb: 6 pixels, frame_target = 4, random time stamps of which
// about half are 0 (no photon).  A model counts non-zero time stamps per
// pixel over frames 1..3 and the read-out in frame 4 must match, in pixel
// order, for three acquisition periods.
module pc_accum_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NPIX = 6, TGT = 4;
  logic rst_n, s0_valid, s0_acc, s0_last, out_valid;
  logic [2:0] s0_pxl;
  logic [11:0] s0_x;
  logic [15:0] out_pc;
  int checks = 0, failures = 0, outs = 0;

  pc_accum #(.NPIX(NPIX)) u_dut (.clk(clk), .rst_n(rst_n), .s0_valid(s0_valid),
    .s0_pxl(s0_pxl), .s0_acc(s0_acc), .s0_last(s0_last), .s0_x(s0_x),
    .out_valid(out_valid), .out_pc(out_pc));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int model [NPIX];
  int exp_q[$];

  always @(negedge clk) if (rst_n && out_valid) begin
    outs++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else check("pc", int'(out_pc), exp_q.pop_front());
  end

  initial begin
    rst_n = 1'b0; s0_valid = 1'b0; s0_acc = 1'b0; s0_last = 1'b0; s0_pxl = '0; s0_x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int fr = 1; fr <= 3 * TGT; fr++) begin
      int f, hit;
      f = (fr - 1) % TGT + 1;
      for (int p = 0; p < NPIX; p++) begin
        s0_valid = 1'b1; s0_pxl = 3'(p);
        s0_acc = (f > 1 && f < TGT); s0_last = (f == TGT);
        s0_x = ($urandom_range(0, 1) == 0) ? 12'd0 : 12'($urandom_range(1, 4095));
        if (p == 0 && fr > 1 && f < TGT) s0_x = 12'd1;     // smallest hit
        hit = int'(s0_x != 0);
        if (f == TGT) exp_q.push_back(model[p]);
        model[p] = (f > 1 && f < TGT) ? model[p] + hit : hit;
        @(negedge clk);
      end
    end
    s0_valid = 1'b0;
    repeat (3) @(negedge clk);
    check("outputs", outs, 3 * NPIX);
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
