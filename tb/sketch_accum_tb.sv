// sketch_accum_tb: 8 pixels, frame_target = 5, one pixel per clock with
// occasional idle clocks.  Random 16-bit phi words arrive one clock after
// each pixel's stage-0 controls.  A model keeps the per-pixel lane sums
// (restarted in frames 1 and 5, added in frames 2..4) and the read-out in
// frame 5 must equal the sum of frames 1..4 for every pixel, in pixel order.
module sketch_accum_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NPIX = 8, TGT = 5;
  logic rst_n, s0_valid, s0_acc, s0_last, out_valid;
  logic [2:0] s0_pxl;
  logic [0:3][15:0] s1_b, out_z;
  int checks = 0, failures = 0, outs = 0;

  sketch_accum #(.NPIX(NPIX)) u_dut (.clk(clk), .rst_n(rst_n), .s0_valid(s0_valid),
    .s0_pxl(s0_pxl), .s0_acc(s0_acc), .s0_last(s0_last), .s1_b(s1_b),
    .out_valid(out_valid), .out_z(out_z));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int model [NPIX][4];
  int exp_q[$];
  logic [0:3][15:0] nxt;
  int pend_pxl, pend_acc;
  logic pend;

  // compare the read-out stream with the model's expected words
  always @(negedge clk) if (rst_n && out_valid) begin
    outs++;
    for (int i = 0; i < 4; i++) begin
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else check($sformatf("out lane%0d", i), int'(out_z[i]), exp_q.pop_front());
    end
  end

  initial begin
    rst_n = 1'b0; s0_valid = 1'b0; s0_acc = 1'b0; s0_last = 1'b0; s0_pxl = '0;
    s1_b = '0; pend = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int fr = 1; fr <= 2 * TGT; fr++) begin
      int f;
      f = (fr - 1) % TGT + 1;
      for (int p = 0; p < NPIX; p++) begin
        if ($urandom_range(0, 4) == 0) begin     // idle clock
          s0_valid = 1'b0;
          s1_b = nxt; pend = 1'b0;
          @(negedge clk);
        end
        s0_valid = 1'b1; s0_pxl = 3'(p);
        s0_acc = (f > 1 && f < TGT); s0_last = (f == TGT);
        if (f == TGT) for (int i = 0; i < 4; i++) exp_q.push_back(model[p][i]);
        for (int i = 0; i < 4; i++) nxt[i] = 16'($urandom);
        for (int i = 0; i < 4; i++)
          model[p][i] = (f > 1 && f < TGT) ? (model[p][i] + int'(nxt[i])) % 65536 : int'(nxt[i]);
        @(posedge clk);
        #1 s1_b = nxt;        // phi of this pixel arrives in the next clock
        @(negedge clk);
      end
    end
    s0_valid = 1'b0;
    repeat (3) @(negedge clk);
    check("outputs", outs, 2 * NPIX);
    check("leftover", exp_q.size(), 0);
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
