// frame_ctrl_tb: a 5-pixel frame, frame_target = 4, valid with random gaps.
// Checks pxl_ctr, frame, the acc / last decodes and frame_done against a
// counting model over several acquisition periods.
module frame_ctrl_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NPIX = 5;
  logic rst_n, valid, acc, last, done;
  logic [9:0] target, frame;
  logic [2:0] pxl;
  int checks = 0, failures = 0;

  frame_ctrl #(.NPIX(NPIX)) u_dut (.clk(clk), .rst_n(rst_n), .valid(valid),
    .frame_target(target), .pxl_ctr(pxl), .frame(frame), .acc(acc), .last(last),
    .frame_done(done));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int mp, mf;
  initial begin
    rst_n = 1'b0; valid = 1'b0; target = 10'd4;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    mp = 0; mf = 1;
    for (int k = 0; k < 200; k++) begin
      valid = 1'($urandom_range(0, 3) != 0);
      #1;
      check("pxl", int'(pxl), mp);
      check("frame", int'(frame), mf);
      check("acc", int'(acc), int'(mf > 1 && mf < 4));
      check("last", int'(last), int'(mf == 4));
      check("done", int'(done), int'(valid && mp == NPIX - 1));
      @(negedge clk);
      if (valid) begin
        if (mp == NPIX - 1) begin mp = 0; mf = (mf == 4) ? 1 : mf + 1; end
        else mp++;
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
