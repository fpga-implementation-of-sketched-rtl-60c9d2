// piso_tb: 8-entry PISO.  A producer loads a new random batch whenever ready
// is high (sometimes holding back); the consumer side checks that the time
// stamps come out in batch order, one per clock, and that back-to-back
// batches leave no idle clock.
module piso_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int N = 8;
  logic rst_n, load, ready, valid;
  logic [0:N-1][11:0] batch;
  logic [11:0] x;
  int checks = 0, failures = 0;

  piso #(.N(N)) u_dut (.clk(clk), .rst_n(rst_n), .load(load), .batch(batch),
    .ready(ready), .valid(valid), .x(x));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int exp_q[$];
  int nbatch = 0, gap_free = 0, first_of_batch = 0, in_burst = 0;

  always @(negedge clk) if (rst_n) begin
    if (valid) begin
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else check("x", int'(x), exp_q.pop_front());
    end
  end

  initial begin
    rst_n = 1'b0; load = 1'b0; batch = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (nbatch < 20) begin
      load = 1'b0;
      if (ready && (nbatch < 10 || $urandom_range(0, 2) != 0)) begin
        load = 1'b1;
        for (int k = 0; k < N; k++) batch[k] = 12'($urandom);
      end
      #1;
      if (load && ready) begin
        for (int k = 0; k < N; k++) exp_q.push_back(int'(batch[k]));
        nbatch++;
      end
      @(negedge clk);
    end
    load = 1'b0;
    // the first 10 batches were loaded back to back: 10*N valid clocks in a row
    repeat (N * 12) @(negedge clk);
    check("drained", exp_q.size(), 0);
    check("gap-free burst", in_burst, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // count the longest run of consecutive valid clocks
  int run = 0;
  always @(posedge clk) if (rst_n) begin
    run = valid ? run + 1 : 0;
    if (run >= 10 * N) in_burst = 1;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
