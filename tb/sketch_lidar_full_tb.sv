// sketch_lidar_full_tb: one complete acquisition of the sketch compressor at
// its real size, every parameter at its default: 192 x 128 = 24576 pixels,
// batches of 256 time stamps (two rows), 512 frames (frame_target = 512),
// spline p = 1.  That is 12.6 million time stamps streamed at one per clock.
// A reference model accumulates phi over frames 1..511 and counts photons;
// during frame 512 the three FIFOs fill with all 24576 pixels and a host
// process drains them through the 32-bit port and checks every word.  The
// frame time (24576 clocks for a gap-free frame), the STOP delay shift and
// the mechanisms of the data path are counted as in the reduced test.
module sketch_lidar_full_tb;
  import sketch_pkg::*;
  import sketch_ref_pkg::*;

  localparam int NPIX  = NUM_PIXELS;
  localparam int BATCH = 2 * SENSOR_COLS;
  localparam int TGT   = MAX_FRAMES;
  localparam int NACQ  = 1;
  localparam int PWW   = $clog2(NPIX + 1);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, batch_load, batch_ready, rd_en, fifo_sel, fetch_pc, rd_valid;
  logic frame_done, stop, stop_period;
  logic [0:BATCH-1][11:0] batch;
  spline_e p_sel;
  logic [9:0] frame_target, frame;
  logic [4:0] stop_delay;
  logic [31:0] rd_data;
  logic [2:0] fifo_empty, fifo_full;
  logic [PWW-1:0] fifo_count;

  sketch_lidar_top u_dut (
    .clk(clk), .rst_n(rst_n), .batch_load(batch_load), .batch(batch),
    .batch_ready(batch_ready), .p_sel(p_sel), .frame_target(frame_target),
    .stop_delay(stop_delay), .rd_en(rd_en), .fifo_sel(fifo_sel), .fetch_pc(fetch_pc),
    .rd_data(rd_data), .rd_valid(rd_valid), .fifo_empty(fifo_empty),
    .fifo_full(fifo_full), .fifo_count(fifo_count), .frame(frame),
    .frame_done(frame_done), .stop(stop), .stop_period(stop_period));

  int checks = 0, failures = 0;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // mechanism counters
  int n_acc = 0, n_readout_px = 0, n_nophoton = 0, n_wrap = 0, n_exact = 0;
  int n_mode[3] = '{0, 0, 0};
  int n_sel[3] = '{0, 0, 0};
  int n_idle = 0, n_fullrate = 0, n_stop_moved = 0;

  // ---------------- reference model ----------------
  int zsum [NPIX][4];
  int pcnt [NPIX];
  longint exp_q[3][$];     // expected words per source: 0 FIFO1, 1 FIFO2, 2 FIFO_PC

  function automatic void model_sample(int px, int f, int kind, int x);
    if (f == TGT) begin
      exp_q[0].push_back({zsum[px][0][15:0], zsum[px][1][15:0]});
      exp_q[1].push_back({zsum[px][2][15:0], zsum[px][3][15:0]});
      exp_q[2].push_back(longint'(pcnt[px]));
    end
    for (int i = 0; i < 4; i++)
      zsum[px][i] = (f > 1 && f < TGT) ? (zsum[px][i] + ref_phi(kind, x, i)) % 65536
                                       : ref_phi(kind, x, i);
    pcnt[px] = (f > 1 && f < TGT) ? pcnt[px] + int'(x != 0) : int'(x != 0);
  endfunction

  // ---------------- producer ----------------
  bit producer_done = 0;
  initial begin
    int sent, px, f, acq, kind, x;
    rst_n = 1'b0; batch_load = 1'b0; batch = '0; p_sel = SPLINE_P1;
    frame_target = 10'(TGT); stop_delay = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    sent = 0;
    while (sent < NACQ * TGT * NPIX) begin
      batch_load = 1'b0;
      if (batch_ready && !(sent / NPIX == 1 && $urandom_range(0, 9) == 0)) begin
        acq = sent / (TGT * NPIX);
        kind = acq % 3;
        if (sent % (TGT * NPIX) == 0) p_sel = spline_e'(kind);   // acquisition boundary
        n_mode[kind]++;
        batch_load = 1'b1;
        for (int k = 0; k < BATCH; k++) begin
          px = (sent + k) % NPIX;
          f  = ((sent + k) / NPIX) % TGT + 1;
          case ($urandom_range(0, 5))
            0, 1:    x = 0;
            2:       x = 1024 * int'($urandom_range(1, 3));
            default: x = int'($urandom_range(1, 4095));
          endcase
          batch[k] = 12'(x);
          if (x == 0) n_nophoton++;
          if (x == 1024 || x == 2048 || x == 3072) n_exact++;
          if (x != 0 && x < 3072) n_wrap++;
          if (f > 1 && f < TGT) n_acc++;
          model_sample(px, f, kind, x);
        end
        sent += BATCH;
      end else if (rst_n && !batch_ready) begin
        // stream running
      end else n_idle++;
      @(negedge clk);
    end
    batch_load = 1'b0;
    producer_done = 1;
  end

  // ---------------- host reader ----------------
  int src_q[$];
  initial begin
    rd_en = 1'b0; fifo_sel = 1'b0; fetch_pc = 1'b0;
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      rd_en = 1'b0;
      if (fifo_empty == 3'b000) begin
        for (int s = 2; s >= 0; s--) begin     // PC, then FIFO1, then FIFO2
          rd_en = 1'b1; fetch_pc = (s == 2); fifo_sel = (s == 1);
          n_sel[s]++;
          src_q.push_back(s);
          if (s != 0) @(negedge clk);
        end
      end
    end
  end

  always @(posedge clk) if (rst_n && rd_valid) begin
    int s;
    s = src_q.pop_front();
    if (exp_q[s].size() == 0) begin
      failures++; $display("FAIL unexpected word from source %0d", s);
    end else begin
      check($sformatf("source %0d word", s), longint'(rd_data), exp_q[s].pop_front());
      if (s == 2) n_readout_px++;
    end
  end

  // ---------------- rate: a gap-free frame takes NPIX clocks ----------------
  int cyc = 0, last_done = -1;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && frame_done) begin
      if (last_done >= 0 && cyc - last_done == NPIX) n_fullrate++;
      if (last_done >= 0 && cyc - last_done < NPIX) begin
        failures++; $display("FAIL frame shorter than NPIX clocks");
      end
      last_done = cyc;
    end
  end

  // ---------------- STOP delay: rise moves by the delay ----------------
  int rise_ref = -1;
  initial begin
    int t0, t1;
    @(posedge rst_n);
    repeat (30) @(posedge clk);
    @(posedge stop); t0 = cyc;
    stop_delay = 5'd10;
    repeat (3) @(posedge stop);
    t1 = cyc;
    check("stop shift", ((t1 - t0) % 44 + 44) % 44, 20);   // 10 steps of 2 clocks
    n_stop_moved++;
  end

  // ---------------- end ----------------
  initial begin
    wait (producer_done);
    repeat (4 * NPIX + 20) @(negedge clk);
    for (int s = 0; s < 3; s++) check($sformatf("left in source %0d", s), exp_q[s].size(), 0);
    check("pixels read out", n_readout_px, (NACQ) * NPIX);
    if (n_acc == 0)        begin failures++; $display("FAIL never accumulated"); end
    if (n_readout_px == 0) begin failures++; $display("FAIL never read out"); end
    if (n_nophoton == 0)   begin failures++; $display("FAIL no empty time stamp"); end
    if (n_exact == 0)      begin failures++; $display("FAIL no diff == 0 case"); end
    if (n_wrap == 0)       begin failures++; $display("FAIL no wrap-around"); end
    if (n_mode[0] == 0) begin failures++; $display("FAIL spline mode p1 unused"); end
    for (int k = 0; k < 3; k++)
      if (n_sel[k] == 0) begin failures++; $display("FAIL read source %0d unused", k); end
    if (n_idle == 0)       begin failures++; $display("FAIL no idle clock in stream"); end
    if (n_fullrate == 0)   begin failures++; $display("FAIL no full-rate frame"); end
    if (n_stop_moved == 0) begin failures++; $display("FAIL stop delay not exercised"); end
    $display("mechanisms: acc=%0d readout=%0d nophoton=%0d exact=%0d wrap=%0d modes=%0d/%0d/%0d reads=%0d/%0d/%0d idle=%0d fullrate=%0d",
             n_acc, n_readout_px, n_nophoton, n_exact, n_wrap, n_mode[0], n_mode[1], n_mode[2],
             n_sel[0], n_sel[1], n_sel[2], n_idle, n_fullrate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (13_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
