// sketch_lidar_sweep_tb: the distance-sweep experiment at reduced pixel count.
//
// A flat target at 1 m gives a round-trip time of 6.67 ns = 167 bins of
// 40 ps.  Delaying the STOP signal by k x 10 ns (k = 0..15) moves the
// measured time by k x 250 bins.  For each k this test programs stop_delay,
// runs one full acquisition of 512 frames on 16 pixels (p = 1), where each
// pixel detects a photon in a frame with probability 1/2, its time jittered
// by up to +-24 bins, and reads the FIFOs back.  Every word is compared with
// a reference model, and the time of flight is then recovered from each
// pixel's 4-entry linear-spline sketch with a simple two-neighbour estimator:
// for a pulse at t in interval j, entries j and j-1 hold frac and 1-frac of
// t/1024, so t ~= 1024 x (j + z_j / (z_{j-1} + z_j)).  The estimate must lie
// within 16 bins of the true time after removing the known contribution of
// empty frames (time stamp 0 adds 1.0 to entry 3 for p = 1).
module sketch_lidar_sweep_tb;
  import sketch_pkg::*;
  import sketch_ref_pkg::*;

  localparam int NPIX  = 16;
  localparam int BATCH = 8;
  localparam int TGT   = 512;
  localparam int BASE  = 167;     // 1 m in 40 ps bins
  localparam int STEPB = 250;     // 10 ns in 40 ps bins

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
  logic [4:0] fifo_count;

  sketch_lidar_top #(.NPIX(NPIX), .BATCH(BATCH)) u_dut (
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
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int zsum [NPIX][4];
  int pcnt [NPIX];
  int ez [NPIX][4];
  int epc [NPIX];

  // read one word from source s (0 FIFO1, 1 FIFO2, 2 FIFO_PC)
  task automatic host_read(int s, output logic [31:0] w);
    rd_en = 1'b1; fetch_pc = (s == 2); fifo_sel = (s == 1);
    @(negedge clk);
    rd_en = 1'b0;
    if (!rd_valid) begin failures++; $display("FAIL no read data"); end
    w = rd_data;
  endtask

  initial begin
    int x, t, tof, est, zj, zjm, emp, best, bsum;
    logic [31:0] w0, w1, wpc;
    real tf;
    rst_n = 1'b0; batch_load = 1'b0; batch = '0; p_sel = SPLINE_P1;
    frame_target = 10'(TGT); stop_delay = '0;
    rd_en = 1'b0; fifo_sel = 1'b0; fetch_pc = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k <= 15; k++) begin
      stop_delay = 5'(k);
      tof = BASE + STEPB * k;
      // one acquisition: frames 1..TGT, one batch per half frame
      for (int f = 1; f <= TGT; f++) begin
        for (int b = 0; b < NPIX / BATCH; b++) begin
          while (!batch_ready) @(negedge clk);
          for (int j = 0; j < BATCH; j++) begin
            int px;
            px = b * BATCH + j;
            if ($urandom_range(0, 1) == 0) x = 0;
            else begin
              x = tof + int'($urandom_range(0, 48)) - 24;
              if (x < 1) x = 1;
            end
            batch[j] = 12'(x);
            if (f == TGT) begin
              for (int i = 0; i < 4; i++) ez[px][i] = zsum[px][i];
              epc[px] = pcnt[px];
            end
            for (int i = 0; i < 4; i++)
              zsum[px][i] = (f > 1 && f < TGT) ? (zsum[px][i] + ref_phi(0, x, i)) % 65536
                                               : ref_phi(0, x, i);
            pcnt[px] = (f > 1 && f < TGT) ? pcnt[px] + int'(x != 0) : int'(x != 0);
          end
          batch_load = 1'b1;
          @(negedge clk);
          batch_load = 1'b0;
        end
      end
      // wait for the read-out of this acquisition, then drain and check
      while (fifo_count != 5'(NPIX)) @(negedge clk);
      for (int px = 0; px < NPIX; px++) begin
        host_read(2, wpc);
        host_read(0, w0);
        host_read(1, w1);
        check($sformatf("d%0d px%0d pc", k, px), wpc, epc[px]);
        check($sformatf("d%0d px%0d z01", k, px), w0, {ez[px][0][15:0], ez[px][1][15:0]});
        check($sformatf("d%0d px%0d z23", k, px), w1, {ez[px][2][15:0], ez[px][3][15:0]});
        // depth estimate from the sketch, empty frames removed from entry 3
        begin
          int z[4];
          z[0] = int'(w0[31:16]); z[1] = int'(w0[15:0]);
          z[2] = int'(w1[31:16]); z[3] = int'(w1[15:0]);
          emp = (TGT - 1) - int'(wpc);
          z[3] -= emp * 128;
          best = 0; bsum = -1;
          for (int j = 0; j < 4; j++)
            if (z[j] + z[(j + 3) % 4] > bsum) begin bsum = z[j] + z[(j + 3) % 4]; best = j; end
          zj = z[best]; zjm = z[(best + 3) % 4];
          tf = 1024.0 * (real'(best) + real'(zj) / real'(zj + zjm));
          est = int'(tf) % 4096;
          checks++;
          if (est < tof - 16 || est > tof + 16) begin
            failures++;
            $display("FAIL delay %0d px %0d: ToF estimate %0d bins, true %0d", k, px, est, tof);
          end
          if (px == 0) $display("delay %2d x 10 ns: true ToF %4d bins, estimate %4d bins, photons %0d",
                                k, tof, est, int'(wpc));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
