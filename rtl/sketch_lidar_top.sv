// sketch_lidar_top: on-line spline-sketch compression of SPAD time stamps.
//
// A SPAD camera with 192 x 128 pixels produces one 12-bit time stamp per
// pixel per frame (0 = no photon).  Instead of building a histogram per
// pixel, this block keeps for every pixel M = 4 running sums of spline
// functions of the time stamp (a "sketch") plus a photon count, and sends
// them to the host only once every frame_target frames (512 in the paper),
// which divides the output data rate by that factor.  The host later divides
// the sums by the count and solves for the time of flight.
//
// Data path, one pixel per clock, no stalls:
//   piso         batch of 256 decoded time stamps -> serial stream x
//   frame_ctrl   pixel counter and frame index, accumulate / last decodes
//   spe_array    4 SPEs: B = (x - i*1024) mod 4096 -> ROM -> phi (1 clock)
//   sketch_accum per-pixel 64-bit BRAM read-modify-write of the four sums
//   pc_accum     per-pixel photon count BRAM read-modify-write
//   readout_fifos FIFO1 (i = 0,1), FIFO2 (i = 2,3), FIFO_PC, host mux
//   stop_gen     4.54 MHz laser trigger with 10 ns delay steps (200 MHz clock)
// The sensor readout/decoding firmware and the USB 3.0 interface are
// outside this block: the batch input and the FIFO read port stand for them.
//
// Latency: a time stamp reaches the accumulators' write-back one clock after
// it leaves the PISO; in the last frame each pixel's results are pushed
// into the FIFOs in that same clock.
//
// What follows the published design: the chain of blocks, the widths, the
// frame conditions and the FIFO split.  This design's own choices: the port
// handshakes, the 200 MHz clock behind the STOP timing, and the two
// alignment assertions at the end (rst_n also disables them, which lint
// reports as a reset used both synchronously and asynchronously).
module sketch_lidar_top
  import sketch_pkg::*;
#(
  parameter int NPIX  = NUM_PIXELS,
  parameter int BATCH = 2 * SENSOR_COLS,
  parameter int TSW   = TS_BITS,
  parameter int M     = M_SKETCH,
  parameter int AW    = LUT_AW,
  parameter int DW    = PHI_W,
  parameter int FRAC  = PHI_FRAC,
  parameter int CW    = 16,
  parameter int FW    = FRAME_W,
  localparam int PW   = (NPIX > 1) ? $clog2(NPIX) : 1,
  localparam int CNTW = $clog2(NPIX + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // decoded time stamps from the sensor firmware
  input  logic                      batch_load,
  input  logic [0:BATCH-1][TSW-1:0] batch,
  output logic                      batch_ready,
  // host configuration
  input  spline_e                   p_sel,
  input  logic [FW-1:0]             frame_target,
  input  logic [4:0]                stop_delay,
  // host read port (USB pipe)
  input  logic                      rd_en,
  input  logic                      fifo_sel,
  input  logic                      fetch_pc,
  output logic [USB_W-1:0]          rd_data,
  output logic                      rd_valid,
  output logic [2:0]                fifo_empty,
  output logic [2:0]                fifo_full,
  output logic [CNTW-1:0]           fifo_count,
  // status and laser trigger
  output logic [FW-1:0]             frame,
  output logic                      frame_done,
  output logic                      stop,
  output logic                      stop_period
);

  logic                 s0_valid, s0_acc, s0_last;
  logic [TSW-1:0]       s0_x;
  logic [PW-1:0]        s0_pxl;
  logic                 s1_valid;
  logic [0:M-1][DW-1:0] s1_b, z;
  logic                 z_valid, pc_valid;
  logic [CW-1:0]        pc;

  piso #(.N(BATCH), .TSW(TSW)) u_piso (
    .clk(clk), .rst_n(rst_n), .load(batch_load), .batch(batch),
    .ready(batch_ready), .valid(s0_valid), .x(s0_x));

  frame_ctrl #(.NPIX(NPIX), .FW(FW)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .valid(s0_valid), .frame_target(frame_target),
    .pxl_ctr(s0_pxl), .frame(frame), .acc(s0_acc), .last(s0_last),
    .frame_done(frame_done));

  spe_array #(.TSW(TSW), .M(M), .AW(AW), .DW(DW), .FRAC(FRAC)) u_spes (
    .clk(clk), .rst_n(rst_n), .valid_in(s0_valid), .x(s0_x), .p_sel(p_sel),
    .valid_out(s1_valid), .b_bus(s1_b));

  sketch_accum #(.NPIX(NPIX), .M(M), .DW(DW)) u_zacc (
    .clk(clk), .rst_n(rst_n), .s0_valid(s0_valid), .s0_pxl(s0_pxl),
    .s0_acc(s0_acc), .s0_last(s0_last), .s1_b(s1_b),
    .out_valid(z_valid), .out_z(z));

  pc_accum #(.NPIX(NPIX), .TSW(TSW), .CW(CW)) u_pcacc (
    .clk(clk), .rst_n(rst_n), .s0_valid(s0_valid), .s0_pxl(s0_pxl),
    .s0_acc(s0_acc), .s0_last(s0_last), .s0_x(s0_x),
    .out_valid(pc_valid), .out_pc(pc));

  readout_fifos #(.DEPTH(NPIX), .M(M), .DW(DW), .CW(CW)) u_out (
    .clk(clk), .rst_n(rst_n), .push(z_valid), .z(z), .pc(pc),
    .rd_en(rd_en), .fifo_sel(fifo_sel), .fetch_pc(fetch_pc),
    .rd_data(rd_data), .rd_valid(rd_valid), .empty(fifo_empty),
    .full(fifo_full), .pc_count(fifo_count));

  stop_gen #(.DIV(44), .STEP(2), .DLW(5)) u_stop (
    .clk(clk), .rst_n(rst_n), .delay(stop_delay), .stop(stop),
    .period_start(stop_period));

  // Both accumulators see the same stage-0 controls, so they finish a pixel
  // together; the SPE bus is aligned with their read data.
  a_acc_aligned: assert property (@(posedge clk) disable iff (!rst_n) z_valid == pc_valid);
  a_spe_aligned: assert property (@(posedge clk) disable iff (!rst_n) z_valid |-> s1_valid);

endmodule
