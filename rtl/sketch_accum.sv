// sketch_accum: per-pixel accumulation of the M spline values over frames.
//
// One block RAM word per pixel holds the M running sums (M x 16 bits, 64 bits
// for M = 4) of phi(B).  For each pixel the stored word is read with the
// pixel's time stamp and the new phi values arrive from the SPEs one clock
// later; in that clock the word is written back.  The write data is chosen
// as in the paper's diagram: the new values alone when the frame is not
// 1 < frame < frame_target, the per-lane sums of stored and new values
// otherwise.  In frame frame_target the stored word (the sum of frames
// 1..frame_target-1) is sent to the read-out FIFOs instead of being added
// to, so at the paper's 512 frames each word carries 511 frames and cannot
// overflow 16 bits.  The sums wrap modulo 2**16 per lane.
//
// Timing: the read takes one clock and the read-modify-write completes in the
// second, so one pixel per clock streams through without stalls.  A pixel's
// word is touched once per frame, so there is no read-after-write hazard
// as long as a frame has more than one pixel.  The paper draws a register on
// the read-address path; here the write address is delayed instead, which
// aligns the same two clocks.
module sketch_accum
  import sketch_pkg::*;
#(
  parameter int NPIX = NUM_PIXELS,
  parameter int M    = M_SKETCH,
  parameter int DW   = PHI_W,
  localparam int PW  = (NPIX > 1) ? $clog2(NPIX) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // stage 0: the time stamp's pixel and frame decodes
  input  logic                 s0_valid,
  input  logic [PW-1:0]        s0_pxl,
  input  logic                 s0_acc,
  input  logic                 s0_last,
  // stage 1: the SPE outputs for that time stamp
  input  logic [0:M-1][DW-1:0] s1_b,
  // read-out of a finished pixel
  output logic                 out_valid,
  output logic [0:M-1][DW-1:0] out_z
);

  logic          s1_valid, s1_acc, s1_last;
  logic [PW-1:0] s1_pxl;
  logic [0:M-1][DW-1:0] rdata, wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_acc   <= 1'b0;
      s1_last  <= 1'b0;
      s1_pxl   <= '0;
    end else begin
      s1_valid <= s0_valid;
      s1_acc   <= s0_acc;
      s1_last  <= s0_last;
      s1_pxl   <= s0_pxl;
    end
  end

  sdp_ram #(.DEPTH(NPIX), .W(M * DW)) u_bram (
    .clk  (clk),
    .we   (s1_valid),
    .waddr(s1_pxl),
    .wdata(wdata),
    .raddr(s0_pxl),
    .rdata(rdata)
  );

  always_comb begin
    for (int i = 0; i < M; i++) wdata[i] = s1_acc ? s1_b[i] + rdata[i] : s1_b[i];
    out_valid = s1_valid && s1_last;
    out_z     = rdata;
  end

endmodule
