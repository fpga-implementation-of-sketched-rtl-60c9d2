// pc_accum: per-pixel photon counter over frames.
//
// The sensor reports time stamp 0 when a pixel saw no photon in a frame.  A
// comparator (x > 0) turns each time stamp into an increment of 1 or 0,
// which is added to the pixel's count held in a block RAM word.  Frame
// handling is the same as in sketch_accum: the increment alone is written
// outside 1 < frame < frame_target, the sum inside, and in frame
// frame_target the stored count (frames 1..frame_target-1) is sent to the
// photon-count FIFO.  The count is the n of the sketch equation, used by the
// host to normalise the sketch.
//
// Timing: read in the clock of the time stamp, write-back one clock later,
// one pixel per clock.  CW is this design's choice: 16 bits, which holds the
// 511 counts of a 512-frame acquisition.
module pc_accum
  import sketch_pkg::*;
#(
  parameter int NPIX = NUM_PIXELS,
  parameter int TSW  = TS_BITS,
  parameter int CW   = 16,
  localparam int PW  = (NPIX > 1) ? $clog2(NPIX) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           s0_valid,
  input  logic [PW-1:0]  s0_pxl,
  input  logic           s0_acc,
  input  logic           s0_last,
  input  logic [TSW-1:0] s0_x,
  output logic           out_valid,
  output logic [CW-1:0]  out_pc
);

  logic          s1_valid, s1_acc, s1_last, s1_hit;
  logic [PW-1:0] s1_pxl;
  logic [CW-1:0] rdata, wdata, inc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_acc   <= 1'b0;
      s1_last  <= 1'b0;
      s1_hit   <= 1'b0;
      s1_pxl   <= '0;
    end else begin
      s1_valid <= s0_valid;
      s1_acc   <= s0_acc;
      s1_last  <= s0_last;
      s1_hit   <= (s0_x > '0);
      s1_pxl   <= s0_pxl;
    end
  end

  sdp_ram #(.DEPTH(NPIX), .W(CW)) u_bram (
    .clk  (clk),
    .we   (s1_valid),
    .waddr(s1_pxl),
    .wdata(wdata),
    .raddr(s0_pxl),
    .rdata(rdata)
  );

  always_comb begin
    inc       = s1_hit ? CW'(1) : CW'(0);
    wdata     = s1_acc ? rdata + inc : inc;
    out_valid = s1_valid && s1_last;
    out_pc    = rdata;
  end

endmodule
