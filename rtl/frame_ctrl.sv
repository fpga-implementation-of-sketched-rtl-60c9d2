// frame_ctrl: pixel counter (Pxl_ctr) and frame counter of the serial stream.
//
// Every valid time stamp belongs to the pixel given by pxl_ctr; after the
// last pixel of a frame (NUM_PIXELS-1) the counter returns to 0 and the frame
// index advances.  Frames are numbered 1..frame_target as in the paper's
// block diagram; after frame frame_target the count starts again at 1.  The
// host sets frame_target (512 in the paper, at most 512 for <16,7>).
//
// Two decodes steer the accumulators, both taken from the diagram:
//   acc  = 1 < frame && frame < frame_target : add to the stored value
//   last = frame == frame_target             : send the stored value out
// In every other frame (frame 1, and the last frame) the new value is
// written over the stored one, which restarts the sum.
//
// Timing: pxl_ctr, frame, acc and last describe the sample presented with
// valid in the same clock; the counters advance at the clock edge.
// frame_target should only change while the stream is idle or in reset.
module frame_ctrl
  import sketch_pkg::*;
#(
  parameter int NPIX = NUM_PIXELS,
  parameter int FW   = FRAME_W,
  localparam int PW  = (NPIX > 1) ? $clog2(NPIX) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid,
  input  logic [FW-1:0] frame_target,
  output logic [PW-1:0] pxl_ctr,
  output logic [FW-1:0] frame,
  output logic          acc,
  output logic          last,
  output logic          frame_done     // pulses with the last pixel of a frame
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pxl_ctr <= '0;
      frame   <= FW'(1);
    end else if (valid) begin
      if (pxl_ctr == PW'(NPIX - 1)) begin
        pxl_ctr <= '0;
        frame   <= (frame >= frame_target) ? FW'(1) : frame + FW'(1);
      end else begin
        pxl_ctr <= pxl_ctr + PW'(1);
      end
    end
  end

  always_comb begin
    acc        = (frame > FW'(1)) && (frame < frame_target);
    last       = (frame == frame_target);
    frame_done = valid && (pxl_ctr == PW'(NPIX - 1));
  end

endmodule
