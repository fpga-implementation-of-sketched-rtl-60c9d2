// readout_fifos: the three read-out FIFOs and the host-side multiplexer.
//
// At the last frame of an acquisition every pixel's M = 4 sketch sums
// (64 bits) and its photon count leave the accumulators, one pixel per
// clock.  The USB pipe is 32 bits wide, so the sketch word is split: FIFO1
// takes the upper half (sketch entries i = 0 and 1) and FIFO2 the lower half
// (i = 2 and 3); FIFO_PC takes the photon count, zero-extended to 32 bits.
// Each FIFO holds one word per pixel (24576).  The host selects the source
// with fetch_pc (1: FIFO_PC) and, for sketch data, fifo_sel (0: FIFO1,
// 1: FIFO2); a rd_en pops the selected FIFO only.
//
// Timing: rd_data is valid one clock after rd_en, with rd_valid; the select
// lines are sampled with rd_en.  All three FIFOs are pushed in the same
// clock, so they always hold the same number of pixels.
module readout_fifos
  import sketch_pkg::*;
#(
  parameter int DEPTH = NUM_PIXELS,
  parameter int M     = M_SKETCH,
  parameter int DW    = PHI_W,
  parameter int CW    = 16,
  localparam int CNTW = $clog2(DEPTH + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // from the accumulators
  input  logic                 push,
  input  logic [0:M-1][DW-1:0] z,
  input  logic [CW-1:0]        pc,
  // host side
  input  logic                 rd_en,
  input  logic                 fifo_sel,
  input  logic                 fetch_pc,
  output logic [USB_W-1:0]     rd_data,
  output logic                 rd_valid,
  output logic [2:0]           empty,     // {FIFO_PC, FIFO2, FIFO1}
  output logic [2:0]           full,
  output logic [CNTW-1:0]      pc_count   // words waiting in FIFO_PC
);

  localparam int ZW = M * DW;
  logic [ZW-1:0] z_flat;
  logic [2:0]    pop, dvalid;
  logic [USB_W-1:0] dout [3];
  logic [CNTW-1:0]  cnt  [3];
  logic [1:0]    src_q;     // 0: FIFO1, 1: FIFO2, 2: FIFO_PC

  assign z_flat = z;

  // The two-FIFO split is defined for a sketch word of exactly two USB words
  // (M = 4 entries of 16 bits); a larger M would need more FIFOs.
  if (M * DW != 2 * USB_W) begin : g_bad_width
    $error("readout_fifos: M*DW must equal 64 (two 32-bit FIFO words)");
  end

  always_comb begin
    pop = '0;
    if (rd_en) begin
      if (fetch_pc)      pop[2] = 1'b1;
      else if (fifo_sel) pop[1] = 1'b1;
      else               pop[0] = 1'b1;
    end
  end

  sync_fifo #(.DEPTH(DEPTH), .W(USB_W)) u_fifo1 (
    .clk(clk), .rst_n(rst_n), .push(push), .din(USB_W'(z_flat[ZW-1 -: ZW/2])),
    .pop(pop[0]), .dout(dout[0]), .dout_valid(dvalid[0]), .empty(empty[0]),
    .full(full[0]), .count(cnt[0]));

  sync_fifo #(.DEPTH(DEPTH), .W(USB_W)) u_fifo2 (
    .clk(clk), .rst_n(rst_n), .push(push), .din(USB_W'(z_flat[ZW/2-1:0])),
    .pop(pop[1]), .dout(dout[1]), .dout_valid(dvalid[1]), .empty(empty[1]),
    .full(full[1]), .count(cnt[1]));

  sync_fifo #(.DEPTH(DEPTH), .W(USB_W)) u_fifo_pc (
    .clk(clk), .rst_n(rst_n), .push(push), .din(USB_W'(pc)),
    .pop(pop[2]), .dout(dout[2]), .dout_valid(dvalid[2]), .empty(empty[2]),
    .full(full[2]), .count(cnt[2]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     src_q <= 2'd0;
    else if (rd_en) src_q <= fetch_pc ? 2'd2 : {1'b0, fifo_sel};
  end

  always_comb begin
    case (src_q)
      2'd0:    begin rd_data = dout[0]; rd_valid = dvalid[0]; end
      2'd1:    begin rd_data = dout[1]; rd_valid = dvalid[1]; end
      default: begin rd_data = dout[2]; rd_valid = dvalid[2]; end
    endcase
    pc_count = cnt[2];
  end

endmodule
