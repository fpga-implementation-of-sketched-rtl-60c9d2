// spe: sketch processing element number IDX (sketch index i = IDX).
//
// For every incoming 12-bit time stamp X it forms the periodic offset
//   B = (X - i*Delta) mod 4096,   Delta = 4096/M,
// with one subtractor (diff = X - i*Delta, 32 bits wide), one comparator
// (diff > 0), one adder (diff + 4096) and a multiplexer, exactly as drawn in
// the paper's SPE block diagram.  B is then reduced to a LUT address by a
// right shift of TS_BITS - AW bits (the downscale ratio R_dc = 4096/2**AW)
// and addresses three ROMs in parallel: p = 1, p = 2 and Fourier.  A
// selector, set by the host through p_sel, picks one ROM output as this
// element's 16-bit phi value.
//
// When diff is exactly 0 the adder branch yields 4096, whose low 12 bits are
// 0, the same as the mod; only the low TS_BITS bits of the mux are used, and
// the low TSW - AW bits of B are dropped by the shift (lint reports both as
// unused bits).
//
// Timing: one time stamp per clock, no stall.  phi is valid one clock after X
// (the ROM read); p_sel is registered alongside so that a change of p applies
// to whole samples.  Time stamp 0 (no photon) is processed like any other
// value, as in the paper's datapath; the host removes its known contribution
// using the photon count.
module spe
  import sketch_pkg::*;
#(
  parameter int IDX  = 0,
  parameter int TSW  = TS_BITS,
  parameter int M    = M_SKETCH,
  parameter int AW   = LUT_AW,
  parameter int DW   = PHI_W,
  parameter int FRAC = PHI_FRAC
) (
  input  logic           clk,
  input  logic [TSW-1:0] x,        // time stamp
  input  spline_e        p_sel,    // spline function
  output logic [DW-1:0]  phi       // phi_p(B), one clock after x
);

  localparam int DELTA = (2 ** TSW) / M;
  localparam logic signed [31:0] OFFSET = 32'(IDX * DELTA);
  localparam logic signed [31:0] RANGE  = 32'(2 ** TSW);

  logic signed [31:0] diff;
  logic        [31:0] b_wide;
  logic     [TSW-1:0] b;
  logic      [AW-1:0] addr;
  logic      [DW-1:0] rom_p1, rom_p2, rom_f;
  spline_e            p_q;

  always_comb begin
    diff = signed'(32'(x)) - OFFSET;
    if (diff > 0) b_wide = 32'(diff[TSW-1:0]);      // {20'd0, diff[11:0]}
    else          b_wide = 32'(diff + RANGE);       // diff + 'd4096
    b    = b_wide[TSW-1:0];
    addr = b[TSW-1 -: AW];                 // b >> (TSW - AW)
  end

  spline_rom #(.KIND(SPLINE_P1),      .AW(AW), .DW(DW), .M(M), .FRAC(FRAC)) u_rom_p1
    (.clk(clk), .addr(addr), .data(rom_p1));
  spline_rom #(.KIND(SPLINE_P2),      .AW(AW), .DW(DW), .M(M), .FRAC(FRAC)) u_rom_p2
    (.clk(clk), .addr(addr), .data(rom_p2));
  spline_rom #(.KIND(SPLINE_FOURIER), .AW(AW), .DW(DW), .M(M), .FRAC(FRAC)) u_rom_f
    (.clk(clk), .addr(addr), .data(rom_f));

  always_ff @(posedge clk) p_q <= p_sel;

  always_comb begin
    case (p_q)
      SPLINE_P1: phi = rom_p1;
      SPLINE_P2: phi = rom_p2;
      default:   phi = rom_f;
    endcase
  end

endmodule
