// spline_rom: one look-up ROM of a spline function phi(B).
//
// The ROM replaces the evaluation of the spline polynomial: the downscaled
// time-stamp offset B is the address and the stored <16,7> fixed-point word
// is phi(B).  The contents are computed at elaboration from
// sketch_pkg::phi_code(), so the same module serves the p = 1, p = 2 and
// Fourier ROMs of a sketch processing element (parameter KIND) and any LUT
// depth 2**AW (the paper evaluates depths 32 to 256 and builds 256).
//
// Timing: synchronous read, data is valid one clock after addr, matching the
// one-clock-cycle LUT fetch of the paper.  No reset: a ROM has no state beyond
// its output register.
module spline_rom
  import sketch_pkg::*;
#(
  parameter spline_e KIND = SPLINE_P1,
  parameter int      AW   = LUT_AW,
  parameter int      DW   = PHI_W,
  parameter int      M    = M_SKETCH,
  parameter int      FRAC = PHI_FRAC
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  output logic [DW-1:0] data
);

  logic [DW-1:0] rom [2**AW];

  initial begin
    for (int a = 0; a < 2**AW; a++) rom[a] = DW'(phi_code(KIND, a, AW, M, FRAC));
  end

  always_ff @(posedge clk) data <= rom[addr];

endmodule
