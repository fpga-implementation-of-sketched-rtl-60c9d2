// spe_array: the M sketch processing elements working side by side.
//
// Every element receives the same time stamp; element i (i = 0..M-1, drawn
// as SPE #i+1 in the paper) subtracts i*Delta.  Their M phi values are
// concatenated into one M*16-bit bus (64 bits for M = 4) with B_1 (i = 0) in
// the most significant 16 bits, so that the upper 32-bit half carries
// i = 0,1 and the lower half i = 2,3.
//
// Timing: one time stamp per clock; the bus is valid one clock after x
// (valid_out follows valid_in by one clock).
module spe_array
  import sketch_pkg::*;
#(
  parameter int TSW  = TS_BITS,
  parameter int M    = M_SKETCH,
  parameter int AW   = LUT_AW,
  parameter int DW   = PHI_W,
  parameter int FRAC = PHI_FRAC
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid_in,
  input  logic [TSW-1:0]       x,
  input  spline_e              p_sel,
  output logic                 valid_out,
  output logic [0:M-1][DW-1:0] b_bus     // element 0 = B_1 in the MSBs
);

  for (genvar i = 0; i < M; i++) begin : g_spe
    spe #(.IDX(i), .TSW(TSW), .M(M), .AW(AW), .DW(DW), .FRAC(FRAC)) u_spe (
      .clk  (clk),
      .x    (x),
      .p_sel(p_sel),
      .phi  (b_bus[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_out <= 1'b0;
    else        valid_out <= valid_in;
  end

endmodule
