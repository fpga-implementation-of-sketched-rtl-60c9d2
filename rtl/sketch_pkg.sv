// sketch_pkg: constants, types and the spline look-up formulas shared by the
// on-line spline-sketch datapath.
//
// The sensor delivers 12-bit time stamps X in [0,4096).  The sketch has M = 4
// entries, so one sketch interval is Delta = 4096/4 = 1024 time-stamp codes.
// Every spline value phi is stored and accumulated as unsigned fixed point
// <16,7>: 16 bits in total, 7 of them fractional, so 1.0 is the code 128 and
// the 9 integer bits hold up to 511 accumulated frames of value 1.0.
//
// phi_code() gives the content of the look-up ROMs.  The two polynomial
// splines are the uniform B-splines of degree p = 1 (hat) and p = 2
// (quadratic) with support [0, p+1) sketch intervals, periodic over the M
// intervals, which is what the sum over q = 0..p in the sketch equation
// expresses.  The third ROM holds a "Fourier" function; its formula is this
// design's own choice (a raised cosine with one period over the time range),
// because only its name is known.
package sketch_pkg;

  localparam int TS_BITS    = 12;     // TDC time-stamp width
  localparam int M_SKETCH   = 4;      // sketch size M
  localparam int LUT_AW     = 8;      // log2 of the LUT depth (256 entries)
  localparam int PHI_W      = 16;     // FXP <16,7> total width
  localparam int PHI_FRAC   = 7;      // FXP <16,7> fractional bits
  localparam int SENSOR_COLS = 128;   // pixels per row
  localparam int SENSOR_ROWS = 192;   // rows
  localparam int NUM_PIXELS = SENSOR_COLS * SENSOR_ROWS;   // 24576
  localparam int FRAME_W    = 10;     // frame index 1..512 needs 10 bits
  localparam int MAX_FRAMES = 512;    // frames per read-out, F_max for <16,7>
  localparam int USB_W      = 32;     // width of one USB pipe FIFO word

  // Spline function selected by the host (the p selector of each SPE).
  typedef enum logic [1:0] {
    SPLINE_P1      = 2'd0,   // linear B-spline, p = 1
    SPLINE_P2      = 2'd1,   // quadratic B-spline, p = 2
    SPLINE_FOURIER = 2'd2    // Fourier function
  } spline_e;

  // ROM content for spline `kind` at LUT address `addr` of a 2**aw deep LUT
  // covering one period of m sketch intervals, rounded to <.,frac> fixed point.
  function automatic logic [PHI_W-1:0] phi_code(spline_e kind, int addr, int aw,
                                                int m, int frac);
    real u;      // position in sketch intervals, [0, m)
    real v;
    u = real'(addr) * real'(m) / real'(2 ** aw);
    v = 0.0;
    case (kind)
      SPLINE_P1: begin
        if (u < 1.0)      v = u;
        else if (u < 2.0) v = 2.0 - u;
      end
      SPLINE_P2: begin
        if (u < 1.0)      v = 0.5 * u * u;
        else if (u < 2.0) v = 0.5 * (-2.0 * u * u + 6.0 * u - 3.0);
        else if (u < 3.0) v = 0.5 * (3.0 - u) * (3.0 - u);
      end
      default: v = 0.5 * (1.0 + $cos(2.0 * 3.14159265358979 * u / real'(m)));
    endcase
    return PHI_W'(longint'(v * real'(2 ** frac)));
  endfunction

endpackage
