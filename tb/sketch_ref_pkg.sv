// sketch_ref_pkg: reference arithmetic for the testbenches, written apart
// from the RTL.  phi values are computed with integer arithmetic straight
// from the B-spline pieces (in units of 1/64 sketch interval for a 256-deep
// LUT over M = 4 intervals), not from the RTL's ROM formula.
package sketch_ref_pkg;

  // kind: 0 = p1, 1 = p2, 2 = Fourier; t = LUT address 0..255 (depth 256, M = 4)
  function automatic int ref_phi_t(int kind, int t);
    int v32;
    if (kind == 0) begin
      if (t < 64)       return 2 * t;
      else if (t < 128) return 256 - 2 * t;
      else              return 0;
    end else if (kind == 1) begin
      if (t < 64)       return (t * t + 32) / 64;
      else if (t < 128) begin
        v32 = -t * t + 192 * t - 6144;       // 32 x value
        return (v32 + 16) / 32;
      end
      else if (t < 192) return ((192 - t) * (192 - t) + 32) / 64;
      else              return 0;
    end else begin
      real c;
      c = $cos(3.141592653589793 * 2.0 * real'(t) / 256.0);
      return int'(64.0 + 64.0 * c);
    end
  endfunction

  // phi of sketch entry i for a 12-bit time stamp x (LUT depth 256, M = 4)
  function automatic int ref_phi(int kind, int x, int i);
    int b;
    b = x - 1024 * i;
    while (b < 0) b += 4096;
    b = b % 4096;
    return ref_phi_t(kind, b / 16);
  endfunction

endpackage
