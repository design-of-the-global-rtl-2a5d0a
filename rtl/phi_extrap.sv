// phi_extrap - azimuth of a 2D track extrapolated to an outer detector.
//
// A 2D track is a circle through the interaction point; at the radius R of
// the outer detector its azimuth differs from the initial direction phi_i
// by dphi = asin(R / (2r)), r being the bending radius. With
// pt = 10.2/|omega| GeV = 0.0044 r (r in cm) this is asin(K*|omega|); the
// source quotes K = 0.0278 for the barrel calorimeter (R about 129 cm).
// phi_ex = phi_i + dphi for omega > 0 and phi_i - dphi for omega < 0 (the
// source says only that the sign follows the charge; the polarity is this
// design's). If K*|omega| >= 1 the track curls up before R and reach=0.
//
// dphi comes from a 64-entry table computed at elaboration: entry w is the
// number of half-steps k (1.125 deg units) with sin((k-1/2)*1.125 deg) <=
// K*w/10000, i.e. asin rounded to the nearest unit; the sine is a
// fixed-point (Q30) Taylor series. KCOEF is K times 10^4.
// Purely combinational: bin36 is the 10 deg bin of phi_ex.
module phi_extrap
  import grl_pkg::*;
#(
  parameter int KCOEF = 278
) (
  input  trk_t       trk,
  output logic       reach,
  output logic [8:0] phi_ex,
  output logic [5:0] bin36
);

  localparam longint ONE = 64'sd1 << 30;

  // sin((2k-1) * pi/320) in Q30
  function automatic longint sin_half(input int k);
    longint th, th2, term, s;
    th   = longint'(2 * k - 1) * 64'sd10541436;
    th2  = (th * th) >>> 30;
    term = th;
    s    = th;
    for (int n = 1; n <= 8; n++) begin
      term = -((term * th2) >>> 30) / longint'((2 * n) * (2 * n + 1));
      s    = s + term;
    end
    return s;
  endfunction

  typedef logic [63:0][7:0] lut_t;   // bit 7: reaches, bits 6:0: dphi

  function automatic lut_t gen_lut();
    lut_t t;
    longint x;
    int d;
    for (int w = 0; w < 64; w++) begin
      x = (longint'(KCOEF) * longint'(w) * ONE) / 64'sd10000;
      d = 0;
      for (int k = 1; k <= 80; k++)
        if (sin_half(k) <= x) d = k;
      t[w] = {(x < ONE), 7'(d)};
    end
    return t;
  endfunction

  localparam lut_t LUT = gen_lut();

  logic [5:0] aw;
  logic [7:0] e;
  int         p;

  always_comb begin
    aw    = trk.omega[6] ? 6'(-trk.omega) : trk.omega[5:0];
    e     = LUT[aw];
    reach = trk.valid && e[7] && !(trk.omega == -7'sd64);
    if (trk.omega[6]) p = int'(trk.phi) - int'(e[6:0]);
    else              p = int'(trk.phi) + int'(e[6:0]);
    if (p < 0)              p += PHI_UNITS;
    else if (p >= PHI_UNITS) p -= PHI_UNITS;
    phi_ex = 9'(p);
    bin36  = phi_to_bin36(phi_ex);
  end

endmodule
