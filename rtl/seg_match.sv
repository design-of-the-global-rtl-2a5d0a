// seg_match - matching of 2D full tracks with TOP or barrel-KLM hits.
//
// Same scheme as the calorimeter matching, with its own extrapolation
// radius (KCOEF = K*10^4, K = R[cm]*0.0044/(2*10.2)) and persistence.
// The detector is divided into NSEG equal azimuthal segments (16 TOP
// staves, 8 KLM octants) starting at phi = 0; a hit segment matches when
// any held phi_ex bin overlapping the segment, widened by MARGIN bins on
// each side, is set. The scheme is the source's; radius, segment origin
// and MARGIN are this design's (the source says separate tables and
// criteria are used but gives no values). TOP defaults: R = 120 cm
// (KCOEF 259). For the KLM barrel this design uses R = 201 cm (KCOEF 434).
// seg_hit is sampled every system clock; match is registered.
module seg_match
  import grl_pkg::*;
#(
  parameter int NSEG   = 16,
  parameter int KCOEF  = 259,
  parameter int MARGIN = 0
) (
  input  logic             clk,
  input  logic             rst,
  input  trk_t             trk [N_TRK],
  input  logic [PW-1:0]    persist,
  input  logic [NSEG-1:0]  seg_hit,
  output logic [N_PHI-1:0] pex36,
  output logic             match
);

  // bins of 10 deg overlapping segment s, widened by MARGIN
  function automatic logic [N_PHI-1:0] seg_mask(input int s);
    logic [N_PHI-1:0] m;
    m = '0;
    for (int j = 0; j < N_PHI; j++)
      // bin j spans [10j, 10j+10) deg, segment [360s/NSEG, 360(s+1)/NSEG)
      if (10 * j * NSEG < 360 * (s + 1) && (10 * j + 10) * NSEG > 360 * s)
        for (int k = -MARGIN; k <= MARGIN; k++)
          m[(j + k + N_PHI) % N_PHI] = 1'b1;
    return m;
  endfunction

  logic [N_TRK-1:0] reach;
  logic [5:0]       bin [N_TRK];
  logic [N_PHI-1:0] set36;

  for (genvar j = 0; j < N_TRK; j++) begin : g_ex
    logic [8:0] unused_phi;
    phi_extrap #(.KCOEF(KCOEF)) u_ex (.trk(trk[j]), .reach(reach[j]), .phi_ex(unused_phi), .bin36(bin[j]));
  end

  always_comb begin
    set36 = '0;
    for (int j = 0; j < N_TRK; j++)
      if (reach[j]) set36[bin[j]] = 1'b1;
  end

  phi_hit_array #(.N(N_PHI), .CW(PW)) u_pex (
    .clk, .rst, .tick(1'b1), .set(set36), .persist, .hit(pex36)
  );

  logic m;
  always_comb begin
    m = 1'b0;
    for (int s = 0; s < NSEG; s++)
      if (seg_hit[s] && |(seg_mask(s) & pex36)) m = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) match <= 1'b0;
    else     match <= m;
  end

endmodule
