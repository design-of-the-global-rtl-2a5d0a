// ecl_match - matching of 2D full tracks with calorimeter clusters.
//
// 2D tracks reach the GRL roughly a microsecond before the calorimeter
// clusters of the same event. For every track that reaches the barrel
// calorimeter, phi_extrap gives the 10 deg bin of its extrapolated azimuth;
// that bit of a 36-bit array is set and held for `persist` system clocks
// (register-programmable, to bridge the latency difference). When a new
// cluster frame arrives (clus_stb, every 16 system clocks, up to N_CLUS
// clusters), each cluster in the barrel (35 deg < theta < 126 deg) is
// matched if its bin or one of the two neighbouring bins is set. The
// extrapolation, the held array, the barrel cut and the +-1 criterion are
// the source's; the hold in system clocks and the default are this
// design's.
//
// ECL codes are 1.40625 deg: bin = floor(9*phi/64); barrel when
// 1120 < 45*theta < 4032 (i.e. 35*32 and 126*32).
// Outputs: pex36 (the held array), clus36 (bins of the clusters of the
// current frame, all theta), match / n_match for the current frame. All
// three are registered on clus_stb and held until the next frame.
module ecl_match
  import grl_pkg::*;
#(
  parameter int N_CL  = grl_pkg::N_CLUS,
  parameter int KCOEF = 278
) (
  input  logic             clk,
  input  logic             rst,
  input  trk_t             trk [N_TRK],
  input  logic [PW-1:0]    persist,
  input  ecl_clus_t        clus [N_CL],
  input  logic             clus_stb,
  output logic [N_PHI-1:0] pex36,
  output logic [N_PHI-1:0] clus36,
  output logic             match,
  output logic [2:0]       n_match
);

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

  logic [N_PHI-1:0] c36;
  logic [2:0]       nm;
  logic [5:0]       cbin [N_CL];
  logic [N_CL-1:0]  cbar;

  // Per-cluster 10-degree bin and barrel test (35 < theta < 126 degrees,
  // theta in 1.40625-degree units: 1120 < 45*theta < 4032).
  for (genvar c = 0; c < N_CL; c++) begin : g_cl
    logic [13:0] t45;
    assign cbin[c] = 6'((14'(clus[c].phi) * 14'd9) >> 6);
    assign t45     = 14'(clus[c].theta) * 14'd45;
    assign cbar[c] = (t45 > 14'd1120) && (t45 < 14'd4032);
  end

  always_comb begin
    c36 = '0;
    nm  = '0;
    for (int c = 0; c < N_CL; c++) begin
      if (clus[c].valid) begin
        c36[cbin[c]] = 1'b1;
        if (cbar[c] && (pex36[cbin[c]] ||
                        pex36[(32'(cbin[c]) + 1) % N_PHI] ||
                        pex36[(32'(cbin[c]) + N_PHI - 1) % N_PHI]))
          nm += 3'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      clus36  <= '0;
      n_match <= '0;
      match   <= 1'b0;
    end else if (clus_stb) begin
      clus36  <= c36;
      n_match <= nm;
      match   <= (nm != 0);
    end
  end

endmodule
