// short_tracking - finder for tracks too short for the 2D trackers.
//
// Tracks that leave through the endcap or curl inside the drift chamber
// cross fewer than nine super-layers and are missed by the 2D trackers.
// This block finds them from the track-segment (TS) hits of the five
// innermost super-layers SL0..SL4, which have 160, 160, 192, 224 and 256
// TS around the circle. Each SL is reduced to a common 64-bin mesh
// (5.625 deg, 64 being the greatest common factor); TS i of an SL with
// N TS lands in bin floor(64*i/N) (binning rule is this design's). TS
// hits that are associated with a full track (ts_assoc, supplied from
// outside: the source does not say how the association is made) are
// ignored; the others set their mesh bit, which stays on for HOLD data
// clocks. A short track is found at SL0 bin b when, for some pattern
// (d1,d2,d3,d4), the bins b+d1 of SL1, b+d2 of SL2, b+d3 of SL3 and b+d4
// of SL4 are all set as well (indices modulo 64).
//
// The source uses 130 patterns derived for tracks from the interaction
// point but does not list them. The default table here is generated:
// offsets of one sign with non-decreasing magnitude, first offset 0..2,
// each further step 0..2 and |d4| <= 5, which gives 131 patterns. Pass
// another table through PATTERNS/NPAT to use a different set.
//
// Outputs: st64 (SL0 bins with a short track), the count n_st (set bits,
// saturated at 15; neighbouring bins of one track each count) and
// back-to-back / opening-angle conditions between full tracks (trk36) and
// short tracks and among short tracks, on the 36-bin scale
// (bin = floor(9*b/16)). All outputs are registered: they follow the mesh
// by one system clock, the mesh follows the sampled TS by one.
module short_tracking
  import grl_pkg::*;
#(
  parameter int HOLD = 16,
  parameter int NPAT = 131,
  parameter logic [NPAT-1:0][15:0] PATTERNS = gen_patterns()
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              dclk_en,
  input  logic [N_TS0-1:0]  ts_sl0,
  input  logic [N_TS1-1:0]  ts_sl1,
  input  logic [N_TS2-1:0]  ts_sl2,
  input  logic [N_TS3-1:0]  ts_sl3,
  input  logic [N_TS4-1:0]  ts_sl4,
  input  logic [N_SL-1:0][N_MESH-1:0] ts_assoc,
  input  logic [N_PHI-1:0]  trk36,
  output logic [N_SL-1:0][N_MESH-1:0] mesh,
  output logic [N_MESH-1:0] st64,
  output logic [3:0]        n_st,
  output logic              fs_b2b,
  output logic              fs_oa90,
  output logic              fs_oa30,
  output logic              ss_b2b,
  output logic              ss_oa90,
  output logic              ss_oa30
);

  // Pattern table: 16 bits per pattern, {d4,d3,d2,d1}, 4-bit two's complement.
  function automatic logic [130:0][15:0] gen_patterns();
    logic [130:0][15:0] t;
    int n, d1, d2, d3, d4;
    t = '0;
    n = 0;
    for (int sg = 0; sg < 2; sg++)
      for (int a = 0; a <= 2; a++)
        for (int s2 = 0; s2 <= 2; s2++)
          for (int s3 = 0; s3 <= 2; s3++)
            for (int s4 = 0; s4 <= 2; s4++) begin
              d1 = a; d2 = d1 + s2; d3 = d2 + s3; d4 = d3 + s4;
              if (d4 <= 5 && !(sg == 1 && d4 == 0) && n < 131) begin
                if (sg == 1) begin d1 = -d1; d2 = -d2; d3 = -d3; d4 = -d4; end
                t[n] = {4'(d4), 4'(d3), 4'(d2), 4'(d1)};
                n++;
              end
            end
    return t;
  endfunction

  function automatic logic [N_MESH-1:0] to_mesh(input logic [255:0] ts, input int nts);
    logic [N_MESH-1:0] m;
    m = '0;
    for (int i = 0; i < nts; i++)
      if (ts[i]) m[(i * N_MESH) / nts] = 1'b1;
    return m;
  endfunction

  logic [N_SL-1:0][N_MESH-1:0] set_m;
  logic [N_MESH-1:0] st_c;
  logic [N_PHI-1:0]  st36_c;
  logic [6:0]        cnt_c;
  logic fs_b2b_c, fs_oa90_c, fs_oa30_c, ss_b2b_c, ss_oa90_c, ss_oa30_c;

  always_comb begin
    set_m[0] = to_mesh(256'(ts_sl0), N_TS0);
    set_m[1] = to_mesh(256'(ts_sl1), N_TS1);
    set_m[2] = to_mesh(256'(ts_sl2), N_TS2);
    set_m[3] = to_mesh(256'(ts_sl3), N_TS3);
    set_m[4] = to_mesh(256'(ts_sl4), N_TS4);
    for (int s = 0; s < N_SL; s++)
      set_m[s] = dclk_en ? (set_m[s] & ~ts_assoc[s]) : '0;
  end

  phi_hit_array #(.N(N_SL * N_MESH), .CW(5)) u_mesh (
    .clk, .rst, .tick(dclk_en), .set(set_m), .persist(5'(HOLD)), .hit(mesh)
  );

  // pattern recognition: one AND of five mesh bits per (SL0 bin, pattern)
  for (genvar b = 0; b < N_MESH; b++) begin : g_bin
    logic [NPAT-1:0] pm;
    for (genvar p = 0; p < NPAT; p++) begin : g_pat
      localparam int D1 = int'($signed(PATTERNS[p][3:0]));
      localparam int D2 = int'($signed(PATTERNS[p][7:4]));
      localparam int D3 = int'($signed(PATTERNS[p][11:8]));
      localparam int D4 = int'($signed(PATTERNS[p][15:12]));
      assign pm[p] = mesh[1][(b + D1 + N_MESH) % N_MESH] & mesh[2][(b + D2 + N_MESH) % N_MESH]
                   & mesh[3][(b + D3 + N_MESH) % N_MESH] & mesh[4][(b + D4 + N_MESH) % N_MESH];
    end
    assign st_c[b] = mesh[0][b] & (|pm);
  end

  always_comb begin
    cnt_c  = '0;
    st36_c = '0;
    for (int b = 0; b < N_MESH; b++) begin
      cnt_c += 7'(st_c[b]);
      if (st_c[b]) st36_c[(b * 9) / 16] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st64 <= '0;
      n_st <= '0;
    end else begin
      st64 <= st_c;
      n_st <= (cnt_c > 7'd15) ? 4'd15 : cnt_c[3:0];
    end
  end

  topo_cond #(.N(N_PHI), .LO(16), .HI(20)) u_fs_b2b  (.a(trk36), .b(st36_c), .hit(fs_b2b_c));
  topo_cond #(.N(N_PHI), .LO(9),  .HI(27)) u_fs_oa90 (.a(trk36), .b(st36_c), .hit(fs_oa90_c));
  topo_cond #(.N(N_PHI), .LO(3),  .HI(33)) u_fs_oa30 (.a(trk36), .b(st36_c), .hit(fs_oa30_c));
  topo_cond #(.N(N_PHI), .LO(16), .HI(20)) u_ss_b2b  (.a(st36_c), .b(st36_c), .hit(ss_b2b_c));
  topo_cond #(.N(N_PHI), .LO(9),  .HI(27)) u_ss_oa90 (.a(st36_c), .b(st36_c), .hit(ss_oa90_c));
  topo_cond #(.N(N_PHI), .LO(3),  .HI(33)) u_ss_oa30 (.a(st36_c), .b(st36_c), .hit(ss_oa30_c));

  always_ff @(posedge clk) begin
    if (rst) {fs_b2b, fs_oa90, fs_oa30, ss_b2b, ss_oa90, ss_oa30} <= '0;
    else     {fs_b2b, fs_oa90, fs_oa30, ss_b2b, ss_oa90, ss_oa30} <=
               {fs_b2b_c, fs_oa90_c, fs_oa30_c, ss_b2b_c, ss_oa90_c, ss_oa30_c};
  end

endmodule
