// track_summary - track trigger summary of the CDC 2D tracks.
//
// Each data clock the four 2D trackers (one per quadrant of the drift
// chamber) deliver up to TRK_PER_MOD tracks each: curvature omega and a
// quadrant-local azimuth. This block
//   1. makes the azimuth global: (80*quadrant + local) mod 320, 1.125 deg
//      units (this design's convention; the source gives only the local
//      range 0..82),
//   2. flags duplicates (track_dedup) and counts the remaining new tracks,
//   3. counts tracks per event (track_counter, 16 data clocks),
//   4. sets, for every track, its 10 deg bin in a 36-bit array that holds
//      each bit for 16 data clocks (phi_hit_array), and
//   5. evaluates back-to-back and opening-angle > 90 / > 30 deg conditions
//      on that array (topo_cond).
// Steps 2-5 follow the source. The geometry array uses all valid tracks,
// not only the non-duplicate ones (duplicates fall in the same or a
// neighbouring bin and do not change the conditions).
//
// Timing: inputs are sampled when dclk_en is high. trk_glb is
// combinational; its omega field is the input's, passed through unchanged. phi36 and the conditions follow one system clock after
// the sampling edge; n_trk/n_trk_stb follow the track counter.
module track_summary
  import grl_pkg::*;
#(
  parameter int HOLD = 16
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       dclk_en,
  input  logic       dup_en,
  input  trk2d_t     trk_in [N_QUAD][TRK_PER_MOD],
  output trk_t       trk_glb [N_TRK],
  output logic [3:0] n_trk,
  output logic       n_trk_stb,
  output logic [N_PHI-1:0] phi36,
  output logic       b2b,
  output logic       oa90,
  output logic       oa30
);

  localparam int NW = $clog2(N_TRK + 1);
  localparam int SW = NW + $clog2(HOLD);

  logic [N_TRK-1:0] uniq;
  logic [NW-1:0]    n_new;
  logic [N_PHI-1:0] set36;
  logic [SW-1:0]    sum, n_event;
  logic             fall;

  always_comb begin
    for (int q = 0; q < N_QUAD; q++)
      for (int s = 0; s < TRK_PER_MOD; s++) begin
        trk_glb[q*TRK_PER_MOD+s].valid = trk_in[q][s].valid & dclk_en;
        trk_glb[q*TRK_PER_MOD+s].omega = trk_in[q][s].omega;
        trk_glb[q*TRK_PER_MOD+s].phi   = phi_global(q, trk_in[q][s].phi);
      end
  end

  track_dedup #(.N(N_TRK)) u_dedup (.trk(trk_glb), .enable(dup_en), .uniq(uniq));

  always_comb begin
    n_new = '0;
    for (int j = 0; j < N_TRK; j++) n_new += NW'(uniq[j]);
    set36 = '0;
    for (int j = 0; j < N_TRK; j++)
      if (trk_glb[j].valid) set36[phi_to_bin36(trk_glb[j].phi)] = 1'b1;
  end

  track_counter #(.DEPTH(HOLD), .NW(NW)) u_count (
    .clk, .rst, .en(dclk_en), .n_new, .sum, .fall, .n_event
  );

  assign n_trk_stb = fall;
  assign n_trk     = (n_event > SW'(15)) ? 4'd15 : n_event[3:0];

  phi_hit_array #(.N(N_PHI), .CW(5)) u_arr (
    .clk, .rst, .tick(dclk_en), .set(set36), .persist(5'(HOLD)), .hit(phi36)
  );

  topo_cond #(.N(N_PHI), .LO(16), .HI(20)) u_b2b  (.a(phi36), .b(phi36), .hit(b2b));
  topo_cond #(.N(N_PHI), .LO(9),  .HI(27)) u_oa90 (.a(phi36), .b(phi36), .hit(oa90));
  topo_cond #(.N(N_PHI), .LO(3),  .HI(33)) u_oa30 (.a(phi36), .b(phi36), .hit(oa30));

endmodule
