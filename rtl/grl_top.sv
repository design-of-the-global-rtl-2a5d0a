// grl_top - Global Reconstruction Logic of the Belle II level-1 trigger.
//
// The GRL collects the detailed trigger objects of the four sub-trigger
// systems and reduces them to summary bits for the global decision logic:
//   * cdc_flow_ctrl  start-up flow control of the CDC trigger chain and
//                    the 31.8 MHz data-clock enable;
//   * track_summary  2D-track counting per event with duplicate removal and
//                    track-track geometry (back-to-back, opening angles);
//   * short_tracking short tracks from track-segment hits of SL0..SL4;
//   * ecl_match, seg_match (TOP, KLM)  track extrapolation and matching;
//   * other_bits     track-cluster, cluster-cluster and endcap-KLM bits;
//   * grl_regs       slow-control registers and rate counters;
//   * gdl_out        168-bit word and parallel lines to the GDL.
// The serial links are not part of the RTL: inputs arrive as decoded
// words, one set of CDC words per data clock (sampled where dclk_en is
// high, i.e. the first system clock after a revolution pulse and every
// fourth thereafter), a cluster list with clus_stb, TOP and KLM hits every
// system clock. 3D and NN tracker links take part in the flow control
// (link_ok/ready_up) only; no GRL condition on their data is defined.
// Mapping of ready_up/link_ok: bits 0-3 2D, 4-7 3D, 8-11 NN, 12-15 TSF
// SL0..3, 16 TSF SL4 (ready_up); link_ok adds 17 ECL, 18 KLM, 19 TOP.
module grl_top
  import grl_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic                rev,
  input  logic [N_LINK-1:0]   link_ok,
  input  logic [N_UP-1:0]     ready_up,
  output logic                fc_out,
  output logic [N_LINK-1:0]   link_reset,
  output logic                dclk_en,
  // CDC trigger
  input  trk2d_t              trk2d [N_QUAD][TRK_PER_MOD],
  input  logic [N_TS0-1:0]    ts_sl0,
  input  logic [N_TS1-1:0]    ts_sl1,
  input  logic [N_TS2-1:0]    ts_sl2,
  input  logic [N_TS3-1:0]    ts_sl3,
  input  logic [N_TS4-1:0]    ts_sl4,
  input  logic [N_SL-1:0][N_MESH-1:0] ts_assoc,
  // ECL, TOP, KLM triggers
  input  ecl_clus_t           ecl_clus [N_CLUS],
  input  logic                clus_stb,
  input  logic [N_TOP-1:0]    top_hit,
  input  logic [N_KLM-1:0]    klm_hit,
  input  logic [N_KLM_EC-1:0] klm_ec,
  // slow control
  input  logic [7:0]          reg_addr,
  input  logic                reg_wr,
  input  logic [31:0]         reg_wdata,
  input  logic                reg_rd,
  output logic [31:0]         reg_rdata,
  // to GDL
  output logic [GDL_W-1:0]    gdl_frame,
  output grl_bits_t           gdl_lvds
);

  fc_state_t   fc_state;
  logic        all_ready;
  logic [12:0] timestamp;

  cdc_flow_ctrl u_fc (
    .clk, .rst, .rev, .link_ok(link_ok[N_UP-1:0]), .ready_up, .fc_out,
    .state(fc_state), .all_ready, .dclk_en, .timestamp
  );

  logic          dup_en;
  logic [PW-1:0] persist_ecl, persist_top, persist_klm;
  logic [3:0]    gdl_delay;
  grl_bits_t     bits;

  // track trigger summary
  trk_t             trk [N_TRK];
  logic [N_PHI-1:0] trk36;

  track_summary u_ts (
    .clk, .rst, .dclk_en, .dup_en, .trk_in(trk2d), .trk_glb(trk),
    .n_trk(bits.n_trk), .n_trk_stb(bits.n_trk_stb), .phi36(trk36),
    .b2b(bits.trk_b2b), .oa90(bits.trk_oa90), .oa30(bits.trk_oa30)
  );

  // short tracking
  logic [N_SL-1:0][N_MESH-1:0] mesh;
  logic [N_MESH-1:0]           st64;

  short_tracking u_st (
    .clk, .rst, .dclk_en, .ts_sl0, .ts_sl1, .ts_sl2, .ts_sl3, .ts_sl4, .ts_assoc,
    .trk36, .mesh, .st64, .n_st(bits.n_st),
    .fs_b2b(bits.fs_b2b), .fs_oa90(bits.fs_oa90), .fs_oa30(bits.fs_oa30),
    .ss_b2b(bits.ss_b2b), .ss_oa90(bits.ss_oa90), .ss_oa30(bits.ss_oa30)
  );

  // matching
  logic [N_PHI-1:0] pex_ecl, clus36, pex_top, pex_klm;

  ecl_match #(.KCOEF(278)) u_ecl (
    .clk, .rst, .trk, .persist(persist_ecl), .clus(ecl_clus), .clus_stb,
    .pex36(pex_ecl), .clus36, .match(bits.ecl_match), .n_match(bits.n_ecl_match)
  );

  seg_match #(.NSEG(N_TOP), .KCOEF(259)) u_top (
    .clk, .rst, .trk, .persist(persist_top), .seg_hit(top_hit), .pex36(pex_top),
    .match(bits.top_match)
  );

  seg_match #(.NSEG(N_KLM), .KCOEF(434)) u_klm (
    .clk, .rst, .trk, .persist(persist_klm), .seg_hit(klm_hit), .pex36(pex_klm),
    .match(bits.klm_match)
  );

  other_bits u_ob (
    .clk, .rst, .pex36(pex_ecl), .clus36, .mesh012(mesh[2:0]), .klm_ec,
    .tc_b2b(bits.tc_b2b), .cc_b2b(bits.cc_b2b), .tc_same(bits.tc_same),
    .tc_opp(bits.tc_opp), .klm_ec_cdc(bits.klm_ec_cdc)
  );

  // monitored single-bit conditions
  logic [17:0] mon;
  assign mon = {bits.n_trk_stb, bits.trk_b2b, bits.trk_oa90, bits.trk_oa30,
                bits.fs_b2b, bits.fs_oa90, bits.fs_oa30, bits.ss_b2b, bits.ss_oa90,
                bits.ss_oa30, bits.ecl_match, bits.top_match, bits.klm_match,
                bits.tc_b2b, bits.cc_b2b, bits.tc_same, bits.tc_opp, bits.klm_ec_cdc};

  grl_regs #(.N_MON(18), .N_LK(N_LINK), .DLYW(4)) u_regs (
    .clk, .rst, .addr(reg_addr), .wr(reg_wr), .wdata(reg_wdata), .rd(reg_rd),
    .rdata(reg_rdata), .link_ok, .fc_state, .all_ready, .timestamp, .mon,
    .dup_en, .persist_ecl, .persist_top, .persist_klm, .gdl_delay, .link_reset
  );

  gdl_out #(.W(GDL_W), .MAXDLY(16)) u_out (
    .clk, .rst, .bits, .delay(gdl_delay), .frame(gdl_frame), .lvds(gdl_lvds)
  );

endmodule
