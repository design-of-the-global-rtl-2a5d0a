// grl_pkg - types and constants shared by the Global Reconstruction Logic.
//
// The GRL runs on the 127.216 MHz trigger system clock. CDC trigger data
// (2D tracks, track-segment hits) are refreshed once per 31.8 MHz data
// clock, i.e. every fourth system clock; the ECL cluster list every 16
// system clocks; TOP and KLM hits every system clock.
//
// Angles:
//   * 2D-track phi: 1.125 deg units, 0..82 local to a quadrant (as the
//     trackers deliver it), 0..319 once made global (this design's choice:
//     global = 80*quadrant + local, modulo 320).
//   * phi hit arrays used for geometry and matching: 36 bins of 10 deg.
//   * short-tracking mesh: 64 bins of 5.625 deg per super-layer.
//   * ECL cluster theta: 7-bit code of 1.40625 deg (0..180 deg). The
//     cluster phi is described as 7 bits spanning 0..360 deg at the same
//     1.40625 deg step, which needs 8 bits; this design keeps the range
//     and step and makes the field 8 bits wide.
// Field widths not stated by the source (the omega width, the track slot
// count per frame, the output bit list) are choices of this design.
package grl_pkg;

  localparam int N_QUAD      = 4;    // tracker modules per tracker type
  localparam int TRK_PER_MOD = 4;    // 2D track slots per module and data clock
  localparam int N_TRK       = N_QUAD * TRK_PER_MOD;
  localparam int PHI_UNITS   = 320;  // 360 / 1.125
  localparam int QUAD_PHI    = 80;   // global phi offset of one quadrant
  localparam int N_PHI       = 36;   // 10 deg phi bins
  localparam int N_SL        = 5;    // SL0..SL4 used by short tracking
  localparam int N_MESH      = 64;   // 5.625 deg mesh
  localparam int N_TS0       = 160;
  localparam int N_TS1       = 160;
  localparam int N_TS2       = 192;
  localparam int N_TS3       = 224;
  localparam int N_TS4       = 256;
  localparam int N_CLUS      = 6;
  localparam int N_TOP       = 16;
  localparam int N_KLM       = 8;
  localparam int N_KLM_EC    = 8;
  localparam int N_UP        = 17;   // upstream CDCTRG modules
  localparam int N_LINK      = 20;   // all input modules
  localparam int GDL_W       = 168;  // GRL -> GDL word per system clock
  localparam int PW          = 10;   // persistence counter width

  // 2D track as delivered by one tracker slot (local phi)
  typedef struct packed {
    logic              valid;
    logic signed [6:0] omega;   // -33..33, proportional to charge/pt
    logic        [6:0] phi;     // 0..82 local, 1.125 deg
  } trk2d_t;

  // 2D track with global phi
  typedef struct packed {
    logic              valid;
    logic signed [6:0] omega;
    logic        [8:0] phi;     // 0..319, 1.125 deg
  } trk_t;

  typedef struct packed {
    logic        valid;
    logic [6:0]  theta;         // 1.40625 deg
    logic [7:0]  phi;           // 1.40625 deg, 0..255 (see note above)
    logic [11:0] energy;        // 5 MeV
  } ecl_clus_t;

  typedef enum logic [1:0] {
    FC_WAIT_READY = 2'd0,
    FC_WAIT_REV   = 2'd1,
    FC_RUN        = 2'd2
  } fc_state_t;

  // Trigger bits sent to the GDL.
  typedef struct packed {
    logic       n_trk_stb;      // n_trk valid (event boundary)
    logic [3:0] n_trk;          // full tracks of the event, saturated
    logic       trk_b2b;
    logic       trk_oa90;
    logic       trk_oa30;
    logic [3:0] n_st;           // short tracks, saturated
    logic       fs_b2b;         // full track - short track
    logic       fs_oa90;
    logic       fs_oa30;
    logic       ss_b2b;         // short track - short track
    logic       ss_oa90;
    logic       ss_oa30;
    logic [2:0] n_ecl_match;
    logic       ecl_match;
    logic       top_match;
    logic       klm_match;
    logic       tc_b2b;         // track - cluster back-to-back
    logic       cc_b2b;         // cluster - cluster back-to-back
    logic       tc_same;        // cluster in the track's hemisphere
    logic       tc_opp;         // cluster in the opposite hemisphere
    logic       klm_ec_cdc;     // SL0-2 with endcap KLM coincidence
  } grl_bits_t;

  localparam int N_BITS = $bits(grl_bits_t);

  // 10 deg bin of a global track phi (1.125 deg units)
  function automatic logic [5:0] phi_to_bin36(input logic [8:0] phi);
    return 6'((32'(phi) * 9) / 80);
  endfunction

  // global phi of a quadrant-local track phi
  function automatic logic [8:0] phi_global(input int unsigned quad, input logic [6:0] phi);
    return 9'((quad * QUAD_PHI + 32'(phi)) % PHI_UNITS);
  endfunction

endpackage
