// other_bits - further topology bits for rare processes and calibration.
//
//  * tc_b2b  : a track (extrapolated to the calorimeter) and a cluster
//              back to back, bins i and i+16..i+20 as for two tracks;
//  * cc_b2b  : two clusters back to back, same criterion;
//  * tc_same : a cluster in the same azimuthal hemisphere as a track
//              (bin offset -8..+8, this design's reading of "same
//              hemisphere");
//  * tc_opp  : a cluster in the opposite hemisphere (offset 9..27, the
//              opening-angle > 90 deg range);
//  * klm_ec_cdc : coincidence of the three innermost super-layers with the
//              endcap KLM. The source gives the idea (SL0, SL1, SL2 and
//              endcap KLM hits matched in azimuth); the sector layout is
//              this design's: klm_ec[3:0] forward and [7:4] backward 90 deg
//              sectors, and a sector fires when SL0, SL1 and SL2 each have
//              a held track-segment hit among its 16 mesh bins and the
//              forward or backward KLM sector is hit.
// All outputs are registered one system clock after the inputs.
module other_bits
  import grl_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic [N_PHI-1:0] pex36,
  input  logic [N_PHI-1:0] clus36,
  input  logic [2:0][N_MESH-1:0] mesh012,
  input  logic [N_KLM_EC-1:0] klm_ec,
  output logic             tc_b2b,
  output logic             cc_b2b,
  output logic             tc_same,
  output logic             tc_opp,
  output logic             klm_ec_cdc
);

  localparam int NSEC = N_KLM_EC / 2;
  localparam int BPS  = N_MESH / NSEC;

  logic tc_b2b_c, cc_b2b_c, same_c, opp_c, ec_c;

  topo_cond #(.N(N_PHI), .LO(16), .HI(20)) u_tc  (.a(pex36),  .b(clus36), .hit(tc_b2b_c));
  topo_cond #(.N(N_PHI), .LO(16), .HI(20)) u_cc  (.a(clus36), .b(clus36), .hit(cc_b2b_c));
  topo_cond #(.N(N_PHI), .LO(28), .HI(44)) u_sh  (.a(pex36),  .b(clus36), .hit(same_c));
  topo_cond #(.N(N_PHI), .LO(9),  .HI(27)) u_oh  (.a(pex36),  .b(clus36), .hit(opp_c));

  always_comb begin
    ec_c = 1'b0;
    for (int q = 0; q < NSEC; q++)
      if ((klm_ec[q] || klm_ec[q + NSEC]) &&
          |mesh012[0][q*BPS +: BPS] && |mesh012[1][q*BPS +: BPS] && |mesh012[2][q*BPS +: BPS])
        ec_c = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) {tc_b2b, cc_b2b, tc_same, tc_opp, klm_ec_cdc} <= '0;
    else     {tc_b2b, cc_b2b, tc_same, tc_opp, klm_ec_cdc} <= {tc_b2b_c, cc_b2b_c, same_c, opp_c, ec_c};
  end

endmodule
