// tb_grl_top - end-to-end test of the whole GRL at its default sizes.
//
// Sequence: links come up, the upstream modules report ready, a revolution
// pulse starts flow control. Then two identical "events" are played, the
// first with duplicate-track removal on and the second with it off and an
// extra output delay of 5 clocks. Each event has three 2D tracks (one a
// cross-talk duplicate) at 11 and 191 deg, two short tracks built from
// track-segment hits, calorimeter clusters ~130 clocks later, TOP, KLM and
// endcap-KLM hits. A third, late cluster frame arrives after the phi_ex
// persistence has expired. Expected values are worked out here from the
// track parameters (real-valued asin for the extrapolation). Every
// mechanism is counted and must occur at least once.
module tb_grl_top;
  import grl_pkg::*;
  logic clk = 0, rst = 1, rev = 0;
  logic [N_LINK-1:0] link_ok = '0, link_reset;
  logic [N_UP-1:0] ready_up = '0;
  logic fc_out, dclk_en;
  trk2d_t trk2d [N_QUAD][TRK_PER_MOD];
  logic [N_TS0-1:0] ts_sl0 = '0;
  logic [N_TS1-1:0] ts_sl1 = '0;
  logic [N_TS2-1:0] ts_sl2 = '0;
  logic [N_TS3-1:0] ts_sl3 = '0;
  logic [N_TS4-1:0] ts_sl4 = '0;
  logic [N_SL-1:0][N_MESH-1:0] ts_assoc = '0;
  ecl_clus_t ecl_clus [N_CLUS];
  logic clus_stb = 0;
  logic [N_TOP-1:0] top_hit = '0;
  logic [N_KLM-1:0] klm_hit = '0;
  logic [N_KLM_EC-1:0] klm_ec = '0;
  logic [7:0] reg_addr = '0;
  logic reg_wr = 0, reg_rd = 0;
  logic [31:0] reg_wdata = '0, reg_rdata;
  logic [GDL_W-1:0] gdl_frame;
  grl_bits_t gdl_lvds;
  int checks = 0, failures = 0;

  grl_top dut (.*);
  always #4 clk = ~clk;

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (t=%0t)", m, $time); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // revolution every 1280 system clocks
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    rev <= (cyc % 1280) == 1279;
  end

  // mechanism counters
  int m_fc = 0, m_dup = 0, m_cnt = 0, m_trk_b2b = 0, m_st = 0, m_fs = 0, m_ss = 0;
  int m_ecl = 0, m_ecl_late = 0, m_top = 0, m_klm = 0, m_tc = 0, m_cc = 0, m_same = 0;
  int m_opp = 0, m_ec = 0, m_dly = 0, m_rate = 0, m_lreset = 0;

  // record what the GDL sees
  int stb_cycle = -1, last_ntrk = -1;
  bit seen_b2b = 0, seen_oa90 = 0, seen_oa30 = 0, seen_fs = 0, seen_ss = 0, seen_top = 0, seen_klm = 0, seen_ec = 0;
  int seen_nst = 0;
  always @(negedge clk) begin
    if (gdl_lvds.n_trk_stb) begin stb_cycle = cyc; last_ntrk = gdl_lvds.n_trk; end
    seen_b2b |= gdl_lvds.trk_b2b; seen_oa90 |= gdl_lvds.trk_oa90; seen_oa30 |= gdl_lvds.trk_oa30;
    seen_fs |= gdl_lvds.fs_b2b; seen_ss |= gdl_lvds.ss_b2b; seen_top |= gdl_lvds.top_match;
    seen_klm |= gdl_lvds.klm_match; seen_ec |= gdl_lvds.klm_ec_cdc;
    if (int'(gdl_lvds.n_st) > seen_nst) seen_nst = gdl_lvds.n_st;
    checks++;
    if (gdl_frame != GDL_W'(gdl_lvds)) begin failures++; $display("FAIL frame/lvds differ"); end
  end

  task automatic reg_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk) reg_addr = a; reg_wdata = d; reg_wr = 1;
    @(negedge clk) reg_wr = 0;
  endtask
  task automatic reg_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk) reg_addr = a; reg_rd = 1;
    @(negedge clk) reg_rd = 0; d = reg_rdata;
  endtask

  function automatic int ext_units(int omega, real k);
    real x = k * (omega < 0 ? -omega : omega);
    return $rtoi($asin(x) * 180.0 / 3.14159265358979 / 1.125 + 0.5);
  endfunction

  task automatic clear_cdc();
    for (int q = 0; q < 4; q++) for (int s = 0; s < 4; s++) trk2d[q][s] = '0;
    ts_sl0 = '0; ts_sl1 = '0; ts_sl2 = '0; ts_sl3 = '0; ts_sl4 = '0;
  endtask
  task automatic clear_clus();
    foreach (ecl_clus[c]) ecl_clus[c] = '0;
  endtask

  task automatic set_ts(int sl, int bin);
    int n[5] = '{160, 160, 192, 224, 256};
    int i = (bin * n[sl] + 63) / 64;
    case (sl)
      0: ts_sl0[i] = 1;
      1: ts_sl1[i] = 1;
      2: ts_sl2[i] = 1;
      3: ts_sl3[i] = 1;
      default: ts_sl4[i] = 1;
    endcase
  endtask

  // one event; returns the cycle at which the CDC frame was sampled
  task automatic play_event(output int t0);
    int be, bt, bk, pe1, pe2, clus_phi1, clus_phi2;
    // wait for a data-clock cycle and present the CDC frame during it
    @(negedge clk iff dclk_en);
    t0 = cyc;
    trk2d[0][0] = '{1'b1, 7'sd10, 7'd10};    // global phi 10 (11.25 deg), bin 1
    trk2d[0][1] = '{1'b1, 7'sd12, 7'd12};    // cross-talk duplicate of it
    trk2d[2][0] = '{1'b1, -7'sd10, 7'd10};   // global phi 170 (191 deg), bin 19
    // short tracks: (+1,+2,+3,+4) from SL0 bin 36 and (-1..-4) from bin 4
    for (int s = 0; s < 5; s++) begin set_ts(s, 36 + s); set_ts(s, 4 - s); end
    @(negedge clk);
    clear_cdc();
    // extrapolated bins at the calorimeter
    pe1 = ((10 + ext_units(10, 0.0278)) * 9) / 80;
    pe2 = ((170 - ext_units(-10, 0.0278)) * 9) / 80;
    // clusters: one on track 1's bin, one opposite to it (bin pe1+18)
    clus_phi1 = ((pe1 * 10 + 5) * 64) / 90;       // bin centre in 1.40625 deg codes
    clus_phi2 = (((pe1 + 18) * 10 + 5) * 64) / 90;
    // TOP stave and KLM octant of track 1
    bt = ((10 + ext_units(10, 0.0259)) * 1125) / 22500;   // 22.5 deg staves
    bk = ((10 + ext_units(10, 0.0434)) * 1125) / 45000;   // 45 deg octants
    // endcap KLM hit while the track-segment mesh is still held
    repeat (20) @(negedge clk);
    klm_ec[2] = 1;                                      // sector of SL0 bin 36
    @(negedge clk);
    klm_ec = '0;
    repeat (100) @(negedge clk);
    top_hit[bt] = 1; klm_hit[bk] = 1;
    @(negedge clk);
    top_hit = '0; klm_hit = '0;
    // next cluster frame
    @(negedge clk iff (cyc % 16 == 0));
    ecl_clus[0] = '{1'b1, 7'd64, 8'(clus_phi1), 12'd200};
    ecl_clus[1] = '{1'b1, 7'd64, 8'(clus_phi2), 12'd300};
    clus_stb = 1;
    @(negedge clk);
    clus_stb = 0; clear_clus();
    repeat (2 + int'(dut.gdl_delay)) @(negedge clk);
    check(gdl_lvds.ecl_match && gdl_lvds.n_ecl_match == 1, $sformatf("ECL match (pex %0d/%0d)", pe1, pe2));
    check(gdl_lvds.cc_b2b, "cluster-cluster back-to-back");
    check(gdl_lvds.tc_b2b && gdl_lvds.tc_same && gdl_lvds.tc_opp, "track-cluster topology");
    m_ecl += gdl_lvds.ecl_match; m_cc += gdl_lvds.cc_b2b; m_tc += gdl_lvds.tc_b2b;
    m_same += gdl_lvds.tc_same; m_opp += gdl_lvds.tc_opp;
  endtask

  initial begin
    logic [31:0] d;
    int t0, lat1, lat2, n1, n2;
    clear_cdc(); clear_clus();
    repeat (5) @(negedge clk);
    rst = 0;
    // ---- flow control start-up
    link_ok = '1;
    repeat (10) @(negedge clk);
    check(!fc_out, "no flow control before ready");
    ready_up = '1;
    @(negedge clk iff rev);
    @(negedge clk);
    check(fc_out, "flow control after ready and revolution");
    m_fc += fc_out;
    reg_read(8'h08, d);
    check(d[1:0] == 2'(FC_RUN) && d[2], "flow-control status register");
    // link reset request
    @(negedge clk) reg_addr = 8'h06; reg_wdata = 32'h1; reg_wr = 1;
    @(negedge clk) reg_wr = 0;
    m_lreset += link_reset[0];
    check(link_reset[0], "link reset pulse");
    reg_write(8'h09, 0);   // clear rate counters

    // ---- event 1: duplicate removal on, no extra delay
    seen_b2b = 0; seen_fs = 0; seen_ss = 0;
    play_event(t0);
    @(negedge clk iff (stb_cycle > t0));
    lat1 = stb_cycle - t0; n1 = last_ntrk;
    check(n1 == 2, $sformatf("event 1 track count %0d (duplicate removed)", n1));
    check(lat1 == 66, $sformatf("track count latency %0d system clocks", lat1));
    check(seen_b2b && seen_oa90 && seen_oa30, "track geometry conditions");
    check(seen_nst == 2 && seen_fs && seen_ss, $sformatf("short tracks %0d, full-short, short-short", seen_nst));
    check(seen_top, "TOP matching");
    check(seen_klm, "KLM matching");
    check(seen_ec, "endcap-KLM coincidence");
    m_cnt += (n1 == 2); m_trk_b2b += seen_b2b; m_st += (seen_nst == 2); m_fs += seen_fs; m_ss += seen_ss;
    m_top += seen_top; m_klm += seen_klm; m_ec += seen_ec;
    repeat (300) @(negedge clk);

    // ---- event 2: duplicate removal off, output delayed by 5
    reg_write(8'h01, 0);
    reg_write(8'h05, 5);
    play_event(t0);
    @(negedge clk iff (stb_cycle > t0));
    lat2 = stb_cycle - t0; n2 = last_ntrk;
    check(n2 == 3, $sformatf("event 2 track count %0d (duplicates kept)", n2));
    check(lat2 == lat1 + 5, $sformatf("delayed output latency %0d", lat2));
    m_dup += (n1 < n2); m_dly += (lat2 == lat1 + 5);

    // ---- late cluster: after the 200-clock persistence, no match
    repeat (260) @(negedge clk);
    @(negedge clk iff (cyc % 16 == 0));
    ecl_clus[0] = '{1'b1, 7'd64, 8'd18, 12'd200};
    clus_stb = 1;
    @(negedge clk);
    clus_stb = 0; clear_clus();
    repeat (7) @(negedge clk);
    check(!gdl_lvds.ecl_match, "no ECL match after persistence");
    m_ecl_late += !gdl_lvds.ecl_match;

    // ---- rate counter of trk_b2b (monitor index 16): one rise per event
    reg_read(8'h40 + 8'd16, d);
    check(d == 2, $sformatf("trk_b2b rate counter %0d", d));
    m_rate += (d == 2);

    $display("mechanisms: fc=%0d link_reset=%0d dup=%0d count=%0d trk_b2b=%0d short=%0d fs=%0d ss=%0d ecl=%0d ecl_late=%0d top=%0d klm=%0d tc=%0d cc=%0d same=%0d opp=%0d ec=%0d delay=%0d rate=%0d",
             m_fc, m_lreset, m_dup, m_cnt, m_trk_b2b, m_st, m_fs, m_ss, m_ecl, m_ecl_late, m_top, m_klm,
             m_tc, m_cc, m_same, m_opp, m_ec, m_dly, m_rate);
    check(m_fc > 0 && m_lreset > 0 && m_dup > 0 && m_cnt > 0 && m_trk_b2b > 0 && m_st > 0 && m_fs > 0 &&
          m_ss > 0 && m_ecl > 0 && m_ecl_late > 0 && m_top > 0 && m_klm > 0 && m_tc > 0 && m_cc > 0 &&
          m_same > 0 && m_opp > 0 && m_ec > 0 && m_dly > 0 && m_rate > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
