// tb_short_tracking - track-segment hits from synthetic short tracks
// (offset patterns drawn both inside and outside the pattern rule) plus
// noise and association vetoes, one frame per data clock. Checked against
// reference models written here: the 5x64 mesh held 16 data clocks, the
// short-track bins from an independently enumerated pattern list, the
// count, and full-short / short-short geometry conditions.
module tb_short_tracking;
  import grl_pkg::*;
  logic clk = 0, rst = 1, dclk_en = 0;
  logic [N_TS0-1:0] ts_sl0;
  logic [N_TS1-1:0] ts_sl1;
  logic [N_TS2-1:0] ts_sl2;
  logic [N_TS3-1:0] ts_sl3;
  logic [N_TS4-1:0] ts_sl4;
  logic [N_SL-1:0][N_MESH-1:0] ts_assoc, mesh;
  logic [N_PHI-1:0] trk36;
  logic [N_MESH-1:0] st64;
  logic [3:0] n_st;
  logic fs_b2b, fs_oa90, fs_oa30, ss_b2b, ss_oa90, ss_oa30;
  int checks = 0, failures = 0;

  short_tracking dut (.*);
  always #4 clk = ~clk;

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (t=%0t)", m, $time); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference pattern list: same sign, |d1|<=2, steps 0..2, |d4|<=5
  int pat[$][4];
  initial begin
    for (int a = 0; a <= 2; a++) for (int b = a; b <= a + 2; b++)
      for (int c = b; c <= b + 2; c++) for (int d = c; d <= c + 2; d++)
        if (d <= 5) begin
          pat.push_back('{a, b, c, d});
          if (d != 0) pat.push_back('{-a, -b, -c, -d});
        end
  end

  int nts[5] = '{160, 160, 192, 224, 256};
  int rc[5][64];

  function automatic logic ts_bit(int sl, int i);
    case (sl)
      0: return ts_sl0[i];
      1: return ts_sl1[i];
      2: return ts_sl2[i];
      3: return ts_sl3[i];
      default: return ts_sl4[i];
    endcase
  endfunction

  always @(posedge clk) if (!rst && dclk_en) begin
    for (int s = 0; s < 5; s++) begin
      for (int b = 0; b < 64; b++) if (rc[s][b] > 0) rc[s][b]--;
      for (int i = 0; i < nts[s]; i++)
        if (ts_bit(s, i) && !ts_assoc[s][(i * 64) / nts[s]]) rc[s][(i * 64) / nts[s]] = 16;
    end
  end

  function automatic bit cond(logic [35:0] x, logic [35:0] y, int lo, int hi);
    for (int i = 0; i < 36; i++) for (int j = 0; j < 36; j++)
      if (x[i] && y[j] && ((j - i + 36) % 36) >= lo && ((j - i + 36) % 36) <= hi) return 1;
    return 0;
  endfunction

  logic [4:0][63:0] pmesh = '0;   // DUT mesh one cycle ago
  logic [35:0] ptrk = '0;
  int n_found = 0, n_sat = 0;
  always @(negedge clk) if (!rst) begin
    logic [63:0] e;
    logic [35:0] e36;
    int n;
    logic [4:0][63:0] rm;
    for (int s = 0; s < 5; s++) for (int b = 0; b < 64; b++) rm[s][b] = rc[s][b] > 0;
    check(mesh == rm, "mesh");
    e = '0; e36 = '0; n = 0;
    for (int b = 0; b < 64; b++)
      if (pmesh[0][b])
        foreach (pat[p])
          if (pmesh[1][(b + pat[p][0] + 64) % 64] && pmesh[2][(b + pat[p][1] + 64) % 64] &&
              pmesh[3][(b + pat[p][2] + 64) % 64] && pmesh[4][(b + pat[p][3] + 64) % 64]) e[b] = 1;
    for (int b = 0; b < 64; b++) if (e[b]) begin n++; e36[(b * 9) / 16] = 1; end
    check(st64 == e, "st64");
    check(int'(n_st) == (n > 15 ? 15 : n), "n_st");
    check(fs_b2b == cond(ptrk, e36, 16, 20), "fs_b2b");
    check(fs_oa90 == cond(ptrk, e36, 9, 27), "fs_oa90");
    check(fs_oa30 == cond(ptrk, e36, 3, 33), "fs_oa30");
    check(ss_b2b == cond(e36, e36, 16, 20), "ss_b2b");
    check(ss_oa90 == cond(e36, e36, 9, 27), "ss_oa90");
    check(ss_oa30 == cond(e36, e36, 3, 33), "ss_oa30");
    if (n > 0) n_found++;
    pmesh = mesh;
    ptrk = trk36;
  end

  int ph = 0;
  always @(posedge clk) begin
    ph <= (ph + 1) % 4;
    dclk_en <= ((ph + 1) % 4) == 0;
  end

  task automatic set_ts(int sl, int bin);
    int i = (bin * nts[sl] + 63) / 64;   // first TS of the mesh bin
    case (sl)
      0: ts_sl0[i] = 1;
      1: ts_sl1[i] = 1;
      2: ts_sl2[i] = 1;
      3: ts_sl3[i] = 1;
      default: ts_sl4[i] = 1;
    endcase
  endtask

  task automatic clear_in();
    ts_sl0 = '0; ts_sl1 = '0; ts_sl2 = '0; ts_sl3 = '0; ts_sl4 = '0; ts_assoc = '0;
  endtask

  task automatic next_frame();
    @(posedge clk iff dclk_en);
    #1;
  endtask

  initial begin
    clear_in();
    trk36 = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    // directed: pattern (1,2,3,4) at SL0 bin 10 and mirrored at bin 42
    for (int s = 0; s < 5; s++) begin set_ts(s, 10 + s); set_ts(s, (42 - s)); end
    next_frame(); clear_in();
    repeat (3) @(negedge clk);
    check(st64[10] && st64[42] && n_st == 2, "directed two short tracks");
    check(ss_b2b, "directed back-to-back short tracks");
    // directed: same hits but vetoed as belonging to a full track
    repeat (20) next_frame();
    for (int s = 0; s < 5; s++) set_ts(s, 20 + s);
    ts_assoc[2][22] = 1;
    next_frame(); clear_in();
    repeat (3) @(negedge clk);
    check(st64 == '0, "vetoed hit breaks the pattern");
    repeat (20) next_frame();
    // random
    for (int f = 0; f < 2000; f++) begin
      clear_in();
      for (int t = 0; t < $urandom % 3; t++) begin
        int b0 = $urandom % 64, sg = ($urandom % 2) ? 1 : -1, d = 0;
        set_ts(0, b0);
        for (int s = 1; s < 5; s++) begin
          d += $urandom % 4;   // sometimes outside the pattern rule
          set_ts(s, (b0 + sg * d + 64) % 64);
        end
      end
      for (int k = 0; k < $urandom % 4; k++) set_ts($urandom % 5, $urandom % 64);
      if ($urandom % 4 == 0) ts_assoc[$urandom % 5] = 64'($urandom) << ($urandom % 32);
      if ($urandom % 8 == 0) trk36 = 36'($urandom) & 36'($urandom);
      next_frame();
      if ($urandom % 3 == 0) begin clear_in(); repeat ($urandom % 20) next_frame(); end
    end
    check(pat.size() == 131, "pattern count");
    check(n_found > 500, $sformatf("short tracks found in %0d cycles", n_found));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
