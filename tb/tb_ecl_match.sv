// tb_ecl_match - random 2D tracks and calorimeter cluster frames (one per
// 16 system clocks) with a programmable persistence. The reference, written
// here, extrapolates with the real-valued asin (K = 0.0278), holds each
// 10 deg bin for `persist` system clocks and matches barrel clusters
// (35 < theta < 126 deg) within +-1 bin. Checks pex36, clus36, match and
// the matched-cluster count, and a directed early/late arrival case.
module tb_ecl_match;
  import grl_pkg::*;
  logic clk = 0, rst = 1, clus_stb = 0;
  trk_t trk [N_TRK];
  logic [PW-1:0] persist = PW'(200);
  ecl_clus_t clus [N_CLUS];
  logic [N_PHI-1:0] pex36, clus36;
  logic match;
  logic [2:0] n_match;
  int checks = 0, failures = 0;

  ecl_match #(.KCOEF(278)) dut (.*);
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

  function automatic int ref_bin(trk_t t, output bit reach);
    real x = 0.0278 * ((t.omega < 0) ? -t.omega : t.omega);
    int d, p;
    reach = t.valid && x < 1.0;
    d = $rtoi($asin(x) * 180.0 / 3.14159265358979 / 1.125 + 0.5);
    p = (t.omega < 0) ? int'(t.phi) - d : int'(t.phi) + d;
    p = (p + 320) % 320;
    return (p * 9) / 80;
  endfunction

  int rc[36];
  logic [35:0] e_clus = '0;
  int e_n = 0;
  int n_match_events = 0;
  always @(posedge clk) begin
    if (rst) begin
      foreach (rc[i]) rc[i] = 0;
      e_clus = '0; e_n = 0;
    end else begin
      if (clus_stb) begin
        e_clus = '0; e_n = 0;
        for (int c = 0; c < N_CLUS; c++) if (clus[c].valid) begin
          int b;
          real th;
          b = (int'(clus[c].phi) * 9) / 64;
          th = clus[c].theta * 1.40625;
          e_clus[b] = 1;
          if (th > 35.0 && th < 126.0 && (rc[b] > 0 || rc[(b + 1) % 36] > 0 || rc[(b + 35) % 36] > 0)) e_n++;
        end
        if (e_n > 0) n_match_events++;
      end
      begin
        bit set[36];
        bit r;
        int b;
        foreach (set[i]) set[i] = 0;
        for (int j = 0; j < N_TRK; j++) begin
          b = ref_bin(trk[j], r);
          if (r) set[b] = 1;
        end
        for (int i = 0; i < 36; i++)
          if (set[i]) rc[i] = int'(persist);
          else if (rc[i] > 0) rc[i]--;
      end
    end
  end

  always @(negedge clk) if (!rst) begin
    logic [35:0] e;
    for (int i = 0; i < 36; i++) e[i] = rc[i] > 0;
    check(pex36 == e, "pex36");
    check(clus36 == e_clus, "clus36");
    check(int'(n_match) == e_n && match == (e_n > 0), $sformatf("n_match %0d exp %0d", n_match, e_n));
  end

  task automatic clr();
    foreach (trk[j]) trk[j] = '0;
    foreach (clus[c]) clus[c] = '0;
    clus_stb = 0;
  endtask

  initial begin
    int cyc = 0;
    clr();
    repeat (3) @(negedge clk);
    rst = 0;
    // directed: track at phi 100 (bin 11), omega 0; cluster at bin 12 after 150 clocks
    @(negedge clk) trk[0] = '{1'b1, 7'sd0, 9'd100};
    @(negedge clk) clr();
    repeat (150) @(negedge clk);
    clus[0] = '{1'b1, 7'd64, 8'(86), 12'd100};   // phi 120.9 deg -> bin 12, theta 90 deg
    clus_stb = 1;
    @(negedge clk) clr();
    check(match && n_match == 1, "directed match within persistence");
    repeat (100) @(negedge clk);
    clus[0] = '{1'b1, 7'd64, 8'(86), 12'd100};
    clus_stb = 1;
    @(negedge clk) clr();
    check(!match, "directed no match after persistence");
    // random
    for (int c = 0; c < 30000; c++) begin
      clr();
      if (c % 4 == 0 && $urandom % 6 == 0)
        for (int j = 0; j < 1 + $urandom % 3; j++)
          trk[$urandom % N_TRK] = '{1'b1, 7'($signed($urandom % 67) - 33), 9'($urandom % 320)};
      if (c % 16 == 0) begin
        clus_stb = 1;
        for (int k = 0; k < N_CLUS; k++)
          if ($urandom % 3 == 0) clus[k] = '{1'b1, 7'($urandom % 128), 8'($urandom % 256), 12'($urandom)};
      end
      if (c % 5000 == 0) persist = PW'(20 + $urandom % 300);
      @(negedge clk);
    end
    check(n_match_events > 100, $sformatf("matched frames %0d", n_match_events));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
