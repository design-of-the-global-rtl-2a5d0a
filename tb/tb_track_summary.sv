// tb_track_summary - random events of 2D tracks (with cross-talk style
// duplicates) driven one frame per data clock. Checked against reference
// models written here: global azimuth, duplicate rule, per-event track
// count (list of reported counts), the 36-bin array held 16 data clocks and
// the three geometry conditions. Also checks that disabling duplicate
// removal raises the counts.
module tb_track_summary;
  import grl_pkg::*;
  logic clk = 0, rst = 1, dclk_en = 0, dup_en = 1;
  trk2d_t trk_in [N_QUAD][TRK_PER_MOD];
  trk_t trk_glb [N_TRK];
  logic [3:0] n_trk;
  logic n_trk_stb, b2b, oa90, oa30;
  logic [N_PHI-1:0] phi36;
  int checks = 0, failures = 0;

  track_summary dut (.*);
  always #4 clk = ~clk;

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (t=%0t)", m, $time); end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int rc [N_PHI];
  int hist[$];
  int rsum = 0, rprev = 0;
  bit armed = 0;
  int exp_ev[$], got_ev[$];

  function automatic int gphi(int q, int p); return (q * 80 + p) % 320; endfunction
  function automatic bit close_ref(int w1, int p1, int w2, int p2);
    int dw = w1 - w2, dp = p1 - p2;
    if (dw < 0) dw = -dw;
    if (dp < 0) dp = -dp;
    if (dp > 160) dp = 320 - dp;
    return dw < 8 && dp < 8;
  endfunction
  function automatic bit cond_ref(int lo, int hi);
    for (int i = 0; i < 36; i++) for (int j = 0; j < 36; j++)
      if (rc[i] > 0 && rc[j] > 0 && ((j - i + 36) % 36) >= lo && ((j - i + 36) % 36) <= hi) return 1;
    return 0;
  endfunction

  always @(posedge clk) if (!rst && dclk_en) begin
    int w[N_TRK], p[N_TRK];
    bit v[N_TRK];
    int n;
    bit u;
    n = 0;
    for (int q = 0; q < 4; q++) for (int s = 0; s < 4; s++) begin
      v[q*4+s] = trk_in[q][s].valid;
      w[q*4+s] = trk_in[q][s].omega;
      p[q*4+s] = gphi(q, trk_in[q][s].phi);
    end
    for (int i = 0; i < 36; i++) if (rc[i] > 0) rc[i]--;
    for (int j = 0; j < N_TRK; j++) begin
      u = v[j];
      if (v[j]) rc[(p[j] * 9) / 80] = 16;
      if (dup_en) for (int i = 0; i < j; i++) if (v[i] && close_ref(w[i], p[i], w[j], p[j])) u = 0;
      n += u;
    end
    hist.push_front(n);
    if (hist.size() > 16) void'(hist.pop_back());
    rprev = rsum; rsum = 0;
    foreach (hist[i]) rsum += hist[i];
    if (rsum > rprev) armed = 1;
    else if (rsum < rprev) begin
      if (armed) exp_ev.push_back(rprev > 15 ? 15 : rprev);
      armed = 0;
    end
  end

  always @(negedge clk) if (!rst) begin
    logic [35:0] e;
    for (int i = 0; i < 36; i++) e[i] = rc[i] > 0;
    check(phi36 == e, "phi36");
    check(b2b == cond_ref(16, 20), "b2b");
    check(oa90 == cond_ref(9, 27), "oa90");
    check(oa30 == cond_ref(3, 33), "oa30");
    if (n_trk_stb) got_ev.push_back(int'(n_trk));
  end

  // ---------------- stimulus ----------------
  int ph = 0;
  always @(posedge clk) begin
    ph <= (ph + 1) % 4;
    dclk_en <= ((ph + 1) % 4) == 0;
  end

  task automatic clear_in();
    for (int q = 0; q < 4; q++) for (int s = 0; s < 4; s++) trk_in[q][s] = '0;
  endtask

  // wait for the next data-clock edge and present a new frame after it
  task automatic next_frame();
    @(posedge clk iff dclk_en);
    #1;
  endtask

  int n_dup_seen = 0;
  task automatic event_burst(input int ntrk, input bit dups);
    int f = 1 + $urandom % 3;
    for (int k = 0; k < f; k++) begin
      clear_in();
      for (int t = 0; t < ntrk; t++) begin
        int q = $urandom % 4, s = $urandom % 4;
        trk_in[q][s].valid = 1;
        trk_in[q][s].omega = 7'($signed($urandom % 67) - 33);
        trk_in[q][s].phi   = 7'($urandom % 83);
        if (dups && s < 3) begin
          trk_in[q][s+1] = trk_in[q][s];
          trk_in[q][s+1].phi = trk_in[q][s].phi + 7'($urandom % 3);
          n_dup_seen++;
        end
      end
      next_frame();
    end
    clear_in();
  endtask

  int sum_on, sum_off;
  initial begin
    clear_in();
    repeat (4) @(negedge clk);
    rst = 0;
    // directed: two back-to-back tracks in quadrants 0 and 2 -> count 2
    trk_in[0][0] = '{1'b1, 7'sd5, 7'd10};
    trk_in[2][1] = '{1'b1, -7'sd5, 7'd10};
    next_frame(); clear_in();
    repeat (2) @(negedge clk);
    check(b2b && oa90 && oa30, "directed b2b");
    repeat (25) next_frame();
    check(got_ev.size() == 1 && got_ev[0] == 2, "directed count 2");
    for (int e = 0; e < 150; e++) begin
      dup_en = (e < 100);
      event_burst(1 + $urandom % 6, $urandom % 2);
      repeat (18 + $urandom % 5) next_frame();
    end
    check(exp_ev.size() == got_ev.size() && exp_ev.size() > 100, $sformatf("event list size %0d %0d", exp_ev.size(), got_ev.size()));
    foreach (exp_ev[i]) if (i < got_ev.size()) check(exp_ev[i] == got_ev[i], $sformatf("event %0d count %0d exp %0d", i, got_ev[i], exp_ev[i]));
    check(n_dup_seen > 50, "duplicates generated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
