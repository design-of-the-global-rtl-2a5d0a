// tb_seg_match - TOP (16 staves, K=0.0259) and KLM (8 octants, K=0.0434,
// margin 1 bin) instances driven with random tracks and segment hits.
// Reference written here: real-valued extrapolation, hold counters, and a
// segment/bin overlap test computed from angles in degrees.
module tb_seg_match;
  import grl_pkg::*;
  logic clk = 0, rst = 1;
  trk_t trk [N_TRK];
  logic [PW-1:0] persist = PW'(100);
  logic [15:0] top_hit = '0;
  logic [7:0]  klm_hit = '0;
  logic [N_PHI-1:0] pex_t, pex_k;
  logic m_t, m_k;
  int checks = 0, failures = 0;

  seg_match #(.NSEG(16), .KCOEF(259), .MARGIN(0)) u_t (.clk, .rst, .trk, .persist, .seg_hit(top_hit), .pex36(pex_t), .match(m_t));
  seg_match #(.NSEG(8),  .KCOEF(434), .MARGIN(1)) u_k (.clk, .rst, .trk, .persist, .seg_hit(klm_hit), .pex36(pex_k), .match(m_k));
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

  function automatic int ref_bin(trk_t t, real k, output bit reach);
    real x = k * ((t.omega < 0) ? -t.omega : t.omega);
    int d, p;
    reach = t.valid && x < 1.0;
    if (!reach) return 0;
    d = $rtoi($asin(x) * 180.0 / 3.14159265358979 / 1.125 + 0.5);
    p = (t.omega < 0) ? int'(t.phi) - d : int'(t.phi) + d;
    p = (p + 320) % 320;
    return (p * 9) / 80;
  endfunction

  // does bin j (10 deg) come within `margin` bins of segment s of nseg?
  function automatic bit near(int j, int s, int nseg, int margin);
    real lo = 360.0 * s / nseg, hi = 360.0 * (s + 1) / nseg;
    for (int k = -margin; k <= margin; k++) begin
      int jj = (j - k + 36) % 36;
      if (10.0 * jj < hi && 10.0 * jj + 10.0 > lo) return 1;
    end
    return 0;
  endfunction

  int rt[36], rk[36];
  bit e_t = 0, e_k = 0;
  int nm_t = 0, nm_k = 0;
  always @(posedge clk) begin
    bit st[36], sk[36];
    bit r;
    int b;
    if (rst) begin foreach (rt[i]) begin rt[i] = 0; rk[i] = 0; end e_t = 0; e_k = 0; end
    else begin
      e_t = 0; e_k = 0;
      for (int s = 0; s < 16; s++) if (top_hit[s]) for (int j = 0; j < 36; j++) if (rt[j] > 0 && near(j, s, 16, 0)) e_t = 1;
      for (int s = 0; s < 8; s++)  if (klm_hit[s]) for (int j = 0; j < 36; j++) if (rk[j] > 0 && near(j, s, 8, 1)) e_k = 1;
      nm_t += e_t; nm_k += e_k;
      foreach (st[i]) begin st[i] = 0; sk[i] = 0; end
      for (int j = 0; j < N_TRK; j++) begin
        b = ref_bin(trk[j], 0.0259, r); if (r) st[b] = 1;
        b = ref_bin(trk[j], 0.0434, r); if (r) sk[b] = 1;
      end
      for (int i = 0; i < 36; i++) begin
        if (st[i]) rt[i] = int'(persist); else if (rt[i] > 0) rt[i]--;
        if (sk[i]) rk[i] = int'(persist); else if (rk[i] > 0) rk[i]--;
      end
    end
  end

  always @(negedge clk) if (!rst) begin
    logic [35:0] et, ek;
    for (int i = 0; i < 36; i++) begin et[i] = rt[i] > 0; ek[i] = rk[i] > 0; end
    check(pex_t == et && pex_k == ek, "pex arrays");
    check(m_t == e_t, "TOP match");
    check(m_k == e_k, "KLM match");
  end

  initial begin
    foreach (trk[j]) trk[j] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < 40000; c++) begin
      foreach (trk[j]) trk[j] = '0;
      top_hit = '0; klm_hit = '0;
      if (c % 4 == 0 && $urandom % 8 == 0)
        trk[$urandom % N_TRK] = '{1'b1, 7'($signed($urandom % 67) - 33), 9'($urandom % 320)};
      if ($urandom % 3 == 0) top_hit[$urandom % 16] = 1;
      if ($urandom % 3 == 0) klm_hit[$urandom % 8] = 1;
      if (c % 9000 == 0) persist = PW'(10 + $urandom % 200);
      @(negedge clk);
    end
    check(nm_t > 100 && nm_k > 100, $sformatf("matches seen %0d %0d", nm_t, nm_k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
