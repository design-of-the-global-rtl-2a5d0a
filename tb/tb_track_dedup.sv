// tb_track_dedup - random track sets against a reference duplicate rule
// (|d omega| < 8 and |d phi| < 8 with phi wrap-around, lower index kept),
// plus directed edge cases at the thresholds.
module tb_track_dedup;
  import grl_pkg::*;
  localparam int N = 16;
  trk_t trk [N];
  logic enable;
  logic [N-1:0] uniq;
  int checks = 0, failures = 0;

  track_dedup #(.N(N)) dut (.*);

  function automatic logic close_ref(trk_t a, trk_t b);
    int dw = a.omega - b.omega, dp;
    dp = int'(a.phi) - int'(b.phi);
    if (dw < 0) dw = -dw;
    if (dp < 0) dp = -dp;
    dp = (dp < 320 - dp) ? dp : 320 - dp;
    return dw <= 7 && dp <= 7;
  endfunction

  task automatic check_all(input string m);
    logic [N-1:0] exp;
    for (int j = 0; j < N; j++) begin
      exp[j] = trk[j].valid;
      if (enable) for (int i = 0; i < j; i++) if (trk[i].valid && close_ref(trk[i], trk[j])) exp[j] = 0;
    end
    checks++;
    if (uniq !== exp) begin failures++; $display("FAIL %s: got %h exp %h", m, uniq, exp); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < N; j++) trk[j] = '0;
    enable = 1;
    // directed: pair at threshold
    trk[0] = '{1'b1, 7'sd10, 9'd100};
    trk[1] = '{1'b1, 7'sd17, 9'd107};   // dw=7 dp=7 -> duplicate
    trk[2] = '{1'b1, 7'sd18, 9'd100};   // dw=8 to track 0, but close to track 1
    trk[3] = '{1'b1, 7'sd10, 9'd108};   // dp=8 to track 0, but close to track 1
    trk[4] = '{1'b1, -7'sd33, 9'd2};
    trk[5] = '{1'b1, -7'sd30, 9'd317};  // wrap dp=5 -> duplicate
    #1;
    checks++; if (uniq[5:0] !== 6'b010001) begin failures++; $display("FAIL directed %b", uniq[5:0]); end
    check_all("directed");
    trk[1].valid = 0; #1;                // without track 1, tracks 2 and 3 stay
    checks++; if (uniq[5:0] !== 6'b011101) begin failures++; $display("FAIL directed2 %b", uniq[5:0]); end
    trk[1].valid = 1;
    enable = 0; #1;
    checks++; if (uniq[5:0] !== 6'b111111) begin failures++; $display("FAIL disabled"); end
    enable = 1;
    for (int t = 0; t < 3000; t++) begin
      for (int j = 0; j < N; j++) begin
        trk[j].valid = ($urandom % 3) != 0;
        trk[j].omega = 7'($signed($urandom % 67) - 33);
        trk[j].phi   = 9'(($urandom % 40) + ((t % 2) ? 0 : 290)) % 320;
      end
      enable = (t % 10) != 0;
      #1;
      check_all("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
