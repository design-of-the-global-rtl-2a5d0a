// tb_other_bits - random track/cluster arrays, TS meshes and endcap KLM
// sectors against reference rules written here from angles: back-to-back
// (160..200 deg in bins), same hemisphere (|d| <= 8 bins), opposite
// (9..27 bins) and the SL0-2 / endcap-KLM sector coincidence.
module tb_other_bits;
  import grl_pkg::*;
  logic clk = 0, rst = 1;
  logic [35:0] pex36 = '0, clus36 = '0;
  logic [2:0][63:0] mesh012 = '0;
  logic [7:0] klm_ec = '0;
  logic tc_b2b, cc_b2b, tc_same, tc_opp, klm_ec_cdc;
  int checks = 0, failures = 0;
  int seen[5] = '{0, 0, 0, 0, 0};

  other_bits dut (.*);
  always #4 clk = ~clk;

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (t=%0t)", m, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // signed circular distance from i to j in bins, -17..18
  function automatic int sd(int i, int j);
    int d = (j - i + 36) % 36;
    return (d > 18) ? d - 36 : d;
  endfunction

  function automatic bit pair(logic [35:0] x, logic [35:0] y, int kind);
    for (int i = 0; i < 36; i++) for (int j = 0; j < 36; j++) if (x[i] && y[j]) begin
      int d = sd(i, j), ad;
      ad = d < 0 ? -d : d;
      case (kind)
        0: if (d >= 16 || d <= -16) return 1;   // i+16..i+20 == -20..-16 or 16..18
        1: if (ad <= 8) return 1;
        2: if (ad >= 9) return 1;
      endcase
    end
    return 0;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < 20000; c++) begin
      bit e_ec;
      pex36 = '0; clus36 = '0; mesh012 = '0; klm_ec = '0;
      for (int k = 0; k < $urandom % 3; k++) pex36[$urandom % 36] = 1;
      for (int k = 0; k < $urandom % 3; k++) clus36[$urandom % 36] = 1;
      for (int s = 0; s < 3; s++) for (int k = 0; k < $urandom % 3; k++) mesh012[s][$urandom % 64] = 1;
      klm_ec = 8'($urandom) & 8'($urandom) & 8'($urandom);
      e_ec = 0;
      for (int q = 0; q < 4; q++) begin
        bit h[3];
        for (int s = 0; s < 3; s++) begin
          h[s] = 0;
          for (int b = 0; b < 64; b++) if (mesh012[s][b] && b * 90 / 16 >= q * 90 && b * 90 / 16 < q * 90 + 90) h[s] = 1;
        end
        if ((klm_ec[q] || klm_ec[q + 4]) && h[0] && h[1] && h[2]) e_ec = 1;
      end
      @(negedge clk);
      check(tc_b2b == pair(pex36, clus36, 0), "tc_b2b");
      check(cc_b2b == pair(clus36, clus36, 0), "cc_b2b");
      check(tc_same == pair(pex36, clus36, 1), "tc_same");
      check(tc_opp == pair(pex36, clus36, 2), "tc_opp");
      check(klm_ec_cdc == e_ec, "klm_ec_cdc");
      seen[0] += tc_b2b; seen[1] += cc_b2b; seen[2] += tc_same; seen[3] += tc_opp; seen[4] += klm_ec_cdc;
    end
    foreach (seen[i]) check(seen[i] > 20, $sformatf("condition %0d seen %0d times", i, seen[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
