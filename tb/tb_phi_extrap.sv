// tb_phi_extrap - every omega and a sweep of phi for the ECL (K=0.0278) and
// KLM (K=0.0434) coefficients against a reference using the real-valued
// asin: dphi = round(asin(K*|omega|) / 1.125 deg), phi_ex = phi +- dphi.
module tb_phi_extrap;
  import grl_pkg::*;
  trk_t trk;
  logic reach_e, reach_k;
  logic [8:0] pe_e, pe_k;
  logic [5:0] b_e, b_k;
  int checks = 0, failures = 0;

  phi_extrap #(.KCOEF(278)) u_e (.trk(trk), .reach(reach_e), .phi_ex(pe_e), .bin36(b_e));
  phi_extrap #(.KCOEF(434)) u_k (.trk(trk), .reach(reach_k), .phi_ex(pe_k), .bin36(b_k));

  task automatic ref_check(input int k, input logic r, input logic [8:0] pe, input logic [5:0] b);
    real x, a;
    int d, p, w;
    w = trk.omega;
    x = real'(k) * real'(w < 0 ? -w : w) / 10000.0;
    checks++;
    if (x >= 1.0) begin
      if (r) begin failures++; $display("FAIL reach K=%0d w=%0d", k, w); end
      return;
    end
    a = $asin(x) * 180.0 / 3.14159265358979 / 1.125;
    d = $rtoi(a + 0.5);
    p = (w < 0) ? int'(trk.phi) - d : int'(trk.phi) + d;
    p = (p + 320) % 320;
    if (!r || int'(pe) != p || int'(b) != (p * 9) / 80) begin
      failures++;
      $display("FAIL K=%0d w=%0d phi=%0d: got %0d/%0d exp %0d", k, w, trk.phi, pe, b, p);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = -33; w <= 33; w++)
      for (int p = 0; p < 320; p += 7) begin
        trk = '{1'b1, 7'(w), 9'(p)};
        #1;
        ref_check(278, reach_e, pe_e, b_e);
        ref_check(434, reach_k, pe_k, b_k);
      end
    trk = '{1'b0, 7'sd3, 9'd10}; #1;
    checks++; if (reach_e) begin failures++; $display("FAIL invalid track reaches"); end
    // the ECL table at |omega|=33: asin(0.9174) = 66.55 deg -> 59 units
    trk = '{1'b1, 7'sd33, 9'd0}; #1;
    checks++; if (pe_e != 9'd59) begin failures++; $display("FAIL omega 33 -> %0d", pe_e); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
