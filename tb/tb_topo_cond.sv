// tb_topo_cond - the three track geometry conditions on random and
// directed 36-bit arrays against a reference written from the definitions
// (bin i set and any of bins i+LO..i+HI modulo 36 set).
module tb_topo_cond;
  logic [35:0] a, b;
  logic hb2b, h90, h30, hx;
  int checks = 0, failures = 0;

  topo_cond #(.N(36), .LO(16), .HI(20)) u1 (.a(a), .b(a), .hit(hb2b));
  topo_cond #(.N(36), .LO(9),  .HI(27)) u2 (.a(a), .b(a), .hit(h90));
  topo_cond #(.N(36), .LO(3),  .HI(33)) u3 (.a(a), .b(a), .hit(h30));
  topo_cond #(.N(36), .LO(16), .HI(20)) u4 (.a(a), .b(b), .hit(hx));

  // reference: minimal circular distance between two set bins
  function automatic logic ref_cond(logic [35:0] x, logic [35:0] y, int lo, int hi);
    for (int i = 0; i < 36; i++)
      for (int j = 0; j < 36; j++)
        if (x[i] && y[j]) begin
          int d = (j - i + 36) % 36;
          if (d >= lo && d <= hi) return 1;
        end
    return 0;
  endfunction

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s a=%h b=%h", m, a, b); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed: two bins 18 apart (180 deg) -> all three
    a = '0; a[0] = 1; a[18] = 1; b = '0; #1;
    check(hb2b && h90 && h30, "180 deg");
    a = '0; a[5] = 1; a[5+10] = 1; #1;
    check(!hb2b && h90 && h30, "100 deg");
    a = '0; a[35] = 1; a[2] = 1; #1;  // 30 deg across wrap
    check(!hb2b && !h90 && h30, "30 deg wrap");
    a = '0; a[10] = 1; a[12] = 1; #1;
    check(!hb2b && !h90 && !h30, "20 deg");
    a = '0; a[3] = 1; #1;
    check(!h30, "single track");
    for (int t = 0; t < 4000; t++) begin
      a = '0; b = '0;
      for (int k = 0; k < 1 + $urandom % 3; k++) a[$urandom % 36] = 1;
      for (int k = 0; k < 1 + $urandom % 3; k++) b[$urandom % 36] = 1;
      #1;
      check(hb2b == ref_cond(a, a, 16, 20), "b2b");
      check(h90 == ref_cond(a, a, 9, 27), "oa90");
      check(h30 == ref_cond(a, a, 3, 33), "oa30");
      check(hx == ref_cond(a, b, 16, 20), "a-b b2b");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
