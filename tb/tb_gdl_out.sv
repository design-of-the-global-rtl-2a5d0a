// tb_gdl_out - random trigger-bit vectors with every delay setting; checks
// that lvds equals the input delay+1 clocks earlier and that the 168-bit
// word carries the same bits in its low part and zeros above.
module tb_gdl_out;
  import grl_pkg::*;
  logic clk = 0, rst = 1;
  grl_bits_t bits = '0, lvds;
  logic [3:0] delay = '0;
  logic [GDL_W-1:0] frame;
  int checks = 0, failures = 0;
  grl_bits_t hist[$];

  gdl_out dut (.*);
  always #4 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int d = 0; d < 16; d++) begin
      delay = 4'(d);
      hist.delete();
      for (int c = 0; c < 400; c++) begin
        bits = grl_bits_t'({$urandom, $urandom});
        hist.push_front(bits);
        @(negedge clk);
        if (c > d + 1) begin
          checks++;
          if (lvds !== hist[d] || frame !== GDL_W'(hist[d])) begin
            failures++;
            $display("FAIL delay %0d: got %h exp %h", d, lvds, hist[d]);
          end
        end
      end
    end
    checks++;
    if (frame[GDL_W-1:N_BITS] !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
