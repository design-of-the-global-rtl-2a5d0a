// tb_phi_hit_array - random set/tick traffic against a reference model of
// per-bit hold counters; directed check of a 16-tick hold.
module tb_phi_hit_array;
  localparam int N = 36, CW = 10;
  logic clk = 0, rst = 1, tick = 0;
  logic [N-1:0] set = '0, hit;
  logic [CW-1:0] persist = 10'd16;
  int checks = 0, failures = 0;
  int refc [N];

  phi_hit_array #(.N(N), .CW(CW)) dut (.*);
  always #4 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int i = 0; i < N; i++)
      if (rst) refc[i] <= 0;
      else if (set[i]) refc[i] <= int'(persist);
      else if (tick && refc[i] > 0) refc[i] <= refc[i] - 1;
  end

  task automatic cmp();
    logic [N-1:0] e;
    for (int i = 0; i < N; i++) e[i] = refc[i] != 0;
    checks++;
    if (hit !== e) begin failures++; $display("FAIL hit %h exp %h", hit, e); end
  endtask

  initial begin
    int cnt;
    repeat (2) @(negedge clk);
    rst = 0;
    // directed: set bit 7 on a tick cycle, tick every 4 cycles -> 16 ticks = 64 cycles
    @(negedge clk); set[7] = 1; tick = 1;
    @(negedge clk); set[7] = 0; tick = 0;
    cnt = 0;
    for (int c = 1; c < 200; c++) begin
      if (hit[7]) cnt++;
      tick = (c % 4) == 0;
      @(negedge clk);
    end
    checks++;
    if (cnt != 64) begin failures++; $display("FAIL hold %0d cycles", cnt); end
    for (int c = 0; c < 5000; c++) begin
      tick = $urandom % 2;
      set = '0;
      if ($urandom % 4 == 0) set[$urandom % N] = 1;
      if (c % 1000 == 0) persist = CW'($urandom % 40);
      @(negedge clk);
      cmp();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
