// tb_track_counter - replays the timing-diagram sequence (new tracks 1, 2,
// 1 at data clocks 4, 10, 14; sums 0,1,3,4,3,1,0; one event count of 4)
// and random sequences against a reference sliding-window model.
module tb_track_counter;
  localparam int DEPTH = 16, NW = 5, SW = 9;
  logic clk = 0, rst = 1, en = 0;
  logic [NW-1:0] n_new = '0;
  logic [SW-1:0] sum, n_event;
  logic fall;
  int checks = 0, failures = 0;

  track_counter #(.DEPTH(DEPTH), .NW(NW)) dut (.*);
  always #4 clk = ~clk;

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (t=%0t)", m, $time); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model at data-clock granularity
  int hist[$];
  int ref_sum = 0, ref_prev = 0;
  bit ref_armed = 0;
  int n_fall = 0;
  int falls[$];

  // one data clock = 4 system clocks, en on the first
  task automatic dclk(input int n);
    int exp_sum, exp_fall, exp_ev;
    @(negedge clk); en = 1; n_new = NW'(n);
    @(negedge clk); en = 0;
    // reference update
    hist.push_front(n);
    if (hist.size() > DEPTH) void'(hist.pop_back());
    ref_prev = ref_sum;
    ref_sum = 0;
    foreach (hist[i]) ref_sum += hist[i];
    exp_fall = 0; exp_ev = 0;
    if (ref_sum > ref_prev) ref_armed = 1;
    else if (ref_sum < ref_prev) begin
      if (ref_armed) begin exp_fall = 1; exp_ev = ref_prev; end
      ref_armed = 0;
    end
    check(int'(sum) == ref_sum, $sformatf("sum %0d exp %0d", sum, ref_sum));
    check(fall == exp_fall, "fall");
    check(int'(n_event) == exp_ev, $sformatf("n_event %0d exp %0d", n_event, exp_ev));
    if (fall) falls.push_back(int'(n_event));
    @(negedge clk);
    check(fall == 0, "fall one cycle only");
    @(negedge clk);
  endtask

  int sums[$];
  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // diagram sequence
    for (int c = 0; c < 37; c++) begin
      dclk((c == 4) ? 1 : (c == 10) ? 2 : (c == 14) ? 1 : 0);
      sums.push_back(int'(sum));
    end
    check(sums[4] == 1 && sums[9] == 1 && sums[10] == 3 && sums[14] == 4 &&
          sums[20] == 3 && sums[26] == 1 && sums[30] == 0, "diagram sums");
    check(falls.size() == 1 && falls[0] == 4, "diagram event count 4");
    // random events
    for (int c = 0; c < 3000; c++)
      dclk(($urandom % 5 == 0) ? int'($urandom % 17) : 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
