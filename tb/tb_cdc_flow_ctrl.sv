// tb_cdc_flow_ctrl - checks the start-up sequence (ready -> revolution ->
// flow control), fall-back when a link drops, and the data-clock enable /
// time stamp alignment to the revolution pulse, against a reference model
// written in the testbench.
module tb_cdc_flow_ctrl;
  import grl_pkg::*;
  localparam int NU = 17;
  logic clk = 0, rst = 1, rev = 0;
  logic [NU-1:0] link_ok = '0, ready_up = '0;
  logic fc_out, all_ready, dclk_en;
  fc_state_t state;
  logic [12:0] timestamp;
  int checks = 0, failures = 0;

  cdc_flow_ctrl #(.N_UP(NU), .TS_MAX(319)) dut (.*);

  always #4 clk = ~clk;

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference phase / time stamp model
  int ref_phase = 0, ref_ts = 0;
  always @(posedge clk) begin
    if (rst || rev) begin ref_phase <= 0; ref_ts <= 0; end
    else begin
      ref_phase <= (ref_phase + 1) % 4;
      if (ref_phase == 3) ref_ts <= (ref_ts == 319) ? 0 : ref_ts + 1;
    end
  end
  always @(negedge clk) if (!rst) begin
    check(dclk_en == (ref_phase == 0), "dclk_en phase");
    check(int'(timestamp) == ref_ts, "timestamp");
  end

  task automatic pulse_rev();
    @(negedge clk) rev = 1; @(negedge clk) rev = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // links come up one by one, no flow control yet
    for (int i = 0; i < NU; i++) begin
      @(negedge clk) link_ok[i] = 1; ready_up[i] = (i != 5);
      check(fc_out == 0, "no fc before all ready");
    end
    pulse_rev();
    repeat (3) @(negedge clk);
    check(fc_out == 0 && state == FC_WAIT_READY, "revolution ignored while not ready");
    ready_up[5] = 1;
    repeat (5) @(negedge clk);
    check(state == FC_WAIT_REV && fc_out == 0, "waiting for revolution");
    repeat (50) @(negedge clk);
    check(fc_out == 0, "still waiting");
    pulse_rev();
    check(fc_out == 1 && state == FC_RUN, "flow control after revolution");
    // dclk: first cycle after revolution
    repeat (1300) @(negedge clk);   // wraps time stamp
    check(fc_out == 1, "flow control held");
    pulse_rev();
    check(dclk_en == 1 && timestamp == 0, "realigned by revolution");
    // a link drops
    link_ok[9] = 0;
    @(negedge clk); @(negedge clk);
    check(fc_out == 0 && state == FC_WAIT_READY, "drop on link loss");
    link_ok[9] = 1;
    repeat (3) @(negedge clk);
    check(fc_out == 0, "needs a new revolution");
    pulse_rev();
    check(fc_out == 1, "restarted");
    // revolution missing: time stamp wraps at 319
    repeat (1400) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
