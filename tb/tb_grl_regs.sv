// tb_grl_regs - register bus: identifier, reset values, write/read-back of
// the control registers, link-reset pulse, read-only status words, and the
// rate counters (rising edges counted by a model here, then cleared).
module tb_grl_regs;
  import grl_pkg::*;
  localparam int NM = 18;
  logic clk = 0, rst = 1;
  logic [7:0] addr = '0;
  logic wr = 0, rd = 0;
  logic [31:0] wdata = '0, rdata;
  logic [N_LINK-1:0] link_ok = '0;
  fc_state_t fc_state = FC_RUN;
  logic all_ready = 1;
  logic [12:0] timestamp = 13'd123;
  logic [NM-1:0] mon = '0;
  logic dup_en;
  logic [PW-1:0] persist_ecl, persist_top, persist_klm;
  logic [3:0] gdl_delay;
  logic [N_LINK-1:0] link_reset;
  int checks = 0, failures = 0;
  int edges[NM];

  grl_regs #(.N_MON(NM)) dut (.*);
  always #4 clk = ~clk;

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (t=%0t)", m, $time); end
  endtask

  task automatic write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk) addr = a; wdata = d; wr = 1;
    @(negedge clk) wr = 0;
  endtask

  task automatic read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk) addr = a; rd = 1;
    @(negedge clk) rd = 0; d = rdata;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [NM-1:0] prev;
    repeat (3) @(negedge clk);
    rst = 0;
    read(8'h00, d); check(d == 32'h4752_4C01, "ID");
    check(dup_en == 1 && persist_ecl == 200 && persist_top == 200 && persist_klm == 200 && gdl_delay == 0, "reset values");
    write(8'h01, 0);   check(dup_en == 0, "dup_en write");
    write(8'h02, 77);  check(persist_ecl == 77, "persist_ecl");
    write(8'h03, 300); check(persist_top == 300, "persist_top");
    write(8'h04, 511); check(persist_klm == 511, "persist_klm");
    write(8'h05, 9);   check(gdl_delay == 9, "gdl_delay");
    read(8'h02, d); check(d == 77, "read persist_ecl");
    read(8'h05, d); check(d == 9, "read gdl_delay");
    // link reset pulse lasts one clock
    @(negedge clk) addr = 8'h06; wdata = 32'h5; wr = 1;
    @(negedge clk) wr = 0; check(link_reset == 20'h5, "link reset pulse");
    @(negedge clk) check(link_reset == 0, "link reset cleared");
    link_ok = 20'hABCDE;
    read(8'h07, d); check(d == 32'hABCDE, "link status");
    read(8'h08, d); check(d == {3'b0, 13'd123, 13'b0, 1'b1, 2'(FC_RUN)}, "fc status");
    // rate counters
    write(8'h09, 0);
    foreach (edges[i]) edges[i] = 0;
    prev = '0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk) mon = NM'($urandom) & NM'($urandom);
      for (int i = 0; i < NM; i++) if (mon[i] && !prev[i]) edges[i]++;
      prev = mon;
    end
    @(negedge clk) mon = '0;
    for (int i = 0; i < NM; i++) begin
      read(8'h40 + 8'(i), d);
      check(int'(d) == edges[i], $sformatf("rate %0d: %0d exp %0d", i, d, edges[i]));
    end
    write(8'h09, 0);
    read(8'h41, d); check(d == 0, "rate cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
