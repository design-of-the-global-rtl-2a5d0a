// grl_regs - slow-control and monitoring registers.
//
// On the board the registers are reached through a VME interface whose
// protocol is not part of this design; here they sit behind a plain
// synchronous bus: a write (wr) takes addr/wdata in one clock, a read (rd)
// returns rdata on the next clock. The contents follow the uses the source
// lists (input-bit rates, link health, resetting links, adjusting signal
// timing, configuring algorithms); the map and reset values are this
// design's:
//   0x00 RO  identifier 0x47524C01
//   0x01 RW  bit 0: duplicate-track removal enable (reset 1)
//   0x02 RW  phi_ex persistence, ECL matching, system clocks (reset 200)
//   0x03 RW  phi_ex persistence, TOP matching (reset 200)
//   0x04 RW  phi_ex persistence, KLM matching (reset 200)
//   0x05 RW  extra delay of the GDL output, system clocks (reset 0)
//   0x06 WO  link reset: link_reset = wdata for one clock
//   0x07 RO  link status (link_ok)
//   0x08 RO  [1:0] flow-control state, [2] all upstream ready,
//            [28:16] data-clock time stamp
//   0x09 WO  clear all rate counters
//   0x40+i RO rate counter i: rising edges of mon[i] since the last clear
module grl_regs
  import grl_pkg::*;
#(
  parameter int N_MON  = 18,
  parameter int N_LK   = grl_pkg::N_LINK,
  parameter int DLYW   = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [7:0]       addr,
  input  logic             wr,
  input  logic [31:0]      wdata,
  input  logic             rd,
  output logic [31:0]      rdata,
  input  logic [N_LK-1:0]  link_ok,
  input  fc_state_t        fc_state,
  input  logic             all_ready,
  input  logic [12:0]      timestamp,
  input  logic [N_MON-1:0] mon,
  output logic             dup_en,
  output logic [PW-1:0]    persist_ecl,
  output logic [PW-1:0]    persist_top,
  output logic [PW-1:0]    persist_klm,
  output logic [DLYW-1:0]  gdl_delay,
  output logic [N_LK-1:0]  link_reset
);

  localparam logic [31:0] ID = 32'h4752_4C01;
  localparam int          IW = $clog2(N_MON);

  logic [31:0]      rate [N_MON];
  logic [N_MON-1:0] mon_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      dup_en      <= 1'b1;
      persist_ecl <= PW'(200);
      persist_top <= PW'(200);
      persist_klm <= PW'(200);
      gdl_delay   <= '0;
      link_reset  <= '0;
    end else begin
      link_reset <= '0;
      if (wr) begin
        unique case (addr)
          8'h01: dup_en      <= wdata[0];
          8'h02: persist_ecl <= wdata[PW-1:0];
          8'h03: persist_top <= wdata[PW-1:0];
          8'h04: persist_klm <= wdata[PW-1:0];
          8'h05: gdl_delay   <= wdata[DLYW-1:0];
          8'h06: link_reset  <= wdata[N_LK-1:0];
          default: ;
        endcase
      end
    end
  end

  // rate counters
  always_ff @(posedge clk) begin
    if (rst) begin
      mon_q <= '0;
      for (int i = 0; i < N_MON; i++) rate[i] <= '0;
    end else begin
      mon_q <= mon;
      for (int i = 0; i < N_MON; i++)
        if (wr && addr == 8'h09) rate[i] <= '0;
        else if (mon[i] && !mon_q[i] && rate[i] != '1) rate[i] <= rate[i] + 32'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) rdata <= '0;
    else if (rd) begin
      rdata <= '0;
      if (addr >= 8'h40 && int'(addr) < 64 + N_MON) rdata <= rate[IW'(addr - 8'h40)];
      else
        unique case (addr)
          8'h00: rdata <= ID;
          8'h01: rdata <= 32'(dup_en);
          8'h02: rdata <= 32'(persist_ecl);
          8'h03: rdata <= 32'(persist_top);
          8'h04: rdata <= 32'(persist_klm);
          8'h05: rdata <= 32'(gdl_delay);
          8'h07: rdata <= 32'(link_ok);
          8'h08: rdata <= {3'b0, timestamp, 13'b0, all_ready, fc_state};
          default: rdata <= '0;
        endcase
    end
  end

endmodule
