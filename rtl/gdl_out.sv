// gdl_out - output stage towards the global decision logic (GDL).
//
// The GRL sends its trigger bits every system clock in a 168-bit word over
// a four-lane serial link, and sends latency-critical bits (track counting,
// matching) as parallel LVDS lines. This block delays the bit vector by a
// register-programmable number of system clocks (0..MAXDLY-1, used to
// align the bits with the other inputs of the GDL), registers it once, and
// presents it both as the parallel lines (lvds) and packed into the low
// bits of the 168-bit word (frame), the rest being zero. Word width and
// the two paths are the source's; the bit order and the delay line are
// this design's. Latency: delay+1 system clocks.
module gdl_out
  import grl_pkg::*;
#(
  parameter int W      = GDL_W,
  parameter int MAXDLY = 16
) (
  input  logic                      clk,
  input  logic                      rst,
  input  grl_bits_t                 bits,
  input  logic [$clog2(MAXDLY)-1:0] delay,
  output logic [W-1:0]              frame,
  output grl_bits_t                 lvds
);

  grl_bits_t dl [MAXDLY];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < MAXDLY; i++) dl[i] <= '0;
      lvds <= '0;
    end else begin
      dl[0] <= bits;
      for (int i = 1; i < MAXDLY; i++) dl[i] <= dl[i-1];
      lvds <= (delay == 0) ? bits : dl[delay - 1'b1];
    end
  end

  assign frame = W'(lvds);

endmodule
