// phi_hit_array - bit array whose bits stay active for a set time.
//
// Used for the 36-bit track azimuth array (16 data clocks), the 5 x 64
// track-segment mesh of short tracking (16 data clocks) and the
// extrapolated-azimuth arrays for matching (programmable time). Every bit
// has a CW-bit down counter: set[i] reloads it with persist, each tick
// decrements it, and hit[i] is high while it is non-zero. A bit set in
// cycle t with persist=P is thus high from t+1 for P ticks (set wins over
// the tick in the same cycle). The per-bit counter is this design's way of
// realising the source's "remains active for 16 clock cycles".
module phi_hit_array #(
  parameter int N  = 36,
  parameter int CW = 10
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          tick,
  input  logic [N-1:0]  set,
  input  logic [CW-1:0] persist,
  output logic [N-1:0]  hit
);

  logic [CW-1:0] cnt [N];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (rst)                     cnt[i] <= '0;
      else if (set[i])             cnt[i] <= persist;
      else if (tick && cnt[i] != 0) cnt[i] <= cnt[i] - 1'b1;
    end
  end

  always_comb
    for (int i = 0; i < N; i++) hit[i] = (cnt[i] != '0);

endmodule
