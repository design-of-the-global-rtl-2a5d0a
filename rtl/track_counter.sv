// track_counter - number of tracks per collision event.
//
// All tracks of one event reach the GRL within about 500 ns, the drift
// time of the chamber. Each data clock (en) the number of new tracks is
// shifted into a DEPTH-deep register (16 x 31.4 ns ~ 500 ns) and the sum
// over the register gives the tracks seen in the last 500 ns. When that
// sum falls, the value it had just before is the maximum, i.e. the track
// count of the event. Shift register depth, running sum and falling-edge
// rule are the source's.
//
// In the source's timing diagram only the first decrease after a rise
// produces a count (4 for the sequence 0,1,3,4,3,1,0); this design
// therefore arms the detector when the sum rises and disarms it when it
// reports. sum is registered with the shift register (one data clock after
// n_new); fall and n_event are decoded from registers and are high for
// one system clock, the cycle after the en edge that lowered the sum.
// The 16-deep register, the running sum and the falling-edge rule are the
// source's; the arming rule and the exact cycle are read from its diagram.
module track_counter #(
  parameter int DEPTH = 16,
  parameter int NW    = 5,
  localparam int SW   = NW + $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en,
  input  logic [NW-1:0] n_new,
  output logic [SW-1:0] sum,
  output logic          fall,
  output logic [SW-1:0] n_event
);

  logic [NW-1:0] sr [DEPTH];
  logic [SW-1:0] sum_prev;
  logic          armed;
  logic          upd;      // sum changed in the last data clock

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) sr[i] <= '0;
      sum      <= '0;
      sum_prev <= '0;
      armed    <= 1'b0;
      upd      <= 1'b0;
    end else begin
      upd <= en;
      if (en) begin
        sr[0] <= n_new;
        for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
        // new sum = old sum + entering - leaving
        sum      <= sum + SW'(n_new) - SW'(sr[DEPTH-1]);
        sum_prev <= sum;
      end
      if (upd) begin
        if (sum > sum_prev)     armed <= 1'b1;
        else if (sum < sum_prev) armed <= 1'b0;
      end
    end
  end

  assign fall    = upd && armed && (sum < sum_prev);
  assign n_event = fall ? sum_prev : '0;

endmodule
