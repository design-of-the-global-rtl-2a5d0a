// track_dedup - duplicate 2D-track flagging for track counting.
//
// Cross-talk in the drift-chamber front end makes the 2D trackers report
// several nearly identical fake tracks at once. Two tracks whose curvature
// parameters differ by less than DOMEGA and whose azimuths differ by less
// than DPHI units (8 units of 1.125 deg = 9 deg) are treated as the same
// track; these thresholds are the source's. This design compares all pairs
// of the N tracks of one data clock; track j is kept (uniq[j]=1) when it is
// valid and no valid track i<j lies inside both windows. The azimuth
// difference wraps around the 320-unit circle. With enable=0 every valid
// track is kept.
//
// Purely combinational; N*(N-1)/2 comparators.
module track_dedup
  import grl_pkg::*;
#(
  parameter int N      = grl_pkg::N_TRK,
  parameter int DOMEGA = 8,
  parameter int DPHI   = 8
) (
  input  trk_t         trk [N],
  input  logic         enable,
  output logic [N-1:0] uniq
);

  function automatic logic close(input trk_t a, input trk_t b);
    int dw, dp;
    dw = int'(a.omega) - int'(b.omega);
    if (dw < 0) dw = -dw;
    dp = int'(a.phi) - int'(b.phi);
    if (dp < 0) dp = -dp;
    if (dp > PHI_UNITS / 2) dp = PHI_UNITS - dp;
    return (dw < DOMEGA) && (dp < DPHI);
  endfunction

  always_comb begin
    for (int j = 0; j < N; j++) begin
      uniq[j] = trk[j].valid;
      if (enable)
        for (int i = 0; i < j; i++)
          if (trk[i].valid && close(trk[i], trk[j])) uniq[j] = 1'b0;
    end
  end

endmodule
