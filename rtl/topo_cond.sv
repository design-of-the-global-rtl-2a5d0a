// topo_cond - azimuthal geometry condition between two hit arrays.
//
// True when some bin i of array a is set and at least one bin of b in
// (i+LO) .. (i+HI), taken modulo N, is set. With a = b = the 36-bit track
// array (10 deg bins) the source defines
//   back-to-back           LO=16 HI=20
//   opening angle > 90 deg LO=9  HI=27
//   opening angle > 30 deg LO=3  HI=33
// and uses the same criteria between tracks and clusters. The same module
// with LO=-8 HI=8 (written as 28..44) gives the "same hemisphere" test.
// Purely combinational.
module topo_cond #(
  parameter int N  = 36,
  parameter int LO = 16,
  parameter int HI = 20
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic         hit
);

  always_comb begin
    hit = 1'b0;
    for (int i = 0; i < N; i++)
      for (int k = LO; k <= HI; k++)
        if (a[i] && b[(i + k) % N]) hit = 1'b1;
  end

endmodule
