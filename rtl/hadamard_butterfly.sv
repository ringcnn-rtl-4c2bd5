// hadamard_butterfly: unnormalised n-point Hadamard transform (Sylvester order).
//
// out = H_n * in, with H_2 = [1 1; 1 -1] and H_4 = H_2 (x) H_2, the matrices of
// the published ring tables.  It is built from log2(n) butterfly stages of
// adders and subtractors, so every stage widens the data by one bit and the
// output is exact (OW = IW + log2 n).  Purely combinational.
module hadamard_butterfly #(
  parameter int unsigned N  = 4,
  parameter int unsigned IW = 29,
  parameter int unsigned OW = IW + $clog2(N)
) (
  input  logic signed [IW-1:0] din  [N],
  output logic signed [OW-1:0] dout [N]
);
  localparam int unsigned LG = $clog2(N);

  logic signed [OW-1:0] st [LG+1][N];

  always_comb begin
    for (int i = 0; i < N; i++) st[0][i] = OW'(din[i]);
    for (int l = 0; l < LG; l++) begin
      for (int i = 0; i < N; i++) begin
        // pair (i, i ^ 2^l): lower index gets the sum, upper the difference
        if ((i & (1 << l)) == 0) st[l+1][i] = st[l][i] + st[l][i | (1 << l)];
        else                     st[l+1][i] = st[l][i & ~(1 << l)] - st[l][i];
      end
    end
    for (int i = 0; i < N; i++) dout[i] = st[LG][i];
  end
endmodule
