// ring_conv_unit: 2D 3x3 ring convolution of one input ring channel with one
// ring filter, producing a 4x2 output tile of n-tuples in one cycle.
//
// For the ring R_I the ring product g . x is the component-wise product, so the
// unit is n independent 3x3 convolutions: 4 x 2 pixels x 9 taps x n components
// (288 multipliers for n = 4).  Following the ring convolution definition
// z[p,q] = sum_{s,t} g[s,t] . x[p-s, q-t] with taps centred on the output pixel,
// output pixel (r, c) of the tile uses window pixels (r+2-s, c+2-t), s,t = 0..2,
// where the 6x4 window carries a one-pixel halo around the tile.
// Purely combinational; the engine registers the 20-bit partial sums.
module ring_conv_unit #(
  parameter int unsigned N = 4
) (
  input  logic signed [7:0]  win [4][6][N],  // [row][col][component]
  input  logic signed [7:0]  g   [3][3][N],  // [s][t][component]
  output logic signed [19:0] z   [2][4][N]   // [row][col][component]
);
  always_comb
    for (int r = 0; r < 2; r++)
      for (int c = 0; c < 4; c++)
        for (int i = 0; i < N; i++) begin
          logic signed [19:0] acc;
          acc = '0;
          for (int s = 0; s < 3; s++)
            for (int t = 0; t < 3; t++)
              acc += 20'(g[s][t][i] * win[r+2-s][c+2-t][i]);
          z[r][c][i] = acc;
        end
endmodule
