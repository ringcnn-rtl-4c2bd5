// rconv1x1_engine: 1x1 ring-convolution engine.
//
// For each of the 8 positions of a 4x2 tile it computes, per output ring channel
// co and component i,
//   y[co*n+i] = sum_ci g[co][ci]_i * x[ci*n+i] + (b[co*n+i] <<< b_shift[i]),
// i.e. component-wise ring products accumulated over the 32/n input ring
// channels (8 x (32/n)^2 x n = 2,048 multipliers for n = 4).  The accumulated
// 24-bit result goes to the inference datapath, which adds residuals and applies
// the directional ReLU.  The multiplier count follows the published design;
// the register-based weights (word co holds byte j = weight of real input
// channel j), the bias alignment and the single pipeline stage are this
// design's choices.
//
// Timing: x sampled at edge k with in_valid; y_valid/y visible after edge k+1.
module rconv1x1_engine
  import ring_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           w_we,
  input  logic [3:0]     w_addr,
  input  logic [MW-1:0]  w_data,
  input  logic           b_we,
  input  logic [MW-1:0]  b_data,
  input  logic [NMAX-1:0][3:0] b_shift,
  input  logic           in_valid,
  input  feat_t          x [TILE_H][TILE_W][CH],
  output logic           y_valid,
  output acc_t           y [TILE_H][TILE_W][CH]
);
  localparam int unsigned RC = CH / N;

  feat_t wreg [RC][CH];
  feat_t breg [CH];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int co = 0; co < RC; co++)
        for (int j = 0; j < CH; j++) wreg[co][j] <= '0;
      for (int j = 0; j < CH; j++) breg[j] <= '0;
      y_valid <= 1'b0;
    end else begin
      if (w_we && (int'(w_addr) < RC))
        for (int j = 0; j < CH; j++) wreg[int'(w_addr)][j] <= feat_t'(w_data[j*FW +: FW]);
      if (b_we)
        for (int j = 0; j < CH; j++) breg[j] <= feat_t'(b_data[j*FW +: FW]);
      y_valid <= in_valid;
    end

  always_ff @(posedge clk)
    if (in_valid)
      for (int r = 0; r < TILE_H; r++)
        for (int c = 0; c < TILE_W; c++)
          for (int co = 0; co < RC; co++)
            for (int i = 0; i < N; i++) begin
              acc_t acc;
              acc = acc_t'(breg[co*N+i]) <<< b_shift[i];
              for (int ci = 0; ci < RC; ci++)
                acc += acc_t'(wreg[co][ci*N+i] * x[r][c][ci*N+i]);
              y[r][c][co*N+i] <= acc;
            end
endmodule
