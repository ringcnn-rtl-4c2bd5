// rconv3x3_engine: 3x3 ring-convolution engine with on-the-fly directional ReLU.
//
// A channel-wise array of (32/n) x (32/n) ring_conv_unit computing units, one per
// (output ring channel co, input ring channel ci) pair.  Every cycle it takes a
// 6x4 input tile of 32 real channels and produces the 4x2 output tile:
//   y[co] = sum_ci g[co][ci] (*) x[ci] + (b[co] <<< b_shift)     (24-bit, "y")
//   x'[co] = Q(f_H(y[co]))                                          (8-bit, "x")
// y goes to the inference datapath, x' to the 1x1 engine.  One dir_relu per
// output n-tuple position (8 positions x 32/n channels) applies f_H with
// component-wise Q-formats.  With n = 4: 64 units x 288 = 18,432 multipliers.
//
// Weights live in registers loaded before a layer: word w_addr = co*9 + s*3 + t
// holds, in byte j, the weight of real input channel j (component j mod n of
// ring channel j div n).  The bias word holds byte j for real output channel j.
// The array, the per-output-channel bias adders, the directional ReLU per output
// channel and the 24-bit accumulators follow the published engine; the weight
// loading scheme, bias alignment shift and pipeline depth are this design's own.
//
// Timing: win sampled at edge k (in_valid); D registers at k, y at k+1 ->
// y_valid/y visible after edge k+2; x_valid/x after edge k+4.
// cfg must stay constant while tiles are in flight.
module rconv3x3_engine
  import ring_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           w_we,
  input  logic [7:0]     w_addr,
  input  logic [MW-1:0]  w_data,
  input  logic           b_we,
  input  logic [MW-1:0]  b_data,
  input  eng_cfg_t       cfg,
  input  logic           in_valid,
  input  feat_t          win [WIN_H][WIN_W][CH],
  output logic           y_valid,
  output acc_t           y   [TILE_H][TILE_W][CH],
  output logic           x_valid,
  output feat_t          x   [TILE_H][TILE_W][CH]
);
  localparam int unsigned RC = CH / N;

  feat_t wreg [RC][9][CH];
  feat_t breg [CH];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int co = 0; co < RC; co++)
        for (int k = 0; k < 9; k++)
          for (int j = 0; j < CH; j++) wreg[co][k][j] <= '0;
      for (int j = 0; j < CH; j++) breg[j] <= '0;
    end else begin
      if (w_we && (int'(w_addr) < RC * 9))
        for (int j = 0; j < CH; j++)
          wreg[int'(w_addr) / 9][int'(w_addr) % 9][j] <= feat_t'(w_data[j*FW +: FW]);
      if (b_we)
        for (int j = 0; j < CH; j++) breg[j] <= feat_t'(b_data[j*FW +: FW]);
    end

  // ---- computing units and D registers ------------------------------------
  logic signed [19:0] zq [RC][RC][TILE_H][TILE_W][N];
  logic               v1;

  for (genvar co = 0; co < RC; co++) begin : g_co
    for (genvar ci = 0; ci < RC; ci++) begin : g_ci
      logic signed [7:0]  uwin [4][6][N];
      logic signed [7:0]  ug   [3][3][N];
      logic signed [19:0] uz   [2][4][N];
      always_comb
        for (int i = 0; i < N; i++) begin
          for (int r = 0; r < WIN_H; r++)
            for (int c = 0; c < WIN_W; c++) uwin[r][c][i] = win[r][c][ci*N+i];
          for (int s = 0; s < 3; s++)
            for (int t = 0; t < 3; t++) ug[s][t][i] = wreg[co][s*3+t][ci*N+i];
        end
      ring_conv_unit #(.N(N)) u_unit (.win(uwin), .g(ug), .z(uz));
      always_ff @(posedge clk)
        if (in_valid) zq[co][ci] <= uz;
    end
  end

  // ---- accumulation over input channels plus bias -------------------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      v1      <= 1'b0;
      y_valid <= 1'b0;
    end else begin
      v1      <= in_valid;
      y_valid <= v1;
    end

  always_ff @(posedge clk)
    if (v1)
      for (int r = 0; r < TILE_H; r++)
        for (int c = 0; c < TILE_W; c++)
          for (int co = 0; co < RC; co++)
            for (int i = 0; i < N; i++) begin
              acc_t acc;
              acc = acc_t'(breg[co*N+i]) <<< cfg.b_shift[i];
              for (int ci = 0; ci < RC; ci++) acc += acc_t'(zq[co][ci][r][c][i]);
              y[r][c][co*N+i] <= acc;
            end

  // ---- on-the-fly directional ReLU + 8-bit quantization ---------------------
  logic [2:0] sv [N];
  logic [4:0] tv [N];
  always_comb
    for (int i = 0; i < N; i++) begin
      sv[i] = cfg.q.s[i];
      tv[i] = cfg.q.t[i];
    end

  logic xv [TILE_H][TILE_W][RC];
  for (genvar r = 0; r < TILE_H; r++) begin : g_r
    for (genvar c = 0; c < TILE_W; c++) begin : g_c
      for (genvar co = 0; co < RC; co++) begin : g_o
        acc_t              yt [N];
        logic signed [7:0] xt [N];
        always_comb
          for (int i = 0; i < N; i++) yt[i] = y[r][c][co*N+i];
        dir_relu #(.N(N), .YW(YW)) u_relu (
          .clk, .rst_n, .in_valid(y_valid), .relu_en(cfg.relu_en),
          .y(yt), .s(sv), .t(tv), .out_valid(xv[r][c][co]), .x(xt));
        always_comb
          for (int i = 0; i < N; i++) x[r][c][co*N+i] = xt[i];
      end
    end
  end
  assign x_valid = xv[0][0][0];
endmodule
