// tb_rconv3x3_engine: loads random weights and biases into the RCONV-3x3 engine
// (n = 4, 32 channels), streams random 6x4 tiles back to back with gaps, and
// checks y two cycles and x four cycles after each tile against a reference
// (ring convolution sum over input ring channels + aligned bias, then the
// directional ReLU of tb_ref_pkg).
module tb_rconv3x3_engine;
  import ring_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 4, RC = CH / N, NT = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          w_we = 0, b_we = 0, in_valid = 0;
  logic [7:0]    w_addr = 0;
  logic [MW-1:0] w_data = '0, b_data = '0;
  eng_cfg_t      cfg;
  feat_t         win [WIN_H][WIN_W][CH];
  logic          y_valid, x_valid;
  acc_t          y [TILE_H][TILE_W][CH];
  feat_t         x [TILE_H][TILE_W][CH];

  rconv3x3_engine #(.N(N)) dut (.clk, .rst_n, .w_we, .w_addr, .w_data, .b_we, .b_data, .cfg,
    .in_valid, .win, .y_valid, .y, .x_valid, .x);

  int    wt [RC][9][CH];
  int    bs [CH];
  longint ey [NT][TILE_H][TILE_W][CH];
  int    ex [NT][TILE_H][TILE_W][CH];
  bit    tv [NT + 8];   // valid pattern per driven cycle
  int    nsat = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    cfg.relu_en = 1'b1;
    for (int i = 0; i < N; i++) begin
      cfg.b_shift[i] = 4'($urandom % 10);
      cfg.q.s[i]     = 3'($urandom % 6);
      cfg.q.t[i]     = 5'(13 + $urandom % 5);
    end
    for (int r = 0; r < WIN_H; r++) for (int c = 0; c < WIN_W; c++) for (int j = 0; j < CH; j++) win[r][c][j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // weight and bias load
    for (int a = 0; a < RC * 9; a++) begin
      w_we = 1; w_addr = 8'(a);
      for (int j = 0; j < CH; j++) begin
        wt[a/9][a%9][j] = int'($signed(8'($urandom)));
        w_data[j*8 +: 8] = 8'(wt[a/9][a%9][j]);
      end
      @(negedge clk);
    end
    w_we = 0;
    b_we = 1;
    for (int j = 0; j < CH; j++) begin
      bs[j] = int'($signed(8'($urandom)));
      b_data[j*8 +: 8] = 8'(bs[j]);
    end
    @(negedge clk);
    b_we = 0;
    // stream tiles; tile k is driven at stream cycle k if tv[k]
    begin
      int k, cycle, yk, xk;
      int yq [$], xq [$];
      k = 0; cycle = 0; yk = 0; xk = 0;
      while (xk < NT) begin
        if (k < NT && ($urandom % 4 != 0)) begin
          in_valid = 1;
          for (int r = 0; r < WIN_H; r++) for (int c = 0; c < WIN_W; c++) for (int j = 0; j < CH; j++)
            win[r][c][j] = feat_t'($urandom);
          // reference
          for (int r = 0; r < TILE_H; r++) for (int c = 0; c < TILE_W; c++) begin
            for (int co = 0; co < RC; co++) begin
              longint yv[4]; int sa[4], ta[4], xo[4]; bit sat;
              for (int i = 0; i < N; i++) begin
                longint acc;
                acc = longint'(bs[co*N+i]) <<< cfg.b_shift[i];
                for (int ci = 0; ci < RC; ci++)
                  for (int s = 0; s < 3; s++) for (int t = 0; t < 3; t++)
                    acc += longint'(wt[co][s*3+t][ci*N+i]) * longint'(win[r+2-s][c+2-t][ci*N+i]);
                ey[k][r][c][co*N+i] = acc;
                yv[i] = acc; sa[i] = int'(cfg.q.s[i]); ta[i] = int'(cfg.q.t[i]);
              end
              dir_relu_ref(N, yv, sa, ta, 1'b1, xo, sat);
              if (sat) nsat++;
              for (int i = 0; i < N; i++) ex[k][r][c][co*N+i] = xo[i];
            end
          end
          yq.push_back(cycle + 2);
          xq.push_back(cycle + 4);
          k++;
        end else in_valid = 0;
        @(negedge clk);
        cycle++;
        // checks: y due at cycle yq[0], x at xq[0]
        checks++;
        if (y_valid !== (yq.size() > 0 && yq[0] == cycle)) begin
          failures++; $display("y_valid timing wrong at cycle %0d", cycle);
        end
        if (yq.size() > 0 && yq[0] == cycle) begin
          void'(yq.pop_front());
          for (int r = 0; r < TILE_H; r++) for (int c = 0; c < TILE_W; c++) for (int j = 0; j < CH; j++) begin
            checks++;
            if (longint'(y[r][c][j]) != ey[yk][r][c][j]) begin
              failures++;
              if (failures < 10) $display("y[%0d][%0d][%0d] tile %0d = %0d exp %0d", r, c, j, yk, y[r][c][j], ey[yk][r][c][j]);
            end
          end
          yk++;
        end
        checks++;
        if (x_valid !== (xq.size() > 0 && xq[0] == cycle)) begin
          failures++; $display("x_valid timing wrong at cycle %0d", cycle);
        end
        if (xq.size() > 0 && xq[0] == cycle) begin
          void'(xq.pop_front());
          for (int r = 0; r < TILE_H; r++) for (int c = 0; c < TILE_W; c++) for (int j = 0; j < CH; j++) begin
            checks++;
            if (int'(x[r][c][j]) != ex[xk][r][c][j]) begin
              failures++;
              if (failures < 10) $display("x[%0d][%0d][%0d] tile %0d = %0d exp %0d", r, c, j, xk, x[r][c][j], ex[xk][r][c][j]);
            end
          end
          xk++;
        end
        if (cycle > 10 * NT) break;
      end
    end
    $display("saturated outputs: %0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
