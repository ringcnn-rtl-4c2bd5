// tb_rconv1x1_engine: loads random 1x1 ring weights and biases (n = 4) and
// checks every output one cycle after its input tile against the component-wise
// ring product sum plus aligned bias; a second instance checks n = 2.
module tb_rconv1x1_engine;
  import ring_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          w_we = 0, b_we = 0, in_valid = 0;
  logic [3:0]    w_addr = 0;
  logic [MW-1:0] w_data = '0, b_data = '0;
  logic [NMAX-1:0][3:0] b_shift;
  feat_t         x [TILE_H][TILE_W][CH];
  logic          yv4, yv2;
  acc_t          y4 [TILE_H][TILE_W][CH];
  acc_t          y2 [TILE_H][TILE_W][CH];

  rconv1x1_engine #(.N(4)) dut4 (.clk, .rst_n, .w_we, .w_addr, .w_data, .b_we, .b_data, .b_shift,
    .in_valid, .x, .y_valid(yv4), .y(y4));
  rconv1x1_engine #(.N(2)) dut2 (.clk, .rst_n, .w_we, .w_addr, .w_data, .b_we, .b_data, .b_shift,
    .in_valid, .x, .y_valid(yv2), .y(y2));

  int wt [16][CH];
  int bs [CH];
  longint e4 [TILE_H][TILE_W][CH], e2 [TILE_H][TILE_W][CH];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NMAX; i++) b_shift[i] = 4'($urandom % 12);
    for (int r = 0; r < TILE_H; r++) for (int c = 0; c < TILE_W; c++) for (int j = 0; j < CH; j++) x[r][c][j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int a = 0; a < 16; a++) begin
      w_we = 1; w_addr = 4'(a);
      for (int j = 0; j < CH; j++) begin
        wt[a][j] = int'($signed(8'($urandom)));
        w_data[j*8 +: 8] = 8'(wt[a][j]);
      end
      @(negedge clk);
    end
    w_we = 0; b_we = 1;
    for (int j = 0; j < CH; j++) begin
      bs[j] = int'($signed(8'($urandom)));
      b_data[j*8 +: 8] = 8'(bs[j]);
    end
    @(negedge clk);
    b_we = 0;
    for (int it = 0; it < 40; it++) begin
      in_valid = 1;
      for (int r = 0; r < TILE_H; r++) for (int c = 0; c < TILE_W; c++) for (int j = 0; j < CH; j++)
        x[r][c][j] = (it == 0) ? -8'sd128 : feat_t'($urandom);
      for (int r = 0; r < TILE_H; r++) for (int c = 0; c < TILE_W; c++) for (int j = 0; j < CH; j++) begin
        e4[r][c][j] = longint'(bs[j]) <<< b_shift[j % 4];
        for (int ci = 0; ci < CH / 4; ci++)
          e4[r][c][j] += longint'(wt[j / 4][ci*4 + j%4]) * longint'(x[r][c][ci*4 + j%4]);
        e2[r][c][j] = longint'(bs[j]) <<< b_shift[j % 2];
        for (int ci = 0; ci < CH / 2; ci++)
          e2[r][c][j] += longint'(wt[j / 2][ci*2 + j%2]) * longint'(x[r][c][ci*2 + j%2]);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!yv4 || !yv2) begin failures++; $display("latency: y_valid not one cycle after input"); end
      for (int r = 0; r < TILE_H; r++) for (int c = 0; c < TILE_W; c++) for (int j = 0; j < CH; j++) begin
        checks += 2;
        if (longint'(y4[r][c][j]) != e4[r][c][j]) begin
          failures++;
          if (failures < 10) $display("n4 y[%0d][%0d][%0d]=%0d exp %0d", r, c, j, y4[r][c][j], e4[r][c][j]);
        end
        if (longint'(y2[r][c][j]) != e2[r][c][j]) begin
          failures++;
          if (failures < 10) $display("n2 y[%0d][%0d][%0d]=%0d exp %0d", r, c, j, y2[r][c][j], e2[r][c][j]);
        end
      end
      if (it % 3 == 0) begin
        @(negedge clk);
        checks++;
        if (yv4) begin failures++; $display("y_valid without input"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
