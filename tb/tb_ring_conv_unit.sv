// tb_ring_conv_unit: random windows and weights for the 3x3 ring-convolution
// unit (n = 4 and n = 2), compared with the centred convolution sum
// z[r][c][i] = sum_{s,t} g[s][t][i] * win[r+2-s][c+2-t][i].
module tb_ring_conv_unit;
  int checks = 0, failures = 0;
  logic signed [7:0]  win4 [4][6][4], g4 [3][3][4];
  logic signed [19:0] z4 [2][4][4];
  logic signed [7:0]  win2 [4][6][2], g2 [3][3][2];
  logic signed [19:0] z2 [2][4][2];

  ring_conv_unit #(.N(4)) dut4 (.win(win4), .g(g4), .z(z4));
  ring_conv_unit #(.N(2)) dut2 (.win(win2), .g(g2), .z(z2));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      for (int r = 0; r < 4; r++) for (int c = 0; c < 6; c++) for (int i = 0; i < 4; i++) begin
        // every 10th vector uses extreme values
        win4[r][c][i] = (it % 10 == 0) ? -8'sd128 : 8'($urandom);
        if (i < 2) win2[r][c][i] = win4[r][c][i];
      end
      for (int s = 0; s < 3; s++) for (int t = 0; t < 3; t++) for (int i = 0; i < 4; i++) begin
        g4[s][t][i] = (it % 10 == 0) ? -8'sd128 : 8'($urandom);
        if (i < 2) g2[s][t][i] = g4[s][t][i];
      end
      #1;
      for (int r = 0; r < 2; r++) for (int c = 0; c < 4; c++) for (int i = 0; i < 4; i++) begin
        int e;
        e = 0;
        for (int s = 0; s < 3; s++) for (int t = 0; t < 3; t++)
          e += int'(g4[s][t][i]) * int'(win4[r+2-s][c+2-t][i]);
        checks++;
        if (int'(z4[r][c][i]) != e) begin
          failures++;
          if (failures < 10) $display("n4 z[%0d][%0d][%0d]=%0d exp %0d", r, c, i, z4[r][c][i], e);
        end
        if (i < 2) begin
          checks++;
          if (int'(z2[r][c][i]) != e) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
