// tb_eringcnn_top: end-to-end test of the accelerator at its default size
// (n = 4, all memories full size).  A random 24x8-pixel, 32-channel block is
// loaded into block buffer 0 and a three-layer program is run:
//   L0  OP_CONV3    BB0 -> BB1, directional ReLU in the datapath
//   L1  OP_CONV3_1  BB1 -> BB2, f_H in the 3x3 engine, 1x1 conv, residual taken
//                   from the input window (skip = source), directional ReLU
//   L2  OP_CONV3    BB2 -> BB0, residual read from BB1, no non-linearity
// All three output maps are read back and compared with a reference model
// built from the layer definitions.  The test also checks the tile rate (one
// 4x2 tile per cycle, one extra cycle per tile row) and counts that each
// mechanism happened: both layer types, both residual sources, ReLU and bypass,
// zero padding at the block border, output saturation and FIFO occupancy.
module tb_eringcnn_top;
  import ring_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 4, RC = CH / N;
  localparam int TW = 6, TH = 4, W = 4 * TW, H = 2 * TH;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              start = 0, busy, done;
  logic              mem_we = 0;
  logic [1:0]        mem_sel = 0;
  logic [WM_AW-1:0]  mem_addr = '0;
  logic [MW-1:0]     mem_wdata = '0;
  logic              host_bb_en = 0, host_bb_we = 0, host_bb_rvalid;
  logic [1:0]        host_bb_sel = 0;
  logic [6:0]        host_bb_row = 0;
  logic [4:0]        host_bb_seg = 0;
  logic [SEG_W-1:0]  host_bb_wdata = '0, host_bb_rdata;

  eringcnn_top dut (.clk, .rst_n, .start, .busy, .done, .mem_we, .mem_sel, .mem_addr, .mem_wdata,
    .host_bb_en, .host_bb_we, .host_bb_sel, .host_bb_row, .host_bb_seg, .host_bb_wdata,
    .host_bb_rvalid, .host_bb_rdata);

  // reference state
  int     fm   [3][H][W][CH];     // block buffer contents
  int     wmem [256][CH];         // weight words used (bytes, signed)
  int     bmem [8][CH];
  instr_t prog [4];
  int     n_sat = 0, n_pad = 0, n_mid = 0;

  function automatic int pix(input int b, input int y, input int x, input int j);
    if (y < 0 || y >= H || x < 0 || x >= W) return 0;
    return fm[b][y][x][j];
  endfunction

  task automatic ref_layer(input instr_t L);
    int out [H][W][CH];
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      longint a3 [CH], a1 [CH], ys [CH];
      int x3 [CH];
      if (y == 0 || x == 0 || y == H - 1 || x == W - 1) n_pad++;
      for (int jo = 0; jo < CH; jo++) begin
        int co, i;
        co = jo / N; i = jo % N;
        a3[jo] = longint'(bmem[L.b_base][jo]) <<< L.b3_shift[i];
        for (int ci = 0; ci < RC; ci++)
          for (int s = 0; s < 3; s++) for (int t = 0; t < 3; t++)
            a3[jo] += longint'(wmem[L.w3_base + co*9 + s*3 + t][ci*N + i]) * pix(L.src_bb, y + 1 - s, x + 1 - t, ci*N + i);
      end
      if (L.op == OP_CONV3_1) begin
        for (int co = 0; co < RC; co++) begin
          longint yv[4]; int sa[4], ta[4], xo[4]; bit sat;
          for (int i = 0; i < N; i++) begin yv[i] = a3[co*N+i]; sa[i] = L.q3.s[i]; ta[i] = L.q3.t[i]; end
          dir_relu_ref(N, yv, sa, ta, L.relu3_en, xo, sat);
          for (int i = 0; i < N; i++) x3[co*N+i] = xo[i];
        end
        for (int jo = 0; jo < CH; jo++) begin
          int co, i;
          co = jo / N; i = jo % N;
          a1[jo] = longint'(bmem[L.b_base + 1][jo]) <<< L.b1_shift[i];
          for (int ci = 0; ci < RC; ci++)
            a1[jo] += longint'(wmem[L.w1_base + co][ci*N + i]) * x3[ci*N + i];
        end
      end
      for (int jo = 0; jo < CH; jo++) begin
        ys[jo] = (L.op == OP_CONV3_1) ? a1[jo] : a3[jo];
        if (L.res_en) ys[jo] += longint'(fm[L.skip_bb][y][x][jo]) <<< L.k_shift[jo % N];
      end
      for (int co = 0; co < RC; co++) begin
        longint yv[4]; int sa[4], ta[4], xo[4]; bit sat;
        for (int i = 0; i < N; i++) begin yv[i] = ys[co*N+i]; sa[i] = L.qd.s[i]; ta[i] = L.qd.t[i]; end
        dir_relu_ref(N, yv, sa, ta, L.relu_en, xo, sat);
        if (sat) n_sat++;
        for (int i = 0; i < N; i++) begin
          out[y][x][co*N+i] = xo[i];
          if (xo[i] > -128 && xo[i] < 127 && xo[i] != 0) n_mid++;
        end
      end
    end
    fm[L.dst_bb] = out;
  endtask

  // -------------------------------------------------------------- monitors
  int n_conv3 = 0, n_conv31 = 0, n_res_win = 0, n_res_bb = 0, n_relu = 0, n_bypass = 0;
  int fifo_max = 0, layer = 0;
  int win_first [4], win_last [4], win_cnt [4];

  always @(posedge clk) if (rst_n && busy) begin
    if (dut.u_dp.f_count > 8'(fifo_max)) fifo_max = int'(dut.u_dp.f_count);
    if (dut.win_valid) begin
      if (win_cnt[layer] == 0) win_first[layer] = $time;
      win_last[layer] = $time;
      win_cnt[layer]++;
    end
    if (dut.run_start) begin
      case (dut.instr.op)
        OP_CONV3:   n_conv3++;
        OP_CONV3_1: n_conv31++;
        default: ;
      endcase
      if (dut.instr.res_en && dut.instr.skip_bb == dut.instr.src_bb) n_res_win++;
      if (dut.instr.res_en && dut.instr.skip_bb != dut.instr.src_bb) n_res_bb++;
      if (dut.instr.relu_en) n_relu++; else n_bypass++;
    end
    if (dut.run_done) layer++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mem_write(input int sel, input int addr, input logic [MW-1:0] data);
    mem_we = 1; mem_sel = 2'(sel); mem_addr = WM_AW'(addr); mem_wdata = data;
    @(negedge clk);
    mem_we = 0;
  endtask

  function automatic logic [MW-1:0] pack_bytes(input int v [CH]);
    logic [MW-1:0] w;
    for (int j = 0; j < CH; j++) w[j*8 +: 8] = 8'(v[j]);
    return w;
  endfunction

  initial begin
    win_cnt = '{0, 0, 0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- program
    for (int l = 0; l < 4; l++) begin
      prog[l] = '0;
      prog[l].tiles_w = 6'(TW);
      prog[l].tiles_h = 7'(TH);
      for (int i = 0; i < NMAX; i++) begin
        prog[l].b3_shift[i] = 4'(6 + $urandom % 4);
        prog[l].b1_shift[i] = 4'(4 + $urandom % 4);
        prog[l].k_shift[i]  = 4'(4 + $urandom % 6);
        prog[l].q3.s[i] = 3'($urandom % 3);
        prog[l].q3.t[i] = 5'(14 + $urandom % 3);
        prog[l].qd.s[i] = 3'($urandom % 3);
        prog[l].qd.t[i] = 5'(13 + $urandom % 4);
      end
    end
    prog[0].op = OP_CONV3;   prog[0].src_bb = 0; prog[0].dst_bb = 1; prog[0].relu_en = 1;
    prog[0].w3_base = 15'd0;  prog[0].b_base = 9'd0;
    prog[1].op = OP_CONV3_1; prog[1].src_bb = 1; prog[1].dst_bb = 2; prog[1].skip_bb = 1;
    prog[1].res_en = 1; prog[1].relu_en = 1; prog[1].relu3_en = 1;
    prog[1].w3_base = 15'd72; prog[1].w1_base = 15'd144; prog[1].b_base = 9'd2;
    prog[1].qd.t = prog[1].q3.t;
    prog[2].op = OP_CONV3;   prog[2].src_bb = 2; prog[2].dst_bb = 0; prog[2].skip_bb = 1;
    prog[2].res_en = 1; prog[2].relu_en = 0;
    prog[2].w3_base = 15'd160; prog[2].b_base = 9'd4;
    for (int i = 0; i < NMAX; i++) prog[2].qd.t[i] = 5'(10 + $urandom % 3);
    prog[3].op = OP_END;
    for (int l = 0; l < 4; l++) mem_write(0, l, MW'(prog[l]));

    // ---- weights (words 0..239) and biases (words 0..5)
    for (int a = 0; a < 240; a++) begin
      for (int j = 0; j < CH; j++) wmem[a][j] = int'($signed(8'($urandom)));
      mem_write(1, a, pack_bytes(wmem[a]));
    end
    for (int a = 0; a < 6; a++) begin
      for (int j = 0; j < CH; j++) bmem[a][j] = int'($signed(8'($urandom)));
      mem_write(2, a, pack_bytes(bmem[a]));
    end

    // ---- input block into BB0
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int j = 0; j < CH; j++)
      fm[0][y][x][j] = int'($signed(8'($urandom)));
    for (int y = 0; y < H; y++) for (int sg = 0; sg < TW; sg++) begin
      host_bb_en = 1; host_bb_we = 1; host_bb_sel = 0; host_bb_row = 7'(y); host_bb_seg = 5'(sg);
      for (int p = 0; p < 4; p++) for (int j = 0; j < CH; j++)
        host_bb_wdata[p*256 + j*8 +: 8] = 8'(fm[0][y][4*sg + p][j]);
      @(negedge clk);
    end
    host_bb_en = 0; host_bb_we = 0;

    // ---- reference
    for (int l = 0; l < 3; l++) ref_layer(prog[l]);

    // ---- run
    start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);

    // ---- read back all three buffers
    for (int b = 0; b < 3; b++)
      for (int y = 0; y < H; y++) for (int sg = 0; sg < TW; sg++) begin
        host_bb_en = 1; host_bb_we = 0; host_bb_sel = 2'(b); host_bb_row = 7'(y); host_bb_seg = 5'(sg);
        @(negedge clk);
        host_bb_en = 0;
        checks++;
        if (!host_bb_rvalid) failures++;
        for (int p = 0; p < 4; p++) for (int j = 0; j < CH; j++) begin
          checks++;
          if (int'($signed(host_bb_rdata[p*256 + j*8 +: 8])) != fm[b][y][4*sg + p][j]) begin
            failures++;
            if (failures < 12)
              $display("BB%0d (%0d,%0d) ch %0d = %0d exp %0d", b, y, 4*sg + p, j,
                       $signed(host_bb_rdata[p*256 + j*8 +: 8]), fm[b][y][4*sg + p][j]);
          end
        end
      end

    // ---- rate: one tile per cycle, one extra cycle per tile row
    for (int l = 0; l < 3; l++) begin
      checks += 2;
      if (win_cnt[l] != TW * TH) begin failures++; $display("layer %0d: %0d tiles", l, win_cnt[l]); end
      if ((win_last[l] - win_first[l]) / 10 + 1 != TH * (TW + 1) - 1) begin
        failures++;
        $display("layer %0d: tile span %0d cycles, expected %0d", l, (win_last[l] - win_first[l]) / 10 + 1, TH * (TW + 1) - 1);
      end
    end

    // ---- mechanisms
    $display("conv3=%0d conv3_1=%0d res_window=%0d res_bb=%0d relu=%0d bypass=%0d pad_px=%0d sat_tuples=%0d mid_values=%0d fifo_max=%0d",
             n_conv3, n_conv31, n_res_win, n_res_bb, n_relu, n_bypass, n_pad, n_sat, n_mid, fifo_max);
    checks++;
    if (n_conv3 == 0 || n_conv31 == 0 || n_res_win == 0 || n_res_bb == 0 || n_relu == 0 ||
        n_bypass == 0 || n_pad == 0 || n_sat == 0 || fifo_max == 0 || n_mid < 1000) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
