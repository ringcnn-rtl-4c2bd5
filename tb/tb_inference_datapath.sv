// tb_inference_datapath: the datapath with a block buffer bank and behavioural
// engine stubs.  The 3x3 stub returns, two cycles after each window,
//   y3 = 5*centre + upper-left - 2*lower-right  (per channel, 6x4 window),
// and the 1x1 stub returns y3 + 7 three cycles later, so any error in window
// forming, halo, zero padding, tile order, residual source or write-back shows
// up in the output block.  Three layers are run (OP_CONV3 with ReLU, OP_CONV3_1
// with a residual read from another buffer and no ReLU, OP_CONV3 with the
// residual taken from the window) and compared with a reference model; the
// tile rate and run_done are checked as well.
module tb_inference_datapath;
  import ring_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 4, RC = CH / N;
  localparam int TW = 5, TH = 3, W = 4 * TW, H = 2 * TH;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              run_start = 0, run_done, running;
  instr_t            cfg;
  logic              win_valid, y3_valid, y1_valid;
  feat_t             win [WIN_H][WIN_W][CH];
  acc_t              y3  [TILE_H][TILE_W][CH];
  acc_t              y1  [TILE_H][TILE_W][CH];
  logic              bb_en    [NBB][NSUB];
  logic              bb_we    [NBB][NSUB];
  logic [SUB_AW-1:0] bb_addr  [NBB][NSUB];
  logic [SEG_W-1:0]  bb_wdata [NBB][NSUB];
  logic [SEG_W-1:0]  bb_rdata [NBB][NSUB];
  logic              host_en = 0, host_we = 0, host_rvalid;
  logic [1:0]        host_bb = 0;
  logic [6:0]        host_row = 0;
  logic [4:0]        host_seg = 0;
  logic [SEG_W-1:0]  host_wdata = '0, host_rdata;

  inference_datapath #(.N(N)) dut (.clk, .rst_n, .run_start, .cfg, .run_done, .running,
    .win_valid, .win, .y3_valid, .y3, .y1_valid, .y1,
    .bb_en, .bb_we, .bb_addr, .bb_wdata, .bb_rdata,
    .host_en, .host_we, .host_bb, .host_row, .host_seg, .host_wdata, .host_rvalid, .host_rdata);
  block_buffer_bank u_bb (.clk, .en(bb_en), .we(bb_we), .addr(bb_addr), .wdata(bb_wdata), .rdata(bb_rdata));

  // ---- engine stubs
  acc_t s1 [TILE_H][TILE_W][CH];
  acc_t d1 [3][TILE_H][TILE_W][CH];
  logic v1 = 0;
  logic dv [3] = '{0, 0, 0};
  always_ff @(posedge clk) begin
    v1 <= win_valid;
    for (int r = 0; r < TILE_H; r++) for (int c = 0; c < TILE_W; c++) for (int j = 0; j < CH; j++)
      s1[r][c][j] <= 5 * acc_t'(win[r+1][c+1][j]) + acc_t'(win[r][c][j]) - 2 * acc_t'(win[r+2][c+2][j]);
    y3_valid <= v1;
    y3 <= s1;
    dv[0] <= y3_valid; dv[1] <= dv[0]; dv[2] <= dv[1];
    d1[0] <= y3; d1[1] <= d1[0]; d1[2] <= d1[1];
  end
  assign y1_valid = dv[2];
  always_comb
    for (int r = 0; r < TILE_H; r++) for (int c = 0; c < TILE_W; c++) for (int j = 0; j < CH; j++)
      y1[r][c][j] = d1[2][r][c][j] + 7;

  // ---- reference
  int fm [3][H][W][CH];
  function automatic int pix(input int b, input int y, input int x, input int j);
    if (y < 0 || y >= H || x < 0 || x >= W) return 0;
    return fm[b][y][x][j];
  endfunction
  task automatic ref_layer(input instr_t L);
    int out [H][W][CH];
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      for (int co = 0; co < RC; co++) begin
        longint yv[4]; int sa[4], ta[4], xo[4]; bit sat;
        for (int i = 0; i < N; i++) begin
          int j;
          j = co*N + i;
          yv[i] = 5 * pix(L.src_bb, y, x, j) + pix(L.src_bb, y - 1, x - 1, j) - 2 * pix(L.src_bb, y + 1, x + 1, j);
          if (L.op == OP_CONV3_1) yv[i] += 7;
          if (L.res_en) yv[i] += longint'(fm[L.skip_bb][y][x][j]) <<< L.k_shift[i];
          sa[i] = L.qd.s[i]; ta[i] = L.qd.t[i];
        end
        dir_relu_ref(N, yv, sa, ta, L.relu_en, xo, sat);
        for (int i = 0; i < N; i++) out[y][x][co*N+i] = xo[i];
      end
    fm[L.dst_bb] = out;
  endtask

  int wcnt, wfirst, wlast;
  always @(posedge clk) if (win_valid) begin
    if (wcnt == 0) wfirst = $time;
    wlast = $time;
    wcnt++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(input instr_t L);
    int cyc;
    cfg = L;
    wcnt = 0;
    run_start = 1;
    @(negedge clk);
    run_start = 0;
    cyc = 0;
    while (!run_done) begin @(negedge clk); cyc++; end
    ref_layer(L);
    checks += 3;
    if (wcnt != TW * TH) begin failures++; $display("%0d windows", wcnt); end
    if ((wlast - wfirst) / 10 + 1 != TH * (TW + 1) - 1) begin failures++; $display("window span wrong"); end
    if (cyc > TH * (TW + 1) + 12) begin failures++; $display("layer took %0d cycles", cyc); end
    @(negedge clk);
    if (running) failures++;
  endtask

  instr_t L;
  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // load BB0 and BB2 with random features through the host port
    for (int b = 0; b < 3; b += 2)
      for (int y = 0; y < H; y++) for (int sg = 0; sg < TW; sg++) begin
        host_en = 1; host_we = 1; host_bb = 2'(b); host_row = 7'(y); host_seg = 5'(sg);
        for (int p = 0; p < 4; p++) for (int j = 0; j < CH; j++) begin
          fm[b][y][4*sg + p][j] = int'($signed(8'($urandom)));
          host_wdata[p*256 + j*8 +: 8] = 8'(fm[b][y][4*sg + p][j]);
        end
        @(negedge clk);
      end
    host_en = 0; host_we = 0;

    L = '0; L.tiles_w = 6'(TW); L.tiles_h = 7'(TH);
    for (int i = 0; i < NMAX; i++) begin L.qd.s[i] = 3'(i); L.qd.t[i] = 5'(3 + i); L.k_shift[i] = 4'(i + 1); end
    L.op = OP_CONV3; L.src_bb = 0; L.dst_bb = 1; L.relu_en = 1;
    run_layer(L);
    L.op = OP_CONV3_1; L.src_bb = 1; L.dst_bb = 0; L.skip_bb = 2; L.res_en = 1; L.relu_en = 0;
    run_layer(L);
    L.op = OP_CONV3; L.src_bb = 0; L.dst_bb = 2; L.skip_bb = 0; L.res_en = 1; L.relu_en = 1;
    run_layer(L);

    for (int b = 0; b < 3; b++)
      for (int y = 0; y < H; y++) for (int sg = 0; sg < TW; sg++) begin
        host_en = 1; host_we = 0; host_bb = 2'(b); host_row = 7'(y); host_seg = 5'(sg);
        @(negedge clk);
        host_en = 0;
        checks++;
        if (!host_rvalid) failures++;
        for (int p = 0; p < 4; p++) for (int j = 0; j < CH; j++) begin
          checks++;
          if (int'($signed(host_rdata[p*256 + j*8 +: 8])) != fm[b][y][4*sg + p][j]) begin
            failures++;
            if (failures < 12) $display("BB%0d (%0d,%0d) ch %0d = %0d exp %0d", b, y, 4*sg + p, j,
                                        $signed(host_rdata[p*256 + j*8 +: 8]), fm[b][y][4*sg + p][j]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
