// inference_datapath: tile sweep, residual path and output stage of eRingCNN.
//
// For one layer it sweeps the image block held in the source block buffer in
// raster order of 4x2 output tiles, one tile per cycle:
//  * Input tiles.  For tile row tr it reads, per cycle, the 4-pixel segment
//    column c (c = 0 .. tiles_w) of rows 2tr-1 .. 2tr+2; these four rows fall
//    into four different sub-banks, so one cycle suffices.  A sliding window of
//    three segment columns gives the 6x4 input tile of output tile c-1.  Pixels
//    outside the block are zero (zero padding).
//  * Skip tiles.  With res_en the residual input of each output tile is taken
//    from the centre of the input window (skip_bb = src_bb) or read from another
//    block buffer, and queued in the 34 KB skip_fifo.
//  * Output stage.  When the engine result arrives (3x3 engine y for OP_CONV3,
//    1x1 engine y for OP_CONV3_1) the skip tile is popped, aligned by k_shift
//    and added, and one dir_relu per output n-tuple applies the directional
//    ReLU (or, with relu_en = 0, only alignment) and 8-bit quantization.  The
//    tile is written to the destination block buffer in the same order.
// When idle the host reads and writes block-buffer segments through the host
// port (read data one cycle later, host_rvalid).
// The block-based flow and the datapath directional ReLU after residual
// connections follow the published design; sweep order, zero padding, buffer
// roles and the skip alignment are this design's own.
//
// Timing: run_start (one cycle, cfg valid and held) starts the sweep; the first
// window leaves 2 cycles later; run_done pulses in the cycle after the last
// tile is written.
module inference_datapath
  import ring_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run_start,
  input  instr_t            cfg,
  output logic              run_done,
  output logic              running,
  // to / from the engines
  output logic              win_valid,
  output feat_t             win [WIN_H][WIN_W][CH],
  input  logic              y3_valid,
  input  acc_t              y3  [TILE_H][TILE_W][CH],
  input  logic              y1_valid,
  input  acc_t              y1  [TILE_H][TILE_W][CH],
  // block buffer bank
  output logic              bb_en    [NBB][NSUB],
  output logic              bb_we    [NBB][NSUB],
  output logic [SUB_AW-1:0] bb_addr  [NBB][NSUB],
  output logic [SEG_W-1:0]  bb_wdata [NBB][NSUB],
  input  logic [SEG_W-1:0]  bb_rdata [NBB][NSUB],
  // host access (only while not running)
  input  logic              host_en,
  input  logic              host_we,
  input  logic [1:0]        host_bb,
  input  logic [6:0]        host_row,
  input  logic [4:0]        host_seg,
  input  logic [SEG_W-1:0]  host_wdata,
  output logic              host_rvalid,
  output logic [SEG_W-1:0]  host_rdata
);
  localparam int unsigned RC   = CH / N;
  localparam int unsigned PXW  = CH * FW;                  // 256 bits per pixel
  localparam int unsigned TDW  = TILE_H * TILE_W * PXW;    // 2048-bit tile

  // ------------------------------------------------------------------ sweep
  logic       issuing;
  logic [6:0] tr;       // tile row
  logic [5:0] c;        // segment column being read (0 .. tiles_w)
  logic [6:0] wtr;      // tile row being written
  logic [5:0] wtc;      // tile column being written

  // read issue (combinational)
  logic              rd_ok  [WIN_H];
  logic [1:0]        rd_sub [WIN_H];
  logic [SUB_AW-1:0] rd_adr [WIN_H];
  logic              sk_rd;
  logic [1:0]        sk_sub [TILE_H];
  logic [SUB_AW-1:0] sk_adr [TILE_H];
  logic              skip_from_win;

  assign skip_from_win = (cfg.skip_bb == cfg.src_bb);

  always_comb begin
    for (int q = 0; q < WIN_H; q++) begin
      int row;
      row       = 2 * int'(tr) - 1 + q;
      rd_ok[q]  = issuing && (row >= 0) && (row < 2 * int'(cfg.tiles_h)) && (c < cfg.tiles_w);
      rd_sub[q] = 2'(row + 4);
      rd_adr[q] = SUB_AW'(((row < 0 ? 0 : row) >> 2) * int'(MAX_SEGS_X) + int'(c));
    end
    sk_rd = issuing && cfg.res_en && !skip_from_win && (c != 0);
    for (int q = 0; q < TILE_H; q++) begin
      int row;
      row       = 2 * int'(tr) + q;
      sk_sub[q] = 2'(row);
      sk_adr[q] = SUB_AW'((row >> 2) * int'(MAX_SEGS_X) + int'(c) - 1);
    end
  end

  // issue-side state
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      issuing <= 1'b0;
      running <= 1'b0;
      tr      <= '0;
      c       <= '0;
    end else begin
      if (run_start) begin
        issuing <= 1'b1;
        running <= 1'b1;
        tr      <= '0;
        c       <= '0;
      end else if (issuing) begin
        if (c == cfg.tiles_w) begin
          c <= '0;
          if (tr == cfg.tiles_h - 7'd1) issuing <= 1'b0;
          else                          tr <= tr + 7'd1;
        end else begin
          c <= c + 6'd1;
        end
      end
      if (run_done) running <= 1'b0;
    end

  // return-side pipeline registers (data arrive one cycle after issue)
  logic       ret_v, ret_first, ret_emit;
  logic       ret_ok  [WIN_H];
  logic [1:0] ret_sub [WIN_H];
  logic [1:0] ret_sks [TILE_H];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ret_v     <= 1'b0;
      ret_first <= 1'b0;
      ret_emit  <= 1'b0;
      for (int q = 0; q < WIN_H; q++) begin
        ret_ok[q]  <= 1'b0;
        ret_sub[q] <= '0;
      end
      for (int q = 0; q < TILE_H; q++) ret_sks[q] <= '0;
    end else begin
      ret_v     <= issuing;
      ret_first <= issuing && (c == 0);
      ret_emit  <= issuing && (c != 0);
      ret_ok    <= rd_ok;
      ret_sub   <= rd_sub;
      ret_sks   <= sk_sub;
    end

  // newly read segment column, zero where outside the block
  logic [SEG_W-1:0] seg_new [WIN_H];
  logic [SEG_W-1:0] seg_w1 [WIN_H], seg_w2 [WIN_H];   // columns c-2, c-1
  always_comb
    for (int q = 0; q < WIN_H; q++)
      seg_new[q] = ret_ok[q] ? bb_rdata[cfg.src_bb][ret_sub[q]] : '0;

  function automatic feat_t px(input logic [SEG_W-1:0] seg, input int p, input int j);
    return feat_t'(seg[p*PXW + j*FW +: FW]);
  endfunction

  // window of the tile at segment column c-1: pixel columns 4(c-1)-1 .. 4c
  feat_t win_n [WIN_H][WIN_W][CH];
  always_comb
    for (int q = 0; q < WIN_H; q++)
      for (int j = 0; j < CH; j++) begin
        win_n[q][0][j] = px(seg_w1[q], 3, j);
        for (int p = 0; p < 4; p++) win_n[q][1+p][j] = px(seg_w2[q], p, j);
        win_n[q][5][j] = px(seg_new[q], 0, j);
      end

  // skip tile for the same output tile
  logic [TDW-1:0] skip_n;
  always_comb
    for (int r = 0; r < TILE_H; r++)
      for (int p = 0; p < TILE_W; p++)
        for (int j = 0; j < CH; j++)
          skip_n[((r*TILE_W + p)*CH + j)*FW +: FW] =
            skip_from_win ? win_n[1+r][1+p][j]
                          : px(bb_rdata[cfg.skip_bb][ret_sks[r]], p, j);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      win_valid <= 1'b0;
      for (int q = 0; q < WIN_H; q++) begin
        seg_w1[q] <= '0;
        seg_w2[q] <= '0;
      end
    end else begin
      win_valid <= ret_v && ret_emit;
      if (ret_v) begin
        for (int q = 0; q < WIN_H; q++) begin
          seg_w1[q] <= ret_first ? '0 : seg_w2[q];
          seg_w2[q] <= seg_new[q];
        end
      end
    end

  always_ff @(posedge clk)
    if (ret_v && ret_emit) win <= win_n;

  // ------------------------------------------------------------- skip FIFO
  logic           f_push, f_pop, f_empty, f_full;
  logic [TDW-1:0] f_dout;
  logic [7:0]     f_count;

  assign f_push = ret_v && ret_emit && cfg.res_en;

  skip_fifo #(.DW(TDW), .DEPTH(136)) u_fifo (
    .clk, .rst_n, .push(f_push), .din(skip_n), .pop(f_pop),
    .dout(f_dout), .empty(f_empty), .full(f_full), .count(f_count));

  // ---------------------------------------------------------- output stage
  logic res_v;
  acc_t ysel [TILE_H][TILE_W][CH];
  assign res_v = running && ((cfg.op == OP_CONV3) ? y3_valid : y1_valid);
  assign f_pop = res_v && cfg.res_en;

  always_comb
    for (int r = 0; r < TILE_H; r++)
      for (int p = 0; p < TILE_W; p++)
        for (int j = 0; j < CH; j++) begin
          acc_t sk;
          sk = cfg.res_en ? (acc_t'(feat_t'(f_dout[((r*TILE_W + p)*CH + j)*FW +: FW]))
                             <<< cfg.k_shift[j % N]) : '0;
          ysel[r][p][j] = ((cfg.op == OP_CONV3) ? y3[r][p][j] : y1[r][p][j]) + sk;
        end

  logic [2:0] sv [N];
  logic [4:0] tv [N];
  always_comb
    for (int i = 0; i < N; i++) begin
      sv[i] = cfg.qd.s[i];
      tv[i] = cfg.qd.t[i];
    end

  feat_t xo [TILE_H][TILE_W][CH];
  logic  xv [TILE_H][TILE_W][RC];
  for (genvar r = 0; r < TILE_H; r++) begin : g_r
    for (genvar p = 0; p < TILE_W; p++) begin : g_p
      for (genvar co = 0; co < RC; co++) begin : g_o
        acc_t              yt [N];
        logic signed [7:0] xt [N];
        always_comb
          for (int i = 0; i < N; i++) yt[i] = ysel[r][p][co*N+i];
        dir_relu #(.N(N), .YW(YW)) u_relu (
          .clk, .rst_n, .in_valid(res_v), .relu_en(cfg.relu_en),
          .y(yt), .s(sv), .t(tv), .out_valid(xv[r][p][co]), .x(xt));
        always_comb
          for (int i = 0; i < N; i++) xo[r][p][co*N+i] = xt[i];
      end
    end
  end

  logic wr_v;
  assign wr_v = xv[0][0][0] && running;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wtr      <= '0;
      wtc      <= '0;
      run_done <= 1'b0;
    end else begin
      run_done <= 1'b0;
      if (run_start) begin
        wtr <= '0;
        wtc <= '0;
      end else if (wr_v) begin
        if (wtc == cfg.tiles_w - 6'd1) begin
          wtc <= '0;
          wtr <= wtr + 7'd1;
          if (wtr == cfg.tiles_h - 7'd1) run_done <= 1'b1;
        end else begin
          wtc <= wtc + 6'd1;
        end
      end
    end

  // ------------------------------------------------------- BB port control
  logic [1:0] h_bb_q, h_sub_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      host_rvalid <= 1'b0;
      h_bb_q      <= '0;
      h_sub_q     <= '0;
    end else begin
      host_rvalid <= host_en && !host_we && !running;
      h_bb_q      <= host_bb;
      h_sub_q     <= host_row[1:0];
    end
  assign host_rdata = bb_rdata[h_bb_q][h_sub_q];

  always_comb begin
    int row;
    row = 0;
    for (int b = 0; b < NBB; b++)
      for (int k = 0; k < NSUB; k++) begin
        bb_en[b][k]    = 1'b0;
        bb_we[b][k]    = 1'b0;
        bb_addr[b][k]  = '0;
        bb_wdata[b][k] = '0;
      end
    if (running) begin
      for (int q = 0; q < WIN_H; q++)
        if (rd_ok[q]) begin
          bb_en[cfg.src_bb][rd_sub[q]]   = 1'b1;
          bb_addr[cfg.src_bb][rd_sub[q]] = rd_adr[q];
        end
      if (sk_rd)
        for (int q = 0; q < TILE_H; q++) begin
          bb_en[cfg.skip_bb][sk_sub[q]]   = 1'b1;
          bb_addr[cfg.skip_bb][sk_sub[q]] = sk_adr[q];
        end
      if (wr_v)
        for (int r = 0; r < TILE_H; r++) begin
          row = 2 * int'(wtr) + r;
          bb_en[cfg.dst_bb][2'(row)]   = 1'b1;
          bb_we[cfg.dst_bb][2'(row)]   = 1'b1;
          bb_addr[cfg.dst_bb][2'(row)] = SUB_AW'((row >> 2) * int'(MAX_SEGS_X) + int'(wtc));
          for (int p = 0; p < TILE_W; p++)
            for (int j = 0; j < CH; j++)
              bb_wdata[cfg.dst_bb][2'(row)][p*PXW + j*FW +: FW] = xo[r][p][j];
        end
    end else if (host_en && host_bb < 2'(NBB)) begin
      bb_en[host_bb][host_row[1:0]]    = 1'b1;
      bb_we[host_bb][host_row[1:0]]    = host_we;
      bb_addr[host_bb][host_row[1:0]]  = SUB_AW'(int'(host_row >> 2) * int'(MAX_SEGS_X) + int'(host_seg));
      bb_wdata[host_bb][host_row[1:0]] = host_wdata;
    end
  end

  // The destination buffer must differ from the buffers being read.
  a_dst_distinct: assert property (@(posedge clk) disable iff (!rst_n)
    running |-> (cfg.dst_bb != cfg.src_bb) && (!cfg.res_en || cfg.dst_bb != cfg.skip_bb));
  a_fifo_ok: assert property (@(posedge clk) disable iff (!rst_n)
    !(f_pop && f_empty) && !(f_push && f_full) && (int'(f_count) <= 136));
endmodule
