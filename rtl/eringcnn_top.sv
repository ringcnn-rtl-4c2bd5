// eringcnn_top: the eRingCNN accelerator for CNN-based computational imaging.
//
// Convolution layers use n-tuple ring features with the ring (R_I, f_H):
// component-wise ring products in two convolution engines (RCONV-3x3 with
// 18,432 and RCONV-1x1 with 2,048 multipliers for n = 4) and the directional
// ReLU f_H(y) = H relu(H y) applied on the fly at full precision.  Around them
// sit the weight (480 KB), bias (12 KB) and program (8 KB) memories, the main
// controller, and the inference datapath with its 34 KB FIFO and three 512 KB
// block buffers holding one image block.
//
// Use: while busy = 0 the host loads program, weight and bias words through
// mem_* (mem_sel 0 program, 1 weight, 2 bias) and the input feature block into
// a block buffer through host_bb_*; a start pulse runs the layer program; after
// done the host reads the result block through host_bb_* (data one cycle after
// the request, host_bb_rvalid).  Throughput during a layer: one 4x2-pixel tile
// of 32 channels per cycle, plus one cycle per tile row and about 80 cycles of
// parameter loading per layer.
// The block structure and sizes follow the published design (n = 4 default;
// N = 2 gives the n = 2 configuration with a 960 KB weight memory); the host
// interfaces stand in for the external DRAM interface, which is not described.
module eringcnn_top
  import ring_pkg::*;
#(
  parameter int unsigned N        = 4,
  parameter int unsigned WM_BYTES = (N == 2) ? 983040 : 491520
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // parameter / program load
  input  logic              mem_we,
  input  logic [1:0]        mem_sel,
  input  logic [WM_AW-1:0]  mem_addr,
  input  logic [MW-1:0]     mem_wdata,
  // feature block access
  input  logic              host_bb_en,
  input  logic              host_bb_we,
  input  logic [1:0]        host_bb_sel,
  input  logic [6:0]        host_bb_row,
  input  logic [4:0]        host_bb_seg,
  input  logic [SEG_W-1:0]  host_bb_wdata,
  output logic              host_bb_rvalid,
  output logic [SEG_W-1:0]  host_bb_rdata
);
  // controller <-> memories / engines
  logic             wm_rd_en, bm_rd_en;
  logic [WM_AW-1:0] wm_rd_addr;
  logic [BM_AW-1:0] bm_rd_addr;
  logic [MW-1:0]    wm_rd_data, bm_rd_data, w_data, b_data;
  logic             w3_we, w1_we, b3_we, b1_we;
  logic [7:0]       w3_addr;
  logic [3:0]       w1_addr;
  instr_t           instr;
  logic             run_start, run_done, running;

  main_controller #(.N(N)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .pm_wr_en(mem_we && mem_sel == 2'd0), .pm_wr_addr(mem_addr[PM_AW-1:0]), .pm_wr_data(mem_wdata),
    .wm_rd_en, .wm_rd_addr, .wm_rd_data, .bm_rd_en, .bm_rd_addr, .bm_rd_data,
    .w3_we, .w3_addr, .w1_we, .w1_addr, .w_data, .b3_we, .b1_we, .b_data,
    .instr, .run_start, .run_done);

  weight_memory #(.BYTES(WM_BYTES)) u_wmem (
    .clk, .wr_en(mem_we && mem_sel == 2'd1), .wr_addr(mem_addr), .wr_data(mem_wdata),
    .rd_en(wm_rd_en), .rd_addr(wm_rd_addr), .rd_data(wm_rd_data));

  bias_memory u_bmem (
    .clk, .wr_en(mem_we && mem_sel == 2'd2), .wr_addr(mem_addr[BM_AW-1:0]), .wr_data(mem_wdata),
    .rd_en(bm_rd_en), .rd_addr(bm_rd_addr), .rd_data(bm_rd_data));

  // engines
  eng_cfg_t cfg3;
  assign cfg3.relu_en = instr.relu3_en;
  assign cfg3.b_shift = instr.b3_shift;
  assign cfg3.q       = instr.q3;

  logic  win_valid, y3_valid, x3_valid, y1_valid;
  feat_t win [WIN_H][WIN_W][CH];
  acc_t  y3  [TILE_H][TILE_W][CH];
  feat_t x3  [TILE_H][TILE_W][CH];
  acc_t  y1  [TILE_H][TILE_W][CH];

  rconv3x3_engine #(.N(N)) u_rconv3 (
    .clk, .rst_n, .w_we(w3_we), .w_addr(w3_addr), .w_data, .b_we(b3_we), .b_data,
    .cfg(cfg3), .in_valid(win_valid), .win, .y_valid(y3_valid), .y(y3),
    .x_valid(x3_valid), .x(x3));

  rconv1x1_engine #(.N(N)) u_rconv1 (
    .clk, .rst_n, .w_we(w1_we), .w_addr(w1_addr), .w_data, .b_we(b1_we), .b_data,
    .b_shift(instr.b1_shift), .in_valid(x3_valid), .x(x3), .y_valid(y1_valid), .y(y1));

  // datapath and block buffers
  logic              bb_en    [NBB][NSUB];
  logic              bb_we    [NBB][NSUB];
  logic [SUB_AW-1:0] bb_addr  [NBB][NSUB];
  logic [SEG_W-1:0]  bb_wdata [NBB][NSUB];
  logic [SEG_W-1:0]  bb_rdata [NBB][NSUB];

  inference_datapath #(.N(N)) u_dp (
    .clk, .rst_n, .run_start, .cfg(instr), .run_done, .running,
    .win_valid, .win, .y3_valid, .y3, .y1_valid, .y1,
    .bb_en, .bb_we, .bb_addr, .bb_wdata, .bb_rdata,
    .host_en(host_bb_en && !busy), .host_we(host_bb_we), .host_bb(host_bb_sel),
    .host_row(host_bb_row), .host_seg(host_bb_seg), .host_wdata(host_bb_wdata),
    .host_rvalid(host_bb_rvalid), .host_rdata(host_bb_rdata));

  block_buffer_bank u_bb (.clk, .en(bb_en), .we(bb_we), .addr(bb_addr), .wdata(bb_wdata), .rdata(bb_rdata));

  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) mem_we |-> !busy);
  a_run_in_layer: assert property (@(posedge clk) disable iff (!rst_n) win_valid |-> running);
endmodule
