// tb_main_controller: runs a three-instruction program (OP_CONV3, OP_CONV3_1,
// OP_END) through the controller with behavioural weight/bias memories and a
// datapath stub that answers run_start with run_done after a few cycles.
// Checks every engine load (address and data), the number of loads per layer,
// the instruction presented at each run_start, and the done/busy handshake.
module tb_main_controller;
  import ring_pkg::*;
  localparam int N = 4, RC = CH / N;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             start = 0, busy, done;
  logic             pm_wr_en = 0;
  logic [PM_AW-1:0] pm_wr_addr = '0;
  logic [MW-1:0]    pm_wr_data = '0;
  logic             wm_rd_en, bm_rd_en;
  logic [WM_AW-1:0] wm_rd_addr;
  logic [BM_AW-1:0] bm_rd_addr;
  logic [MW-1:0]    wm_rd_data, bm_rd_data, w_data, b_data;
  logic             w3_we, w1_we, b3_we, b1_we, run_start, run_done = 0;
  logic [7:0]       w3_addr;
  logic [3:0]       w1_addr;
  instr_t           instr;

  main_controller #(.N(N)) dut (.clk, .rst_n, .start, .busy, .done, .pm_wr_en, .pm_wr_addr, .pm_wr_data,
    .wm_rd_en, .wm_rd_addr, .wm_rd_data, .bm_rd_en, .bm_rd_addr, .bm_rd_data,
    .w3_we, .w3_addr, .w1_we, .w1_addr, .w_data, .b3_we, .b1_we, .b_data,
    .instr, .run_start, .run_done);

  // behavioural memories: word value = address tag
  function automatic logic [MW-1:0] wword(input int a); return {8{32'hA000_0000 + a}}; endfunction
  function automatic logic [MW-1:0] bword(input int a); return {8{32'hB000_0000 + a}}; endfunction
  always_ff @(posedge clk) begin
    if (wm_rd_en) wm_rd_data <= wword(int'(wm_rd_addr));
    if (bm_rd_en) bm_rd_data <= bword(int'(bm_rd_addr));
  end

  instr_t prog [3];
  int layer = 0, n_w3 = 0, n_w1 = 0, n_b3 = 0, n_b1 = 0, n_done = 0;
  int w3_cnt [2], w1_cnt [2];

  // datapath stub
  always @(posedge clk) begin
    if (run_start) begin
      checks++;
      if (instr != prog[layer]) begin failures++; $display("wrong instruction at run_start %0d", layer); end
      checks++;
      if (w3_cnt[layer] != RC * 9 || w1_cnt[layer] != (prog[layer].op == OP_CONV3_1 ? RC : 0)) begin
        failures++; $display("layer %0d loads: w3 %0d w1 %0d", layer, w3_cnt[layer], w1_cnt[layer]);
      end
      fork begin
        repeat (6) @(posedge clk);
        run_done <= 1'b1;
        @(posedge clk);
        run_done <= 1'b0;
      end join_none
    end
    if (run_done) layer <= layer + 1;
  end

  // load monitor
  always @(negedge clk) if (rst_n) begin
    if (w3_we) begin
      checks++;
      w3_cnt[layer]++;
      if (w_data !== wword(int'(prog[layer].w3_base) + int'(w3_addr))) begin failures++; $display("w3 data wrong"); end
    end
    if (w1_we) begin
      checks++;
      w1_cnt[layer]++;
      if (w_data !== wword(int'(prog[layer].w1_base) + int'(w1_addr))) begin failures++; $display("w1 data wrong"); end
    end
    if (b3_we) begin
      checks++; n_b3++;
      if (b_data !== bword(int'(prog[layer].b_base))) begin failures++; $display("b3 data wrong"); end
    end
    if (b1_we) begin
      checks++; n_b1++;
      if (b_data !== bword(int'(prog[layer].b_base) + 1)) begin failures++; $display("b1 data wrong"); end
    end
    if (done) n_done++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w3_cnt = '{0, 0}; w1_cnt = '{0, 0};
    prog[0] = '0; prog[0].op = OP_CONV3;   prog[0].w3_base = 15'd100; prog[0].w1_base = 15'd7000; prog[0].b_base = 9'd10;
    prog[0].tiles_w = 6'd2; prog[0].tiles_h = 7'd3; prog[0].dst_bb = 2'd1;
    prog[1] = '0; prog[1].op = OP_CONV3_1; prog[1].w3_base = 15'd300; prog[1].w1_base = 15'd500; prog[1].b_base = 9'd20;
    prog[1].q3.t = 20'h12345; prog[1].src_bb = 2'd1; prog[1].dst_bb = 2'd2;
    prog[2] = '0; prog[2].op = OP_END;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int a = 0; a < 3; a++) begin
      pm_wr_en = 1; pm_wr_addr = PM_AW'(a); pm_wr_data = MW'(prog[a]);
      @(negedge clk);
    end
    pm_wr_en = 0;
    checks++;
    if (busy) failures++;
    start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (busy || n_done != 1 || layer != 2 || n_b3 != 2 || n_b1 != 2) begin
      failures++;
      $display("end state: busy %0d done %0d layers %0d b3 %0d b1 %0d", busy, n_done, layer, n_b3, n_b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
