// main_controller: layer sequencer of eRingCNN with its 8 KB program memory.
//
// After start it executes the layer program from address 0.  For each
// instruction (ring_pkg::instr_t, one 256-bit word):
//   FETCH   read the program word;
//   DECODE  stop on OP_END (done), otherwise latch the instruction;
//   LOADW3  stream 9*32/n weight words (72 for n = 4; 9 taps x 32/n output ring channels, layout
//           co*9 + tap) from the weight memory into the 3x3 engine registers;
//   LOADW1  for OP_CONV3_1, stream 32/n words into the 1x1 engine;
//   LOADB   two bias words (3x3 engine at b_base, 1x1 engine at b_base+1);
//   RUN     pulse run_start to the inference datapath and wait for run_done.
// Memory reads have one cycle of latency, so each load stream ends with one
// drain cycle.  The published design names the controller and its program
// memory only; the instruction format and this sequence are this design's.
//
// Interface: start is a one-cycle pulse while idle; busy is high from start to
// the end of the program; done pulses for one cycle at the end.  The host may
// write the program memory (pm_wr_*) while the controller is idle.
module main_controller
  import ring_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // program memory load
  input  logic              pm_wr_en,
  input  logic [PM_AW-1:0]  pm_wr_addr,
  input  logic [MW-1:0]     pm_wr_data,
  // weight / bias memory reads
  output logic              wm_rd_en,
  output logic [WM_AW-1:0]  wm_rd_addr,
  input  logic [MW-1:0]     wm_rd_data,
  output logic              bm_rd_en,
  output logic [BM_AW-1:0]  bm_rd_addr,
  input  logic [MW-1:0]     bm_rd_data,
  // engine parameter loads
  output logic              w3_we,
  output logic [7:0]        w3_addr,
  output logic              w1_we,
  output logic [3:0]        w1_addr,
  output logic [MW-1:0]     w_data,
  output logic              b3_we,
  output logic              b1_we,
  output logic [MW-1:0]     b_data,
  // datapath
  output instr_t            instr,
  output logic              run_start,
  input  logic              run_done
);
  localparam int unsigned RC = CH / N;

  typedef enum logic [2:0] {
    S_IDLE, S_FETCH, S_DECODE, S_LOADW3, S_LOADW1, S_LOADB, S_RUN, S_WAIT
  } state_e;

  state_e           st;
  logic [PM_AW-1:0] pc;
  logic [7:0]       k;
  logic             pm_rd_en;
  logic [MW-1:0]    pm_rd_data;

  program_memory u_prog (
    .clk, .wr_en(pm_wr_en), .wr_addr(pm_wr_addr), .wr_data(pm_wr_data),
    .rd_en(pm_rd_en), .rd_addr(pc), .rd_data(pm_rd_data));

  assign pm_rd_en = (st == S_FETCH);
  assign busy     = (st != S_IDLE);

  // read requests
  always_comb begin
    wm_rd_en   = 1'b0;
    wm_rd_addr = '0;
    bm_rd_en   = 1'b0;
    bm_rd_addr = '0;
    case (st)
      S_LOADW3: if (int'(k) < RC * 9) begin
        wm_rd_en   = 1'b1;
        wm_rd_addr = instr.w3_base + WM_AW'(k);
      end
      S_LOADW1: if (int'(k) < RC) begin
        wm_rd_en   = 1'b1;
        wm_rd_addr = instr.w1_base + WM_AW'(k);
      end
      S_LOADB: if (k < 8'd2) begin
        bm_rd_en   = 1'b1;
        bm_rd_addr = instr.b_base + BM_AW'(k);
      end
      default: ;
    endcase
  end

  // engine writes, one cycle after the reads
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      w3_we   <= 1'b0;
      w1_we   <= 1'b0;
      b3_we   <= 1'b0;
      b1_we   <= 1'b0;
      w3_addr <= '0;
      w1_addr <= '0;
    end else begin
      w3_we   <= (st == S_LOADW3) && wm_rd_en;
      w1_we   <= (st == S_LOADW1) && wm_rd_en;
      b3_we   <= bm_rd_en && (k == 8'd0);
      b1_we   <= bm_rd_en && (k == 8'd1);
      w3_addr <= k;
      w1_addr <= k[3:0];
    end
  assign w_data = wm_rd_data;
  assign b_data = bm_rd_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st        <= S_IDLE;
      pc        <= '0;
      k         <= '0;
      instr     <= '0;
      done      <= 1'b0;
      run_start <= 1'b0;
    end else begin
      done      <= 1'b0;
      run_start <= 1'b0;
      case (st)
        S_IDLE:   if (start) begin
          pc <= '0;
          st <= S_FETCH;
        end
        S_FETCH:  st <= S_DECODE;
        S_DECODE: begin
          if (op_e'(pm_rd_data[$bits(instr_t)-1 -: 2]) == OP_END) begin
            done <= 1'b1;
            st   <= S_IDLE;
          end else begin
            instr <= instr_t'(pm_rd_data[$bits(instr_t)-1:0]);
            k     <= '0;
            st    <= S_LOADW3;
          end
        end
        S_LOADW3: begin
          // k runs one past the last word: the drain cycle of the read
          if (int'(k) == RC * 9) begin
            k  <= '0;
            st <= (instr.op == OP_CONV3_1) ? S_LOADW1 : S_LOADB;
          end else k <= k + 8'd1;
        end
        S_LOADW1: begin
          if (int'(k) == RC) begin
            k  <= '0;
            st <= S_LOADB;
          end else k <= k + 8'd1;
        end
        S_LOADB: begin
          if (k == 8'd2) begin
            k  <= '0;
            st <= S_RUN;
          end else k <= k + 8'd1;
        end
        S_RUN: begin
          run_start <= 1'b1;
          st        <= S_WAIT;
        end
        S_WAIT: if (run_done) begin
          pc <= pc + 1'b1;
          st <= S_FETCH;
        end
        default: st <= S_IDLE;
      endcase
    end
endmodule
