// block_buffer_bank: three 512 KB image block buffers (BB).
//
// Each BB stores one feature map of the current image block (up to 128 x 128
// pixels x 32 channels x 8 bits = 512 KB).  To let the datapath read the four
// rows of a 6x4 input tile in a single cycle, a BB is split into 4 sub-banks by
// row (sub-bank = row mod 4); a word is a 4-pixel row segment (4 x 32 x 8 =
// 1024 bits; pixel p in bits [p*256 +: 256], channel j of it in [j*8 +: 8]).
// Sub-bank address = (row div 4) * 32 + (column div 4).
// Three BBs and their size follow the published design; the sub-bank split,
// word format and addressing are this design's own.
//
// Every sub-bank is a single-port memory: en & we writes wdata, en & !we reads,
// with rdata valid one cycle later.
module block_buffer_bank
  import ring_pkg::*;
(
  input  logic              clk,
  input  logic              en    [NBB][NSUB],
  input  logic              we    [NBB][NSUB],
  input  logic [SUB_AW-1:0] addr  [NBB][NSUB],
  input  logic [SEG_W-1:0]  wdata [NBB][NSUB],
  output logic [SEG_W-1:0]  rdata [NBB][NSUB]
);
  for (genvar b = 0; b < NBB; b++) begin : g_bb
    for (genvar k = 0; k < NSUB; k++) begin : g_sub
      logic [SEG_W-1:0] mem [SUB_DEPTH];
      always_ff @(posedge clk)
        if (en[b][k]) begin
          if (we[b][k]) mem[addr[b][k]] <= wdata[b][k];
          else          rdata[b][k]     <= mem[addr[b][k]];
        end
    end
  end
endmodule
