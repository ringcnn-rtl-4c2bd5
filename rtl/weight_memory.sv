// weight_memory: on-chip weight memory (480 KB for n = 4).
//
// Holds the 8-bit ring filter weights of all layers. A ring filter needs only n real weights per n x n channel block, so the published design halves (n = 2: 960 KB) or quarters (n = 4: 480 KB) the real-valued weight storage and then enlarges it 1.5x for large models. Word w holds one weight for each of the 32 real input channels of one (output ring channel, tap) pair.
// Written as a register array with one write port (host load) and one read
// port with a registered output (data valid one cycle after rd_en), the way a
// two-port SRAM macro behaves; the 256-bit word width is this design's choice.
// Capacity: 491520 bytes = 491520/32 words of 32 bytes.
module weight_memory
  import ring_pkg::*;
#(
  parameter int unsigned BYTES = 491520,
  parameter int unsigned DEPTH = BYTES / (MW / 8),
  parameter int unsigned AW    = 15
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [MW-1:0] wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [MW-1:0] rd_data
);
  logic [MW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (int'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= (int'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
  end

  // Out-of-range addresses indicate a bad program.
  a_wr_range: assert property (@(posedge clk) wr_en |-> int'(wr_addr) < DEPTH);
  a_rd_range: assert property (@(posedge clk) rd_en |-> int'(rd_addr) < DEPTH);
endmodule
