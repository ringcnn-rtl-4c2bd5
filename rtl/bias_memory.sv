// bias_memory: on-chip bias memory (12 KB).
//
// Holds one 8-bit bias per real output channel for every layer and engine: each layer uses two consecutive words, the first for the 3x3 engine and the second for the 1x1 engine.
// Written as a register array with one write port (host load) and one read
// port with a registered output (data valid one cycle after rd_en), the way a
// two-port SRAM macro behaves; the 256-bit word width is this design's choice.
// Capacity: 12288 bytes = 12288/32 words of 32 bytes.
module bias_memory
  import ring_pkg::*;
#(
  parameter int unsigned BYTES = 12288,
  parameter int unsigned DEPTH = BYTES / (MW / 8),
  parameter int unsigned AW    = 9
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
