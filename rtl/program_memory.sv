// program_memory: program memory of the main controller (8 KB).
//
// Holds the layer program: one 256-bit instruction word per layer (ring_pkg::instr_t in the low bits), executed from address 0 until an OP_END instruction.
// Written as a register array with one write port (host load) and one read
// port with a registered output (data valid one cycle after rd_en), the way a
// two-port SRAM macro behaves; the 256-bit word width is this design's choice.
// Capacity: 8192 bytes = 8192/32 words of 32 bytes.
module program_memory
  import ring_pkg::*;
#(
  parameter int unsigned BYTES = 8192,
  parameter int unsigned DEPTH = BYTES / (MW / 8),
  parameter int unsigned AW    = 8
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
