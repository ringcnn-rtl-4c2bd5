// skip_fifo: the 34 KB feature FIFO of the inference datapath.
//
// Synchronous first-word-fall-through FIFO of 4x2 feature tiles (8 pixels x 32
// channels x 8 bits = 2048 bits = 256 bytes), 136 entries = 34 KB.  The
// datapath pushes the residual (skip) tile of every output tile when it reads
// the tile's input, and pops it when the convolution result for that tile
// reaches the residual adder, so the skip path needs no fixed-length delay line.
// The capacity follows the published design; its use for skip tiles is this
// design's reading of it.
//
// Interface: push/din and pop act on the rising edge; dout shows the head
// entry whenever empty = 0.  Pushing when full or popping when empty is an
// error (checked by assertions) and is ignored.
module skip_fifo #(
  parameter int unsigned DW    = 2048,
  parameter int unsigned DEPTH = 136,
  parameter int unsigned CW    = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [DW-1:0] din,
  input  logic          pop,
  output logic [DW-1:0] dout,
  output logic          empty,
  output logic          full,
  output logic [CW-1:0] count
);
  localparam int unsigned PW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [PW-1:0] wp, rp;

  logic do_push, do_pop;
  assign empty   = (count == '0);
  assign full    = (count == CW'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk)
    if (do_push) mem[wp] <= din;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + CW'(do_push) - CW'(do_pop);
    end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
