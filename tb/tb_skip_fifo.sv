// tb_skip_fifo: random push/pop traffic against a queue model of the 136-entry
// skip FIFO, including filling it completely and draining it; checks the head
// word, count, empty and full every cycle.
module tb_skip_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int DW = 2048, DEPTH = 136;

  logic          push = 0, pop = 0, empty, full;
  logic [DW-1:0] din = '0, dout;
  logic [7:0]    count;

  skip_fifo #(.DW(DW), .DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .empty, .full, .count);

  logic [DW-1:0] q [$];
  int nfull = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int phase;
      phase = (cyc / 500) % 3;   // 0: mostly push, 1: mostly pop, 2: balanced
      push = (q.size() < DEPTH) && (($urandom % 10) < (phase == 0 ? 9 : phase == 1 ? 1 : 5));
      pop  = (q.size() > 0)     && (($urandom % 10) < (phase == 1 ? 9 : phase == 0 ? 1 : 5));
      for (int i = 0; i < DW / 32; i++) din[i*32 +: 32] = $urandom;
      checks++;
      if (int'(count) != q.size() || empty != (q.size() == 0) || full != (q.size() == DEPTH)) begin
        failures++;
        $display("flags wrong: count %0d model %0d", count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("head mismatch at %0d", cyc); end
      end
      if (full) nfull++;
      @(negedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    push = 0; pop = 0;
    checks++;
    if (nfull == 0) begin failures++; $display("FIFO never filled"); end
    $display("cycles full: %0d", nfull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
