// tb_block_buffer_bank: writes random segments to all 3 block buffers x 4
// sub-banks in parallel, then reads them back (one cycle latency) and checks
// that the buffers and sub-banks are independent.
module tb_block_buffer_bank;
  import ring_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              en    [NBB][NSUB];
  logic              we    [NBB][NSUB];
  logic [SUB_AW-1:0] addr  [NBB][NSUB];
  logic [SEG_W-1:0]  wdata [NBB][NSUB];
  logic [SEG_W-1:0]  rdata [NBB][NSUB];

  block_buffer_bank dut (.clk, .en, .we, .addr, .wdata, .rdata);

  logic [SEG_W-1:0] model [NBB][NSUB][int];
  int               used  [NBB][NSUB][16];

  function automatic logic [SEG_W-1:0] rnd();
    logic [SEG_W-1:0] v;
    for (int i = 0; i < SEG_W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NBB; b++) for (int k = 0; k < NSUB; k++) begin
      en[b][k] = 0; we[b][k] = 0; addr[b][k] = '0; wdata[b][k] = '0;
    end
    @(negedge clk);
    for (int n = 0; n < 16; n++) begin
      for (int b = 0; b < NBB; b++) for (int k = 0; k < NSUB; k++) begin
        // the same address in every buffer and sub-bank, different data
        used[b][k][n] = (n == 0) ? 0 : (n == 1) ? SUB_DEPTH - 1 : int'($urandom % SUB_DEPTH);
        en[b][k] = 1; we[b][k] = 1; addr[b][k] = SUB_AW'(used[0][0][n]);
        wdata[b][k] = rnd();
        model[b][k][used[0][0][n]] = wdata[b][k];
      end
      @(negedge clk);
    end
    for (int n = 0; n < 16; n++) begin
      for (int b = 0; b < NBB; b++) for (int k = 0; k < NSUB; k++) begin
        en[b][k] = 1; we[b][k] = 0; addr[b][k] = SUB_AW'(used[0][0][n]);
      end
      @(negedge clk);
      for (int b = 0; b < NBB; b++) for (int k = 0; k < NSUB; k++) begin
        checks++;
        if (rdata[b][k] !== model[b][k][used[0][0][n]]) begin
          failures++;
          $display("bb %0d sub %0d addr %0d mismatch", b, k, used[0][0][n]);
        end
        en[b][k] = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
