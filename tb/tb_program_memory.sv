// tb_program_memory: writes random 256-bit words to random addresses of program_memory (including
// the first and last word), reads them back and checks that each read returns
// the last value written, exactly one cycle after rd_en.
module tb_program_memory;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int AW = 8, DEPTH = 256;

  logic          wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [255:0]  wr_data = '0, rd_data;

  program_memory dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  logic [255:0] model [int];
  int           addrs [64];

  function automatic logic [255:0] rnd256();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < 64; i++) begin
      addrs[i] = (i == 0) ? 0 : (i == 1) ? DEPTH - 1 : int'($urandom % DEPTH);
      wr_en = 1; wr_addr = AW'(addrs[i]); wr_data = rnd256();
      model[addrs[i]] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 63; i >= 0; i--) begin
      rd_en = 1; rd_addr = AW'(addrs[i]);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== model[addrs[i]]) begin
        failures++;
        $display("addr %0d read mismatch", addrs[i]);
      end
      // output holds while rd_en is low
      rd_addr = AW'(addrs[(i + 1) % 64]);
      @(negedge clk);
      checks++;
      if (rd_data !== model[addrs[i]]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
