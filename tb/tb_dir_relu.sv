// tb_dir_relu: self-checking test of the directional ReLU for n = 4 and n = 2.
// Random 24-bit inputs, shifts and modes are applied every cycle; each output is
// compared with tb_ref_pkg::dir_relu_ref exactly two cycles later.
module tb_dir_relu;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;

  logic                in_valid, relu_en;
  logic signed [23:0]  y4 [4], y2 [2];
  logic [2:0]          s4 [4], s2 [2];
  logic [4:0]          t4 [4], t2 [2];
  logic                v4, v2;
  logic signed [7:0]   x4 [4], x2 [2];

  dir_relu #(.N(4)) dut4 (.clk, .rst_n, .in_valid, .relu_en, .y(y4), .s(s4), .t(t4), .out_valid(v4), .x(x4));
  dir_relu #(.N(2)) dut2 (.clk, .rst_n, .in_valid, .relu_en, .y(y2), .s(s2), .t(t2), .out_valid(v2), .x(x2));

  int  exp4 [3000][4];
  int  exp2 [3000][2];
  bit  ev   [3000];
  int  nsat = 0, nrelu = 0, nbyp = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive();
    longint ya[4];
    int sa[4], ta[4], xa[4], xb[4];
    bit sat, sat2;
    in_valid = ($urandom % 8) != 0;
    relu_en  = ($urandom % 4) != 0;
    for (int i = 0; i < 4; i++) begin
      // mix small and full-range values
      y4[i] = ($urandom % 3 == 0) ? 24'($signed($urandom)) : 24'($signed($urandom % 2001) - 1000);
      s4[i] = 3'($urandom % 6);
      t4[i] = 5'($urandom % 18);
      ya[i] = longint'(y4[i]); sa[i] = int'(s4[i]); ta[i] = int'(t4[i]);
    end
    for (int i = 0; i < 2; i++) begin y2[i] = y4[i]; s2[i] = s4[i]; t2[i] = t4[i]; end
    dir_relu_ref(4, ya, sa, ta, relu_en, xa, sat);
    dir_relu_ref(2, ya, sa, ta, relu_en, xb, sat2);
    if (in_valid) begin
      if (sat) nsat++;
      if (relu_en) nrelu++; else nbyp++;
    end
    for (int i = 0; i < 4; i++) exp4[cyc][i] = xa[i];
    for (int i = 0; i < 2; i++) exp2[cyc][i] = xb[i];
    ev[cyc] = in_valid;
  endtask

  initial begin
    in_valid = 0; relu_en = 0;
    for (int i = 0; i < 4; i++) begin y4[i] = 0; s4[i] = 0; t4[i] = 0; end
    for (int i = 0; i < 2; i++) begin y2[i] = 0; s2[i] = 0; t2[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (cyc = 0; cyc < 3000; cyc++) begin
      drive();
      @(negedge clk);
      if (cyc > 0) begin
        bit e; int a[4]; int b[2];
        e = ev[cyc-1]; a = exp4[cyc-1]; b = exp2[cyc-1];
        checks++;
        if (v4 !== e || v2 !== e) begin
          failures++;
          $display("valid latency mismatch at %0d", cyc);
        end
        if (e) begin
          for (int i = 0; i < 4; i++) begin
            checks++;
            if (int'(x4[i]) != a[i]) begin
              failures++;
              if (failures < 10) $display("n4 x[%0d]=%0d exp %0d", i, x4[i], a[i]);
            end
          end
          for (int i = 0; i < 2; i++) begin
            checks++;
            if (int'(x2[i]) != b[i]) begin
              failures++;
              if (failures < 10) $display("n2 x[%0d]=%0d exp %0d", i, x2[i], b[i]);
            end
          end
        end
      end
    end
    checks++;
    if (nsat == 0 || nrelu == 0 || nbyp == 0) failures++;
    $display("saturating=%0d relu=%0d bypass=%0d", nsat, nrelu, nbyp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
