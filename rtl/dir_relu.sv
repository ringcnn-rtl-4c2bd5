// dir_relu: on-the-fly directional ReLU with 8-bit quantization for one n-tuple.
//
// Computes x = Q( (H * relu(H * (y << s))) >> t ) at full precision:
//   1. each accumulated component y_i (YW = 24 bits) is shifted left by s_i so
//      that all components share the largest fractional length (29 bits);
//   2. an n-point Hadamard butterfly mixes the components (31 bits for n = 4);
//   3. a pipeline register, then the component-wise ReLU;
//   4. a second Hadamard butterfly (33 bits);
//   5. each component is shifted right by t_i to its own output Q-format, rounded
//      to nearest and saturated to 8 bits, then registered.
// With relu_en = 0 the two transforms and the ReLU are skipped and only the
// alignment and quantization are applied (a layer without non-linearity).
// The stage widths, the shift ranges (0-5, 0-17) and the single register
// between the first transform and the ReLU follow the published n = 4 circuit.
// The rounding rule, the bypass mode and the output register are this design's
// choices.  The Hadamard gain n is left in the data; t_i absorbs it.
//
// Timing: in_valid/y/s/t/relu_en sampled at edge k; out_valid/x at edge k+2.
module dir_relu #(
  parameter int unsigned N    = 4,
  parameter int unsigned YW   = 24,
  parameter int unsigned SMAX = 5,
  parameter int unsigned TMAX = 17
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   relu_en,
  input  logic signed [YW-1:0]   y   [N],
  input  logic        [2:0]      s   [N],
  input  logic        [4:0]      t   [N],
  output logic                   out_valid,
  output logic signed [7:0]      x   [N]
);
  localparam int unsigned AW = YW + SMAX;        // 29 bits after <<
  localparam int unsigned HW = AW + $clog2(N);   // 31 bits after first H
  localparam int unsigned ZW = HW + $clog2(N);   // 33 bits after second H

  logic signed [AW-1:0] a  [N];
  logic signed [HW-1:0] h1 [N];
  logic signed [HW-1:0] h1_q [N];   // pipeline register D
  logic signed [HW-1:0] r  [N];
  logic signed [ZW-1:0] h2 [N];
  logic        [4:0]    t_q [N];
  logic                 bypass_q, v_q;

  always_comb
    for (int i = 0; i < N; i++) begin
      logic [2:0] sh;
      sh   = (s[i] > 3'(SMAX)) ? 3'(SMAX) : s[i];
      a[i] = AW'(y[i]) <<< sh;
    end

  hadamard_butterfly #(.N(N), .IW(AW), .OW(HW)) u_h1 (.din(a), .dout(h1));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      v_q      <= 1'b0;
      bypass_q <= 1'b0;
      for (int i = 0; i < N; i++) begin
        h1_q[i] <= '0;
        t_q[i]  <= '0;
      end
    end else begin
      v_q      <= in_valid;
      bypass_q <= !relu_en;
      for (int i = 0; i < N; i++) begin
        // in bypass mode the register carries the aligned input itself
        h1_q[i] <= relu_en ? h1[i] : HW'(a[i]);
        t_q[i]  <= (t[i] > 5'(TMAX)) ? 5'(TMAX) : t[i];
      end
    end

  always_comb
    for (int i = 0; i < N; i++) r[i] = (h1_q[i] < 0) ? '0 : h1_q[i];

  hadamard_butterfly #(.N(N), .IW(HW), .OW(ZW)) u_h2 (.din(r), .dout(h2));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++) x[i] <= '0;
    end else begin
      out_valid <= v_q;
      for (int i = 0; i < N; i++) begin
        logic signed [ZW:0] v, rnd;
        v   = bypass_q ? (ZW+1)'(h1_q[i]) : (ZW+1)'(h2[i]);
        rnd = (t_q[i] == 0) ? '0 : ((ZW+1)'(1) <<< (t_q[i] - 5'd1));
        x[i] <= ring_pkg::sat8(64'((v + rnd) >>> t_q[i]));
      end
    end
endmodule
