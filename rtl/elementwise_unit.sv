// elementwise_unit: dequantisation followed by residual addition, SiLU or
// the SwiGLU product on the output of the table-lookup linear unit.
//
// What it does: each linear-layer result arrives as (row, int32 sum of
// ternary weight x int8 activation). The unit turns it back into a real value
// and either adds the residual of that row, applies SiLU, or multiplies by
// the stored value of that row:
//   op_silu = 0, op_mul = 0:  y[row] = residual[row] + d
//   op_silu = 1:              y[row] = SiLU(d)
//   op_silu = 0, op_mul = 1:  y[row] = d * residual[row]
// with d = acc * act_scale * w_scale / 127. SwiGLU is the last two in turn:
// the gate projection runs with op_silu, its rows are written into the row
// memory, and the up projection then runs with op_mul.
// where act_scale is the activation absmax found by RMSNorm & Find Max (the
// int8 codes were round(127 * x / absmax)) and w_scale is the per-tensor
// scale of the ternary weights. Values are Q8.8.
//
// How: a residual memory (MAX_ROWS x Q8.8, loaded through res_we/res_addr/
// res_data) is read with the row index while the three-way product is formed;
// 1/127 is the constant 132104/2^24 (relative error 5e-7), rounded to
// nearest. The sum saturates to Q8.8. SiLU uses a 257-entry sigmoid table
// over [-8, 8), built at elaboration, with linear interpolation (error below
// 2 LSB). The product rounds the saturated d times the stored value.
//
// Interface and timing: a valid-only input stream (in_valid/in_row/in_acc),
// one element per clock, and a valid-only output stream delayed by exactly
// two clocks. act_scale and w_scale must be stable while a row stream runs.
//
// Source versus own choices: the architecture names the element-wise stage
// after the linear units ("SiLU, RoPE, residual addition, and
// dequantization", and elsewhere "RoPE and SwiGLU"). Dequantisation,
// residual addition, SiLU and the SwiGLU product are built here; RoPE is
// rope_unit. Reusing the residual memory for the SiLU(gate) rows is this
// design's choice.
// The absmax / 127 scaling follows the BitNet b1.58 quantisation scheme; the
// Q8.8 format, the sigmoid table and the two-stage pipeline are this
// design's choices.
module elementwise_unit
  import pdswap_pkg::*;
#(
  parameter int unsigned MAX_ROWS = 4096
) (
  input  logic                clk,
  input  logic                rst_n,
  // residual load
  input  logic                res_we,
  input  logic [15:0]         res_addr,
  input  logic signed [15:0]  res_data,
  // scales, Q8.8
  input  logic [15:0]         act_scale,
  input  logic [15:0]         w_scale,
  // 0: y = residual + dequantised value; 1: y = SiLU(dequantised value)
  input  logic                op_silu,
  // with op_silu = 0: 1 multiplies by the stored row value (SwiGLU up pass)
  input  logic                op_mul,
  // input stream from the linear unit
  input  logic                in_valid,
  input  logic [15:0]         in_row,
  input  logic signed [31:0]  in_acc,
  // output stream
  output logic                out_valid,
  output logic [15:0]         out_row,
  output logic signed [15:0]  out_y
);
  localparam int unsigned RA = $clog2(MAX_ROWS);
  localparam logic signed [95:0] INV127 = 96'sd132104; // 2^24 / 127

  logic signed [15:0] res_mem [MAX_ROWS];
  logic signed [15:0] res_q;
  logic signed [63:0] prod;
  logic               s1_valid;
  logic [15:0]        s1_row;

  always_ff @(posedge clk) begin
    if (res_we) res_mem[RA'(res_addr)] <= res_data;
    if (in_valid) res_q <= res_mem[RA'(in_row)];
  end

  // sigmoid at x = (i - 128) / 16, i = 0..256, unsigned Q0.15
  typedef logic [15:0] sig_t [257];
  function automatic sig_t mk_sig();
    sig_t t;
    for (int i = 0; i < 257; i++)
      t[i] = 16'($rtoi(32768.0 / (1.0 + $exp(-(real'(i) - 128.0) / 16.0)) + 0.5));
    return t;
  endfunction
  localparam sig_t SIG = mk_sig();

  // SiLU(x) = x * sigmoid(x) for Q8.8 x: table over [-8, 8) with linear
  // interpolation between entries; x >= 8 passes, x <= -8 gives 0.
  function automatic logic signed [15:0] silu(input logic signed [15:0] x);
    int unsigned i;
    logic signed [31:0] sg, p;
    if (x >= 16'sd2048)  return x;
    if (x <= -16'sd2048) return '0;
    i  = unsigned'(int'(x) + 2048) >> 4;
    sg = 32'(SIG[i]) + ((32'(32'(SIG[i + 1]) - 32'(SIG[i])) * 32'(x[3:0])) >>> 4);
    p  = (32'(x) * sg + 32'sd16384) >>> 15;
    return p[15:0];
  endfunction

  logic signed [95:0] deq;
  logic signed [15:0] deq16;
  logic signed [31:0] mulp;
  assign deq16 = sat16(80'(deq));
  assign mulp  = (32'(deq16) * 32'(res_q) + 32'sd128) >>> 8;
  assign deq = (96'(prod) * INV127 + 96'sd2147483648) >>> 32;  // Q.40 -> Q.8, rounded

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_row <= '0; prod <= '0;
      out_valid <= 1'b0; out_row <= '0; out_y <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_row <= in_row;
        prod   <= 64'(in_acc) * $signed({48'd0, act_scale}) * $signed({48'd0, w_scale}); // Q.16
      end
      out_valid <= s1_valid;
      if (s1_valid) begin
        out_row <= s1_row;
        out_y   <= op_silu ? silu(deq16) : op_mul ? sat16(80'(mulp)) : sat16(80'(deq) + 80'(res_q));
      end
    end
  end
endmodule
