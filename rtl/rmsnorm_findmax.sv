// rmsnorm_findmax: RMSNorm, find-max and int8 quantisation of one token
// vector, the static-region unit that feeds the table-lookup linear layers.
//
//   y_i = x_i * gamma_i / sqrt(mean(x^2) + eps),  M = max_i |y_i|,
//   q_i = round(127 * y_i / M)   (int8, the activation of the next linear)
// The unit works in three passes over an internal buffer of D elements:
//   1. accept D (x, gamma) pairs, one per clock, accumulating sum x^2;
//   2. mean by a sequential divider, square root (seq_isqrt), reciprocal
//      1/rms; then compute and store every y_i and track M (one per clock);
//   3. reciprocal 127/M, then emit (y_i, q_i) one per clock on a valid-only
//      stream; `absmax` (M) is the scale the downstream dequantisation needs.
// Data are Q8.8, eps is one least significant bit of the mean square; the
// square root is taken with 16 fraction bits so 1/rms is accurate to ~0.01 %.
// The architecture names this unit ("RMSNorm & Find Max") and its place in
// the layer; the pass structure, formats and arithmetic are this
// implementation's. The absmax int8 scheme is that of BitNet b1.58 models.
module rmsnorm_findmax
  import pdswap_pkg::*;
#(
  parameter int unsigned D = 1536,
  localparam int unsigned AW = $clog2(D)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [15:0] in_x,
  input  logic signed [15:0] in_gamma,
  output logic               out_valid,
  output logic [AW-1:0]      out_idx,
  output logic signed [15:0] out_y,
  output logic signed [7:0]  out_q,
  output logic [15:0]        absmax
);
  typedef enum logic [3:0] {
    S_IDLE, S_IN, S_MEAN, S_MEANW, S_SQRT, S_SQRTW, S_RCP, S_RCPW,
    S_NORM, S_QRCP, S_QRCPW, S_OUT
  } state_e;
  state_e state;

  logic signed [15:0] xb [D];
  logic signed [15:0] gb [D];
  logic signed [15:0] yb [D];
  logic [AW-1:0] idx;
  logic [47:0]   sumsq, ms;
  logic [23:0]   rms;       // rms in Q.16
  logic [31:0]   inv_rms;   // 1/rms in Q.16
  logic [31:0]   inv_q;     // 127/M in Q.16

  // shared divider
  logic        div_start, div_busy, div_done;
  logic [47:0] div_num, div_quo;
  logic [31:0] div_den;
  seq_div #(.NW(48), .DW(32)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo));

  logic        sq_start, sq_busy, sq_done;
  logic [23:0] sq_root;
  seq_isqrt #(.W(48)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .rad(ms), .busy(sq_busy), .done(sq_done), .root(sq_root));

  always_comb begin
    div_start = (state == S_MEAN) || (state == S_RCP) || (state == S_QRCP);
    unique case (state)
      S_MEAN:  begin div_num = sumsq;                   div_den = 32'(D); end
      S_RCP:   begin div_num = 48'h1_0000_0000;           div_den = (rms == 0) ? 32'd1 : 32'(rms); end
      default: begin div_num = 48'(127) << 24;          div_den = (absmax == 0) ? 32'd1 : 32'(absmax); end
    endcase
    sq_start = (state == S_SQRT);
  end

  // normalisation of element idx
  logic signed [31:0] xg;
  logic signed [63:0] yn;
  logic signed [15:0] y_new;
  logic [15:0]        y_abs;
  always_comb begin
    xg    = 32'(xb[idx]) * 32'(gb[idx]);          // Q16.16
    yn    = (64'(xg) * $signed({1'b0, inv_rms})) >>> 24; // Q8.8
    y_new = sat16(80'(yn));
    y_abs = y_new[15] ? 16'(-y_new) : 16'(y_new);
  end

  // quantisation of element idx
  logic signed [63:0] qv;
  always_comb begin
    qv = 64'(yb[idx]) * $signed({1'b0, inv_q});    // Q8.8 * Q.16 -> Q.24
    qv = (qv + 64'sd8388608) >>> 24;               // round half up
    if (qv > 127)       out_q = 8'sd127;
    else if (qv < -127) out_q = -8'sd127;
    else                out_q = 8'(qv);
  end

  assign busy     = (state != S_IDLE);
  assign in_ready = (state == S_IN);
  assign out_valid = (state == S_OUT);
  assign out_idx  = idx;
  assign out_y    = yb[idx];

  always_ff @(posedge clk) begin
    if (state == S_IN && in_valid) begin
      xb[idx] <= in_x;
      gb[idx] <= in_gamma;
    end
    if (state == S_NORM) yb[idx] <= y_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; idx <= '0; sumsq <= '0; ms <= '0; rms <= '0;
      inv_rms <= '0; inv_q <= '0; absmax <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin idx <= '0; sumsq <= '0; absmax <= '0; state <= S_IN; end
        S_IN: if (in_valid) begin
          sumsq <= sumsq + 48'(32'(in_x) * 32'(in_x));
          idx   <= idx + 1'b1;
          if (idx == AW'(D - 1)) begin idx <= '0; state <= S_MEAN; end
        end
        S_MEAN:  state <= S_MEANW;
        S_MEANW: if (div_done) begin ms <= (div_quo + 48'd1) << 16; state <= S_SQRT; end
        S_SQRT:  state <= S_SQRTW;
        S_SQRTW: if (sq_done) begin rms <= sq_root; state <= S_RCP; end
        S_RCP:   state <= S_RCPW;
        S_RCPW:  if (div_done) begin inv_rms <= 32'(div_quo); state <= S_NORM; end
        S_NORM: begin
          if (y_abs > absmax) absmax <= y_abs;
          idx <= idx + 1'b1;
          if (idx == AW'(D - 1)) begin idx <= '0; state <= S_QRCP; end
        end
        S_QRCP:  state <= S_QRCPW;
        S_QRCPW: if (div_done) begin inv_q <= 32'(div_quo); state <= S_OUT; end
        S_OUT: begin
          idx <= idx + 1'b1;
          if (idx == AW'(D - 1)) begin idx <= '0; done <= 1'b1; state <= S_IDLE; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
