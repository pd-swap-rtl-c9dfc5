// rope_unit: rotary position embedding of query/key pairs.
//
// What it does: for head dimension HD, the element pair (x0, x1) with pair
// index i (0 .. HD/2-1) of the token at position pos is rotated by the angle
//   theta = pos * BASE^(-2i/HD)
// giving y0 = x0 cos(theta) - x1 sin(theta), y1 = x0 sin(theta) + x1 cos(theta).
// Values are Q8.8.
//
// How: the angle is kept in turns (1.0 = 2*pi) as a 32-bit fraction, so the
// reduction modulo 2*pi is the natural wrap of the product
// pos * FREQ[i], where FREQ[i] = BASE^(-2i/HD) / (2*pi) * 2^32 is a table
// computed at elaboration. The half-turn is removed by negating the pair,
// and a 16-step CORDIC rotation, unrolled, does the rest on 28-bit values
// (8 guard bits); the CORDIC gain is removed by one multiply at the end.
// Error is within 2 LSB of Q8.8 for inputs of magnitude below 64.
//
// Interface and timing: a valid-only stream; one pair per clock in
// (in_valid, in_pos, in_idx, in_x0, in_x1) and the rotated pair out
// (out_valid, out_idx, out_y0, out_y1) two clocks later.
//
// Source versus own choices: the architecture lists RoPE among the static
// region's element-wise operators and gives no datapath. The rotation over
// adjacent element pairs with base 10000 is the common LLaMA/BitNet
// convention; the turn-based angle, the CORDIC and its sizes are this
// design's choices.
module rope_unit #(
  parameter int unsigned HD   = 96,     // head dimension
  parameter int unsigned BASE = 10000
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [15:0]         in_pos,
  input  logic [$clog2(HD/2)-1:0] in_idx,
  input  logic signed [15:0]  in_x0,
  input  logic signed [15:0]  in_x1,
  output logic                out_valid,
  output logic [$clog2(HD/2)-1:0] out_idx,
  output logic signed [15:0]  out_y0,
  output logic signed [15:0]  out_y1
);
  localparam int unsigned NP = HD / 2;
  localparam int unsigned IW = $clog2(NP);
  localparam int unsigned NIT = 16;

  typedef logic [31:0] freq_t [NP];
  function automatic freq_t mk_freq();
    freq_t t;
    for (int i = 0; i < NP; i++)
      t[i] = 32'($rtoi($pow(real'(BASE), -2.0 * real'(i) / real'(HD)) / (2.0 * 3.141592653589793)
                      * 4294967296.0 + 0.5));
    return t;
  endfunction
  localparam freq_t FREQ = mk_freq();

  // atan(2^-k) in turns, Q0.32
  typedef logic [31:0] atan_t [NIT];
  function automatic atan_t mk_atan();
    atan_t t;
    for (int k = 0; k < NIT; k++)
      t[k] = 32'($rtoi($atan($pow(2.0, -real'(k))) / (2.0 * 3.141592653589793) * 4294967296.0 + 0.5));
    return t;
  endfunction
  localparam atan_t ATAN = mk_atan();
  localparam logic signed [47:0] KINV = 48'sd39797;  // 1/1.64676 in Q0.16

  // stage 1: angle
  logic               s1_valid;
  logic [IW-1:0]      s1_idx;
  logic signed [15:0] s1_x0, s1_x1;
  logic [31:0]        s1_turn;

  // stage 2: rotation (combinational from stage-1 registers)
  logic signed [27:0] x, y, xn, yn;
  logic signed [32:0] z;
  logic signed [47:0] r0, r1;
  always_comb begin
    logic [31:0] t;
    t = s1_turn;
    x = 28'(s1_x0) <<< 8;
    y = 28'(s1_x1) <<< 8;
    // bring the angle into [-1/4, 1/4) turn
    if (t[31] != t[30]) begin
      x = -x; y = -y;
      t = t + 32'h8000_0000;
    end
    z = 33'($signed(t));
    for (int k = 0; k < NIT; k++) begin
      if (z >= 0) begin
        xn = x - (y >>> k);
        yn = y + (x >>> k);
        z  = z - 33'(ATAN[k]);
      end else begin
        xn = x + (y >>> k);
        yn = y - (x >>> k);
        z  = z + 33'(ATAN[k]);
      end
      x = xn; y = yn;
    end
    r0 = (48'(x) * KINV + 48'sd8388608) >>> 24;   // Q.16 * Q0.16 -> Q8.8
    r1 = (48'(y) * KINV + 48'sd8388608) >>> 24;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_idx <= '0; s1_x0 <= '0; s1_x1 <= '0; s1_turn <= '0;
      out_valid <= 1'b0; out_idx <= '0; out_y0 <= '0; out_y1 <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_idx  <= in_idx;
        s1_x0   <= in_x0;
        s1_x1   <= in_x1;
        s1_turn <= 32'(48'(in_pos) * 48'(FREQ[in_idx]));
      end
      out_valid <= s1_valid;
      if (s1_valid) begin
        out_idx <= s1_idx;
        out_y0  <= (r0 > 48'sd32767) ? 16'sh7fff : (r0 < -48'sd32768) ? 16'sh8000 : r0[15:0];
        out_y1  <= (r1 > 48'sd32767) ? 16'sh7fff : (r1 < -48'sd32768) ? 16'sh8000 : r1[15:0];
      end
    end
  end
endmodule
