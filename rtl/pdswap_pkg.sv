// pdswap_pkg: types, constants and arithmetic helpers shared by the PD-Swap
// accelerator.
//
// Attention vectors (Q, K, V, outputs) and RMSNorm data are 16-bit signed
// fixed point with 8 fraction bits (Q8.8). The source architecture computes
// these in fp16; fixed point is this implementation's choice and keeps every
// unit small and bit-exact across simulators. Attention scores are kept in a
// wide Q.16 format, softmax probabilities in unsigned Q1.15.
//
// Memory traffic uses four HP ports of 128 bits, i.e. eight 16-bit elements
// per beat. A port is modelled with a simple burst protocol: a read request
// (byte address, number of beats) followed by that many read-data beats, and
// single-beat writes that carry their own address.
package pdswap_pkg;

  localparam int unsigned ELEM_W    = 16;   // Q8.8 element
  localparam int unsigned FRAC      = 8;
  localparam int unsigned BEAT_W    = 128;  // HP port data width
  localparam int unsigned EPB       = BEAT_W / ELEM_W;  // elements per beat
  localparam int unsigned SCORE_W   = 48;   // attention score, signed Q.16
  localparam int unsigned PROB_W    = 16;   // probability, unsigned Q1.15
  localparam int unsigned OACC_W    = 48;   // output accumulator, signed Q.23
  localparam int unsigned NUM_HP    = 4;

  typedef logic [BEAT_W-1:0] beat_t;

  // Kind of token row an attention module asks for.
  typedef enum logic [1:0] {
    ROW_Q = 2'd0,
    ROW_K = 2'd1,
    ROW_V = 2'd2
  } row_kind_e;

  // Which engine owns the HP ports.
  typedef enum logic [1:0] {
    MODE_LINEAR  = 2'd0,   // static region masters (weights, activations)
    MODE_PREFILL = 2'd1,   // prefill attention: Q, K, V, O one port each
    MODE_DECODE  = 2'd2    // decode attention: 2 ports K, 2 ports V
  } port_mode_e;

  // Reconfigurable module identifiers.
  typedef enum logic {
    RM_PREFILL = 1'b0,
    RM_DECODE  = 1'b1
  } rm_id_e;

  // One HP port, master side outputs.
  typedef struct packed {
    logic        ar_valid;
    logic [31:0] ar_addr;
    logic [15:0] ar_beats;
    logic        r_ready;
    logic        w_valid;
    logic [31:0] w_addr;
    beat_t       w_data;
  } hp_m2s_t;

  // One HP port, slave side outputs.
  typedef struct packed {
    logic  ar_ready;
    logic  r_valid;
    beat_t r_data;
    logic  w_ready;
  } hp_s2m_t;

  localparam logic signed [SCORE_W-1:0] SCORE_NEG_INF = -(48'sd1 <<< 44);

  // exp(x) for x <= 0, x in signed Q.16, result unsigned Q1.15 in [0, 1].
  // exp(x) = 2^(x*log2(e)); the integer part of the exponent becomes a right
  // shift, the fractional part f uses 2^f ~= 1 + f*(0.6565 + 0.3435*f),
  // which is exact at f = 0 and f = 1 and within 0.2 % in between.
  function automatic logic [PROB_W-1:0] exp_neg(input logic signed [SCORE_W-1:0] x);
    logic signed [SCORE_W+16-1:0] y;      // x*log2e, Q.16 after the shift
    logic signed [SCORE_W+16-1:0] ipart;
    logic [15:0] f;
    logic [31:0] t;
    logic [17:0] p2f;                      // 2^f in Q2.15
    int unsigned sh;
    if (x >= 0) return PROB_W'(32768);
    y     = (SCORE_W+16)'(x) * 64'sd23637;  // log2(e) in Q2.14
    y     = y >>> 14;
    ipart = y >>> 16;                        // floor, <= -1 or 0
    f     = y[15:0];
    // 0.6565 -> 21512 (Q0.15), 0.3435 -> 11256 (Q0.15)
    t     = 32'(21512) + ((32'(11256) * 32'(f)) >> 16);
    p2f   = 18'(32768) + 18'((32'(f) * t) >> 16);
    if (ipart < -17) return '0;
    sh = unsigned'(int'(-ipart));
    return PROB_W'(p2f >> sh);
  endfunction

  // Saturate a wide signed value to a Q8.8 element.
  function automatic logic signed [ELEM_W-1:0] sat16(input logic signed [79:0] v);
    if (v > 80'sd32767) return 16'sh7fff;
    if (v < -80'sd32768) return 16'sh8000;
    return v[ELEM_W-1:0];
  endfunction

endpackage
