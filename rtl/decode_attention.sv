// decode_attention: single-query attention over the KV cache, the decode
// reconfigurable module of the dynamic region.
//
// One generated token's query attends to ctx_len cached keys and values. The
// module is built around memory bandwidth: K rows arrive on two HP ports at
// once and V rows on the other two, each port carrying one half of the row
// (lane 0 the first NHEAD/2 heads, lane 1 the rest), so two beats are consumed
// per clock. The steps are:
//   1. Q: the query row is read once into an on-chip buffer (the port
//      router lends one port for this "Q bypass").
//   2. K pass, for each cached token j: head-wise MAC of q with k_j on both
//      lanes, then NHEAD clocks of online softmax: the score s_j,h is pushed
//      into the score buffer (the attention-score stream) and the running
//      maximum m_h and sum l_h are updated, l = l*e^(m-m') + e^(s-m').
//   3. V pass, for each j: p = e^(s_j,h - m_h) from the score buffer, and
//      O += p * v_j on both lanes.
//   4. One reciprocal 2^32/l_h per head (sequential divider), then the output
//      row, O/l in Q8.8, leaves as D/EPB beats. It is held on chip until all
//      KV traffic is over, so the write-back never competes with KV reads.
// Row requests use rq_valid/rq_ready (kind, token); beats use valid/ready.
// The two-port K and V mapping, the Q bypass, the late write-back, the
// score stream and the online softmax follow the architecture; the two
// separate passes over K and V, the fixed-point formats and the
// one-request-at-a-time sequencing are this implementation's choices.
module decode_attention
  import pdswap_pkg::*;
#(
  parameter int unsigned D       = 1536,
  parameter int unsigned NHEAD   = 16,
  parameter int unsigned MAX_CTX = 4096,
  localparam int unsigned HD   = D / NHEAD,
  localparam int unsigned BPR  = D / EPB,
  localparam int unsigned HALF = BPR / 2,
  localparam int unsigned BPH  = HD / EPB,
  localparam int unsigned BW   = $clog2(BPR),
  localparam int unsigned HW   = (NHEAD > 1) ? $clog2(NHEAD) : 1,
  localparam int unsigned SA   = $clog2(MAX_CTX * NHEAD)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   ctx_len,
  output logic          busy,
  output logic          done,
  output logic          rq_valid,
  input  logic          rq_ready,
  output row_kind_e     rq_kind,
  output logic [15:0]   rq_tok,
  input  logic          q_valid,
  output logic          q_ready,
  input  beat_t         q_data,
  input  logic [1:0]    k_valid,
  output logic [1:0]    k_ready,
  input  beat_t         k_data [2],
  input  logic [1:0]    v_valid,
  output logic [1:0]    v_ready,
  input  beat_t         v_data [2],
  output logic          out_valid,
  input  logic          out_ready,
  output logic [BW-1:0] out_beat,
  output beat_t         out_data,
  output logic [31:0]   kv_rows
);
  localparam int unsigned SCALE = int'(65536.0 / $sqrt(real'(HD)));

  typedef enum logic [3:0] {
    S_IDLE, S_QREQ, S_QRX, S_KREQ, S_KRX, S_SM, S_VREQ, S_VRX, S_FIN, S_OUT
  } state_e;
  state_e state;

  logic signed [ELEM_W-1:0]  q     [D];
  logic signed [OACC_W-1:0]  o     [D];
  logic signed [SCORE_W-1:0] dot   [NHEAD];
  logic signed [SCORE_W-1:0] m     [NHEAD];
  logic        [31:0]        l     [NHEAD];
  logic        [17:0]        rcp   [NHEAD];
  logic signed [SCORE_W-1:0] score [MAX_CTX * NHEAD];

  logic [15:0]   j, len_r;
  logic [BW-1:0] bc;                 // Q beat / output beat counter
  logic [BW-1:0] lc [2];             // per-lane beat counter
  logic [1:0]    ldone;
  logic [HW-1:0] hc;

  assign busy     = (state != S_IDLE);
  assign q_ready  = (state == S_QRX);
  assign rq_valid = (state == S_QREQ) || (state == S_KREQ) || (state == S_VREQ);
  assign rq_kind  = (state == S_QREQ) ? ROW_Q : (state == S_KREQ) ? ROW_K : ROW_V;
  assign rq_tok   = (state == S_QREQ) ? len_r - 1'b1 : j;
  always_comb
    for (int L = 0; L < 2; L++) begin
      k_ready[L] = (state == S_KRX) && !ldone[L];
      v_ready[L] = (state == S_VRX) && !ldone[L];
    end

  // per-lane global beat index and head
  logic [BW-1:0] gb [2];
  logic [HW-1:0] gh [2];
  always_comb
    for (int L = 0; L < 2; L++) begin
      gb[L] = BW'(L * HALF) + lc[L];
      gh[L] = HW'(gb[L] / BW'(BPH));
    end

  // head-wise MAC, one per lane
  logic signed [SCORE_W-1:0] lane_dot [2];
  always_comb
    for (int L = 0; L < 2; L++) begin
      lane_dot[L] = '0;
      for (int e = 0; e < EPB; e++)
        lane_dot[L] += SCORE_W'($signed(q[gb[L]*EPB + e]) *
                                $signed(k_data[L][e*ELEM_W +: ELEM_W]));
    end

  // probabilities for the V pass
  logic [PROB_W-1:0] lane_p [2];
  always_comb
    for (int L = 0; L < 2; L++)
      lane_p[L] = exp_neg(score[SA'(32'(j) * NHEAD + 32'(gh[L]))] - m[gh[L]]);

  // online softmax step
  logic signed [SCORE_W-1:0] s_val, m_new;
  logic [PROB_W-1:0] a_val, p_val;
  logic [63:0] l_scaled;
  always_comb begin
    s_val    = SCORE_W'((80'(dot[hc]) * 80'(SCALE)) >>> 16);
    m_new    = (s_val > m[hc]) ? s_val : m[hc];
    a_val    = exp_neg(m[hc] - m_new);
    p_val    = exp_neg(s_val - m_new);
    l_scaled = (64'(l[hc]) * 64'(a_val)) >> 15;
  end

  // reciprocal of the softmax sums
  logic        div_start, div_busy, div_done, fin_run;
  logic [32:0] div_quo;
  seq_div #(.NW(33), .DW(32)) u_div (
    .clk, .rst_n, .start(div_start), .num(33'h1_0000_0000), .den(l[hc]),
    .busy(div_busy), .done(div_done), .quo(div_quo));
  assign div_start = (state == S_FIN) && fin_run && !div_busy && !div_done;

  // output beat
  always_comb begin
    for (int e = 0; e < EPB; e++) begin
      automatic logic signed [79:0] prod;
      prod = 80'(o[bc*EPB + e]) * $signed({1'b0, rcp[HW'(bc / BW'(BPH))]});
      out_data[e*ELEM_W +: ELEM_W] = sat16(prod >>> 32);
    end
  end
  assign out_valid = (state == S_OUT);
  assign out_beat  = bc;

  // data arrays
  always_ff @(posedge clk) begin
    if (state == S_QRX && q_valid)
      for (int e = 0; e < EPB; e++) q[bc*EPB + e] <= q_data[e*ELEM_W +: ELEM_W];
    if (state == S_SM)
      score[SA'(32'(j) * NHEAD + 32'(hc))] <= s_val;
    if (state == S_QREQ)
      for (int i = 0; i < D; i++) o[i] <= '0;
    else if (state == S_VRX)
      for (int L = 0; L < 2; L++)
        if (v_valid[L] && !ldone[L])
          for (int e = 0; e < EPB; e++) begin
            automatic logic signed [79:0] pv;
            pv = 80'($signed(v_data[L][e*ELEM_W +: ELEM_W])) * $signed({1'b0, lane_p[L]});
            o[gb[L]*EPB + e] <= o[gb[L]*EPB + e] + OACC_W'(pv);
          end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; j <= '0; len_r <= '0; bc <= '0; hc <= '0;
      lc[0] <= '0; lc[1] <= '0; ldone <= '0; done <= 1'b0; fin_run <= 1'b0;
      kv_rows <= '0;
      for (int h = 0; h < NHEAD; h++) begin
        dot[h] <= '0; m[h] <= SCORE_NEG_INF; l[h] <= '0; rcp[h] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start && ctx_len != 0) begin
          len_r <= ctx_len; kv_rows <= '0;
          state <= S_QREQ;
        end
        S_QREQ: if (rq_ready) begin
          bc <= '0; j <= '0;
          for (int h = 0; h < NHEAD; h++) begin
            dot[h] <= '0; m[h] <= SCORE_NEG_INF; l[h] <= '0;
          end
          state <= S_QRX;
        end
        S_QRX: if (q_valid) begin
          bc <= bc + 1'b1;
          if (bc == BW'(BPR - 1)) begin bc <= '0; state <= S_KREQ; end
        end
        S_KREQ, S_VREQ: if (rq_ready) begin
          lc[0] <= '0; lc[1] <= '0; ldone <= '0;
          kv_rows <= kv_rows + 1;
          state <= (state == S_KREQ) ? S_KRX : S_VRX;
        end
        S_KRX, S_VRX: begin
          for (int L = 0; L < 2; L++)
            if ((state == S_KRX ? k_valid[L] : v_valid[L]) && !ldone[L]) begin
              if (state == S_KRX) dot[gh[L]] <= dot[gh[L]] + lane_dot[L];
              lc[L] <= lc[L] + 1'b1;
              if (lc[L] == BW'(HALF - 1)) ldone[L] <= 1'b1;
            end
          if (&ldone) begin
            if (state == S_KRX) begin hc <= '0; state <= S_SM; end
            else if (j == len_r - 1'b1) begin
              hc <= '0; fin_run <= 1'b1; state <= S_FIN;
            end else begin j <= j + 1'b1; state <= S_VREQ; end
          end
        end
        S_SM: begin
          m[hc]   <= m_new;
          l[hc]   <= 32'(l_scaled) + 32'(p_val);
          dot[hc] <= '0;
          hc      <= hc + 1'b1;
          if (hc == HW'(NHEAD - 1)) begin
            if (j == len_r - 1'b1) begin j <= '0; state <= S_VREQ; end
            else begin j <= j + 1'b1; state <= S_KREQ; end
          end
        end
        S_FIN: if (div_done) begin
          rcp[hc] <= 18'(div_quo);
          hc <= hc + 1'b1;
          if (hc == HW'(NHEAD - 1)) begin fin_run <= 1'b0; bc <= '0; state <= S_OUT; end
        end
        S_OUT: if (out_ready) begin
          bc <= bc + 1'b1;
          if (bc == BW'(BPR - 1)) begin done <= 1'b1; state <= S_IDLE; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_rq_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rq_valid && !rq_ready |=> rq_valid && $stable(rq_kind) && $stable(rq_tok));
endmodule
