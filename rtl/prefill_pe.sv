// prefill_pe: one processing element of the prefill attention module.
//
// A PE keeps one query token resident and consumes the K and V rows that the
// module broadcasts to all PEs (the Q reuse of the reverse schedule). It holds
// the query (D elements), a head-wise MAC accumulator per head, the
// flash-attention running maximum m and sum l per head, and the output
// accumulator O (D elements):
//   k beat : dot[h] += q . k over the beat's EPB elements (h = beat's head)
//   sm step: s = dot[h]/sqrt(dh); m' = max(m, s); a = e^(m-m'); p = e^(s-m');
//            l = a*l + p; keep a and p for the V row; dot[h] = 0
//   v beat : O[i] = a[h]*O[i] + p[h]*v[i]
//   finish : recip[h] = 2^32 / l[h] by a sequential divider, one head after
//            another (NHEAD*34 clocks), then out[i] = O[i]*recip[h] >> 32.
// These are the architecture's rescale-and-accumulate equations with a block
// of one key; the fixed-point formats (Q8.8 data, Q.16 scores, Q1.15
// probabilities, Q.23 accumulators) are this implementation's choice.
// All inputs act on the rising clock edge; `rd_data` is combinational in
// `rd_beat` once `fin_done` has pulsed.
module prefill_pe
  import pdswap_pkg::*;
#(
  parameter int unsigned D     = 1536,
  parameter int unsigned NHEAD = 16,
  localparam int unsigned HD   = D / NHEAD,
  localparam int unsigned BPR  = D / EPB,
  localparam int unsigned BPH  = HD / EPB,
  localparam int unsigned BW   = $clog2(BPR),
  localparam int unsigned HW   = (NHEAD > 1) ? $clog2(NHEAD) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          q_we,
  input  logic          k_en,
  input  logic          v_en,
  input  logic [BW-1:0] beat_idx,
  input  beat_t         beat_data,
  input  logic          sm_en,
  input  logic [HW-1:0] sm_head,
  input  logic          fin_start,
  output logic          fin_done,
  input  logic [BW-1:0] rd_beat,
  output beat_t         rd_data
);
  // 1/sqrt(head dim) in Q0.16
  localparam int unsigned SCALE = int'(65536.0 / $sqrt(real'(HD)));

  logic signed [ELEM_W-1:0]  q    [D];
  logic signed [OACC_W-1:0]  o    [D];
  logic signed [SCORE_W-1:0] dot  [NHEAD];
  logic signed [SCORE_W-1:0] m    [NHEAD];
  logic        [31:0]        l    [NHEAD];
  logic        [PROB_W-1:0]  a_r  [NHEAD];
  logic        [PROB_W-1:0]  p_r  [NHEAD];
  logic        [17:0]        rcp  [NHEAD];

  logic [HW-1:0] bh;           // head of the current beat
  assign bh = HW'(beat_idx / BW'(BPH));

  // head-wise MAC of one beat
  logic signed [SCORE_W-1:0] beat_dot;
  always_comb begin
    beat_dot = '0;
    for (int e = 0; e < EPB; e++)
      beat_dot += SCORE_W'($signed(q[beat_idx*EPB + e]) *
                           $signed(beat_data[e*ELEM_W +: ELEM_W]));
  end

  // online softmax step for head sm_head
  logic signed [SCORE_W-1:0] s_val, m_new;
  logic [PROB_W-1:0] a_val, p_val;
  logic [63:0] l_scaled;
  always_comb begin
    // dot is Q.16 (Q8.8 * Q8.8); scale by 1/sqrt(dh)
    s_val    = SCORE_W'((80'(dot[sm_head]) * 80'(SCALE)) >>> 16);
    m_new    = (s_val > m[sm_head]) ? s_val : m[sm_head];
    a_val    = exp_neg(m[sm_head] - m_new);
    p_val    = exp_neg(s_val - m_new);
    l_scaled = (64'(l[sm_head]) * 64'(a_val)) >> 15;
  end

  // divider for the final reciprocals
  logic          div_start, div_busy, div_done;
  logic [32:0]   div_quo;
  logic [HW:0]   fin_h;
  logic          fin_run;
  seq_div #(.NW(33), .DW(32)) u_div (
    .clk, .rst_n, .start(div_start), .num(33'h1_0000_0000), .den(l[fin_h[HW-1:0]]),
    .busy(div_busy), .done(div_done), .quo(div_quo));
  assign div_start = fin_run && !div_busy && !div_done;

  always_ff @(posedge clk) begin
    if (q_we)
      for (int e = 0; e < EPB; e++) q[beat_idx*EPB + e] <= beat_data[e*ELEM_W +: ELEM_W];
    if (clear) begin
      for (int i = 0; i < D; i++) o[i] <= '0;
    end else if (v_en) begin
      for (int e = 0; e < EPB; e++) begin
        automatic logic signed [79:0] prod_o, prod_v;
        prod_o = 80'(o[beat_idx*EPB + e]) * $signed({1'b0, a_r[bh]});
        prod_v = 80'($signed(beat_data[e*ELEM_W +: ELEM_W])) * $signed({1'b0, p_r[bh]});
        o[beat_idx*EPB + e] <= OACC_W'((prod_o >>> 15) + prod_v);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < NHEAD; h++) begin
        dot[h] <= '0; m[h] <= SCORE_NEG_INF; l[h] <= '0;
        a_r[h] <= '0; p_r[h] <= '0; rcp[h] <= '0;
      end
      fin_h <= '0; fin_run <= 1'b0; fin_done <= 1'b0;
    end else begin
      fin_done <= 1'b0;
      if (clear) begin
        for (int h = 0; h < NHEAD; h++) begin
          dot[h] <= '0; m[h] <= SCORE_NEG_INF; l[h] <= '0;
        end
      end else begin
        if (k_en) dot[bh] <= dot[bh] + beat_dot;
        if (sm_en) begin
          m[sm_head]   <= m_new;
          l[sm_head]   <= 32'(l_scaled) + 32'(p_val);
          a_r[sm_head] <= a_val;
          p_r[sm_head] <= p_val;
          dot[sm_head] <= '0;
        end
      end
      if (fin_start) begin
        fin_run <= 1'b1;
        fin_h   <= '0;
      end else if (fin_run && div_done) begin
        rcp[fin_h[HW-1:0]] <= 18'(div_quo);
        if (fin_h == (HW+1)'(NHEAD - 1)) begin
          fin_run  <= 1'b0;
          fin_done <= 1'b1;
        end else fin_h <= fin_h + 1'b1;
      end
    end
  end

  // output beat: O * (2^32 / l) >> 32 gives Q8.8
  logic [HW-1:0] rh;
  assign rh = HW'(rd_beat / BW'(BPH));
  always_comb begin
    for (int e = 0; e < EPB; e++) begin
      automatic logic signed [79:0] prod;
      prod = 80'(o[rd_beat*EPB + e]) * $signed({1'b0, rcp[rh]});
      rd_data[e*ELEM_W +: ELEM_W] = sat16(prod >>> 32);
    end
  end
endmodule
