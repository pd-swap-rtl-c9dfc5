// prefill_attention: causal multi-head attention for a whole prompt, the
// prefill reconfigurable module of the dynamic region.
//
// NPE processing elements (prefill_pe) each keep one query resident. Queries
// are taken in groups of NPE from the end of the prompt (reverse schedule):
// for a group whose top token is t0, the module walks the key/value rows from
// j = t0 down to j = 0. Row j first brings query j into PE t0-j while that PE
// is still empty, then key j, then value j. Every row is broadcast to all PEs,
// and a PE holding query i computes only while j <= i, so no masked score is
// computed and no masked row is fetched. With NPE = 4 a prompt of N tokens
// takes N(N+4)/8 key (and value) row fetches in all, as in the published
// schedule. After row 0 each PE divides by its softmax sum and the results
// leave through an output FIFO as beats tagged with token and beat index.
//
// Per row: Q (when loading) D/EPB beats, K D/EPB beats, NHEAD clocks of
// online-softmax update, V D/EPB beats. Rows are requested one at a time with
// rq_valid/rq_ready (kind Q, K or V plus token index); the data returns on
// the q_*, k_* or v_* beat stream, each a valid/ready handshake.
// When a run with layer == n_layers-1 finishes, last_layer_done pulses with
// done: this is the hook the swap controller uses to start reconfiguration
// while the static region still computes the rest of the last layer.
// Reverse order, Q reuse across PEs, online rescaling and the final-layer
// signal follow the architecture; the strictly sequential Q/K/softmax/V
// phases of a row and the fixed-point formats are this implementation's.
module prefill_attention
  import pdswap_pkg::*;
#(
  parameter int unsigned NPE   = 4,
  parameter int unsigned D     = 1536,
  parameter int unsigned NHEAD = 16,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned BPR  = D / EPB,
  localparam int unsigned BW   = $clog2(BPR),
  localparam int unsigned HW   = (NHEAD > 1) ? $clog2(NHEAD) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   n_tok,
  input  logic [7:0]    layer,
  input  logic [7:0]    n_layers,
  output logic          busy,
  output logic          done,
  output logic          last_layer_done,
  // row requests
  output logic          rq_valid,
  input  logic          rq_ready,
  output row_kind_e     rq_kind,
  output logic [15:0]   rq_tok,
  // row data
  input  logic          q_valid,
  output logic          q_ready,
  input  beat_t         q_data,
  input  logic          k_valid,
  output logic          k_ready,
  input  beat_t         k_data,
  input  logic          v_valid,
  output logic          v_ready,
  input  beat_t         v_data,
  // output FIFO
  output logic          out_valid,
  input  logic          out_ready,
  output logic [15:0]   out_tok,
  output logic [BW-1:0] out_beat,
  output beat_t         out_data,
  // statistics
  output logic [31:0]   kv_rows
);
  typedef enum logic [3:0] {
    S_IDLE, S_GRP, S_QREQ, S_QRX, S_KREQ, S_KRX, S_SM, S_VREQ, S_VRX,
    S_NEXT, S_FIN, S_FINW, S_OUT, S_DONE
  } state_e;
  state_e state;

  logic [15:0] t0, j;
  logic [BW-1:0] bc;
  logic [HW-1:0] hc;
  logic [(NPE > 1 ? $clog2(NPE) : 1)-1:0] op;  // PE being emptied in S_OUT
  logic [7:0] layer_r, nl_r;

  logic [NPE-1:0] pe_valid, pe_active, pe_fin_done;
  beat_t          pe_rd [NPE];
  logic           grp_clear, fin_start;

  // PE p holds query t0-p; it computes for row j while t0-p >= j.
  always_comb
    for (int p = 0; p < NPE; p++) begin
      pe_valid[p]  = (32'(p) <= 32'(t0));
      pe_active[p] = (32'(p) <= 32'(t0) - 32'(j));
    end

  logic fifo_in_ready, fifo_push;
  assign fifo_push = (state == S_OUT);

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    prefill_pe #(.D(D), .NHEAD(NHEAD)) u_pe (
      .clk, .rst_n,
      .clear    (grp_clear),
      .q_we     (state == S_QRX && q_valid && (32'(t0) - 32'(j) == 32'(p))),
      .k_en     (state == S_KRX && k_valid && pe_active[p]),
      .v_en     (state == S_VRX && v_valid && pe_active[p]),
      .beat_idx (bc),
      .beat_data(state == S_QRX ? q_data : (state == S_KRX ? k_data : v_data)),
      .sm_en    (state == S_SM && pe_active[p]),
      .sm_head  (hc),
      .fin_start(fin_start && pe_valid[p]),
      .fin_done (pe_fin_done[p]),
      .rd_beat  (bc),
      .rd_data  (pe_rd[p]));
  end

  assign grp_clear = (state == S_GRP);
  assign fin_start = (state == S_FIN);
  assign busy      = (state != S_IDLE);
  assign q_ready   = (state == S_QRX);
  assign k_ready   = (state == S_KRX);
  assign v_ready   = (state == S_VRX);
  assign rq_valid  = (state == S_QREQ) || (state == S_KREQ) || (state == S_VREQ);
  assign rq_kind   = (state == S_QREQ) ? ROW_Q : (state == S_KREQ) ? ROW_K : ROW_V;
  assign rq_tok    = j;

  sync_fifo #(.W(16 + BW + BEAT_W), .DEPTH(FIFO_DEPTH)) u_ofifo (
    .clk, .rst_n,
    .in_valid (fifo_push),
    .in_ready (fifo_in_ready),
    .in_data  ({16'(32'(t0) - 32'(op)), bc, pe_rd[op]}),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .out_data ({out_tok, out_beat, out_data}));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; t0 <= '0; j <= '0; bc <= '0; hc <= '0; op <= '0;
      layer_r <= '0; nl_r <= '0; done <= 1'b0; last_layer_done <= 1'b0;
      kv_rows <= '0;
    end else begin
      done <= 1'b0;
      last_layer_done <= 1'b0;
      case (state)
        S_IDLE: if (start && n_tok != 0) begin
          t0 <= n_tok - 1'b1; layer_r <= layer; nl_r <= n_layers;
          kv_rows <= '0;
          state <= S_GRP;
        end
        S_GRP: begin j <= t0; state <= S_QREQ; end
        S_QREQ: if (rq_ready) begin bc <= '0; state <= S_QRX; end
        S_QRX: if (q_valid) begin
          bc <= bc + 1'b1;
          if (bc == BW'(BPR - 1)) begin bc <= '0; state <= S_KREQ; end
        end
        S_KREQ: if (rq_ready) begin bc <= '0; kv_rows <= kv_rows + 1; state <= S_KRX; end
        S_KRX: if (k_valid) begin
          bc <= bc + 1'b1;
          if (bc == BW'(BPR - 1)) begin bc <= '0; hc <= '0; state <= S_SM; end
        end
        S_SM: begin
          hc <= hc + 1'b1;
          if (hc == HW'(NHEAD - 1)) state <= S_VREQ;
        end
        S_VREQ: if (rq_ready) begin bc <= '0; state <= S_VRX; end
        S_VRX: if (v_valid) begin
          bc <= bc + 1'b1;
          if (bc == BW'(BPR - 1)) begin bc <= '0; state <= S_NEXT; end
        end
        S_NEXT: begin
          if (j == 0) state <= S_FIN;
          else begin
            j <= j - 1'b1;
            state <= (32'(t0) - 32'(j) + 1 < NPE) ? S_QREQ : S_KREQ;
          end
        end
        S_FIN:  state <= S_FINW;
        S_FINW: if (pe_fin_done[0]) begin op <= '0; bc <= '0; state <= S_OUT; end
        S_OUT: if (fifo_in_ready) begin
          bc <= bc + 1'b1;
          if (bc == BW'(BPR - 1)) begin
            bc <= '0;
            if (32'(op) == 32'(NPE - 1) || 32'(op) == 32'(t0)) begin
              if (32'(t0) < NPE) state <= S_DONE;
              else begin t0 <= t0 - 16'(NPE); state <= S_GRP; end
            end else op <= op + 1'b1;
          end
        end
        S_DONE: if (!out_valid) begin
          done <= 1'b1;
          last_layer_done <= (layer_r == nl_r - 1'b1);
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_rq_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rq_valid && !rq_ready |=> rq_valid && $stable(rq_kind) && $stable(rq_tok));
endmodule
