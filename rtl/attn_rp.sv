// attn_rp: the dynamic region (reconfigurable partition) of PD-Swap.
//
// The attention subsystem is the only part of the accelerator that changes
// between the two phases of inference. In the device flow the partition holds
// exactly one of two reconfigurable modules at a time, the prefill attention
// or the decode attention, and a partial bitstream written through the
// configuration port replaces one by the other. Its port list is the fixed
// partition boundary both modules share.
//
// For simulation both modules are instantiated here. `loaded_rm` records
// which one the last completed partial load (cfg_load_valid with
// cfg_load_rm) put in place. The module that is not loaded is held in reset,
// so its state is lost exactly as after a real swap. While `decouple` is high
// (the loading window) every output of the partition is forced idle and
// every input handshake is masked, as the static side's decoupler does; the
// static region keeps running meanwhile.
// The partition boundary is this implementation's; the two-module partition
// and the decoupling during loading follow the architecture.
module attn_rp
  import pdswap_pkg::*;
#(
  parameter int unsigned NPE     = 4,
  parameter int unsigned D       = 1536,
  parameter int unsigned NHEAD   = 16,
  parameter int unsigned MAX_CTX = 4096,
  localparam int unsigned BPR = D / EPB,
  localparam int unsigned BW  = $clog2(BPR)
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration port (end of a partial bitstream load)
  input  logic          cfg_load_valid,
  input  rm_id_e        cfg_load_rm,
  input  logic          decouple,
  output rm_id_e        loaded_rm,
  // kernel control
  input  logic          start,
  input  logic [15:0]   n_tok,
  input  logic [7:0]    layer,
  input  logic [7:0]    n_layers,
  output logic          busy,
  output logic          done,
  output logic          last_layer_done,
  // memory side
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
  output logic [15:0]   out_tok,
  output logic [BW-1:0] out_beat,
  output beat_t         out_data,
  output logic [31:0]   kv_rows
);
  rm_id_e rm_r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              rm_r <= RM_PREFILL;
    else if (cfg_load_valid) rm_r <= cfg_load_rm;
  end
  assign loaded_rm = rm_r;

  logic pf_rst_n, dc_rst_n, pf_on, dc_on;
  assign pf_on    = (rm_r == RM_PREFILL) && !decouple;
  assign dc_on    = (rm_r == RM_DECODE)  && !decouple;
  assign pf_rst_n = rst_n && (rm_r == RM_PREFILL) && !(cfg_load_valid);
  assign dc_rst_n = rst_n && (rm_r == RM_DECODE)  && !(cfg_load_valid);

  // prefill module signals
  logic pf_busy, pf_done, pf_lld, pf_rq_valid, pf_q_ready, pf_k_ready, pf_v_ready;
  logic pf_out_valid;
  row_kind_e pf_rq_kind;
  logic [15:0] pf_rq_tok, pf_out_tok;
  logic [BW-1:0] pf_out_beat;
  beat_t pf_out_data;
  logic [31:0] pf_kv_rows;

  prefill_attention #(.NPE(NPE), .D(D), .NHEAD(NHEAD)) u_prefill (
    .clk, .rst_n(pf_rst_n),
    .start(start && pf_on), .n_tok, .layer, .n_layers,
    .busy(pf_busy), .done(pf_done), .last_layer_done(pf_lld),
    .rq_valid(pf_rq_valid), .rq_ready(rq_ready && pf_on), .rq_kind(pf_rq_kind), .rq_tok(pf_rq_tok),
    .q_valid(q_valid && pf_on), .q_ready(pf_q_ready), .q_data,
    .k_valid(k_valid[0] && pf_on), .k_ready(pf_k_ready), .k_data(k_data[0]),
    .v_valid(v_valid[0] && pf_on), .v_ready(pf_v_ready), .v_data(v_data[0]),
    .out_valid(pf_out_valid), .out_ready(out_ready && pf_on), .out_tok(pf_out_tok),
    .out_beat(pf_out_beat), .out_data(pf_out_data), .kv_rows(pf_kv_rows));

  // decode module signals
  logic dc_busy, dc_done, dc_rq_valid, dc_q_ready, dc_out_valid;
  logic [1:0] dc_k_ready, dc_v_ready;
  row_kind_e dc_rq_kind;
  logic [15:0] dc_rq_tok;
  logic [BW-1:0] dc_out_beat;
  beat_t dc_out_data;
  logic [31:0] dc_kv_rows;

  decode_attention #(.D(D), .NHEAD(NHEAD), .MAX_CTX(MAX_CTX)) u_decode (
    .clk, .rst_n(dc_rst_n),
    .start(start && dc_on), .ctx_len(n_tok),
    .busy(dc_busy), .done(dc_done),
    .rq_valid(dc_rq_valid), .rq_ready(rq_ready && dc_on), .rq_kind(dc_rq_kind), .rq_tok(dc_rq_tok),
    .q_valid(q_valid && dc_on), .q_ready(dc_q_ready), .q_data,
    .k_valid(k_valid & {2{dc_on}}), .k_ready(dc_k_ready), .k_data,
    .v_valid(v_valid & {2{dc_on}}), .v_ready(dc_v_ready), .v_data,
    .out_valid(dc_out_valid), .out_ready(out_ready && dc_on),
    .out_beat(dc_out_beat), .out_data(dc_out_data), .kv_rows(dc_kv_rows));

  always_comb begin
    busy = 1'b0; done = 1'b0; last_layer_done = 1'b0;
    rq_valid = 1'b0; rq_kind = ROW_Q; rq_tok = '0;
    q_ready = 1'b0; k_ready = '0; v_ready = '0;
    out_valid = 1'b0; out_tok = '0; out_beat = '0; out_data = '0; kv_rows = '0;
    if (pf_on) begin
      busy = pf_busy; done = pf_done; last_layer_done = pf_lld;
      rq_valid = pf_rq_valid; rq_kind = pf_rq_kind; rq_tok = pf_rq_tok;
      q_ready = pf_q_ready; k_ready = {1'b0, pf_k_ready}; v_ready = {1'b0, pf_v_ready};
      out_valid = pf_out_valid; out_tok = pf_out_tok; out_beat = pf_out_beat;
      out_data = pf_out_data; kv_rows = pf_kv_rows;
    end else if (dc_on) begin
      busy = dc_busy; done = dc_done;
      rq_valid = dc_rq_valid; rq_kind = dc_rq_kind; rq_tok = dc_rq_tok;
      q_ready = dc_q_ready; k_ready = dc_k_ready; v_ready = dc_v_ready;
      out_valid = dc_out_valid; out_tok = n_tok - 1'b1; out_beat = dc_out_beat;
      out_data = dc_out_data; kv_rows = dc_kv_rows;
    end
  end
endmodule
