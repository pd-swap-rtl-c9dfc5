// pdswap_top: programmable-logic top of the PD-Swap LLM accelerator.
//
// The fabric is split into a static region and one dynamic region:
//   static : logic_swap_ctrl (processor registers, swap handshake),
//            hp_port_router (the four HP DDR ports), rmsnorm_findmax
//            feeding int8 activations through a one-token FIFO into
//            tlmm_engine (ternary table-lookup linear unit with its resident
//            weight buffer), whose results go through elementwise_unit
//            (dequantisation by the RMSNorm absmax and a weight scale, then
//            the residual add or SiLU);
//   dynamic: attn_rp, holding prefill_attention or decode_attention.
// A request runs: load weights into the weight buffer; for every layer of
// the prompt, linear layers in the static region and prefill attention in the
// dynamic region; when the last layer's attention is done the region raises
// irq, the processor starts writing the decode module's partial bitstream
// (decouple) while the static region finishes the layer; after the load
// (pcap_load_valid) and RECONF_END, decode steps run with the decode module
// and the decode port mapping.
//
// The processor, the configuration port and DDR are outside the fabric and
// appear as ports: the register bus and irq, pcap_load_* (end of a partial
// bitstream load), and the four HP ports with a simple burst protocol
// (see pdswap_pkg). The static masters' own DDR traffic enters on st_m2s /
// st_s2m and is routed only in MODE_LINEAR. The linear unit is started and
// sized by lin_* ports and the RMSNorm unit takes its vector on norm_*;
// ew_* load residuals and the weight scale and carry the dequantised rows;
// rope_* rotate pairs of those rows by position (RoPE).
module pdswap_top
  import pdswap_pkg::*;
#(
  parameter int unsigned NPE        = 4,
  parameter int unsigned D          = 1536,
  parameter int unsigned NHEAD      = 16,
  parameter int unsigned MAX_CTX    = 4096,
  parameter int unsigned NG         = 8,
  parameter int unsigned MAX_CHUNKS = 256,
  parameter int unsigned WB_DEPTH   = 393216,
  parameter int unsigned EW_ROWS    = 4096,
  localparam int unsigned G   = 2,
  localparam int unsigned WBA = $clog2(WB_DEPTH),
  localparam int unsigned WW  = NG * $clog2(3 ** G),
  localparam int unsigned AWD = $clog2(D)
) (
  input  logic           clk,
  input  logic           rst_n,
  // processor register bus
  input  logic           reg_we,
  input  logic [3:0]     reg_addr,
  input  logic [31:0]    reg_wdata,
  output logic [31:0]    reg_rdata,
  output logic           irq,
  // configuration port: a partial bitstream load has completed
  input  logic           pcap_load_valid,
  input  rm_id_e         pcap_load_rm,
  // HP DDR ports
  output hp_m2s_t        hp_m2s [NUM_HP],
  input  hp_s2m_t        hp_s2m [NUM_HP],
  // static region DDR masters (routed in MODE_LINEAR)
  input  hp_m2s_t        st_m2s [NUM_HP],
  output hp_s2m_t        st_s2m [NUM_HP],
  // RMSNorm input vector
  input  logic           norm_start,
  input  logic           norm_in_valid,
  output logic           norm_in_ready,
  input  logic signed [15:0] norm_in_x,
  input  logic signed [15:0] norm_in_gamma,
  output logic [15:0]    norm_absmax,
  output logic           norm_done,
  // table-lookup linear unit
  input  logic           lin_start,
  input  logic [15:0]    lin_n_rows,
  input  logic [15:0]    lin_n_chunks,
  input  logic [WBA-1:0] lin_w_base,
  input  logic           wb_wr_en,
  input  logic [WBA-1:0] wb_wr_addr,
  input  logic [WW-1:0]  wb_wr_data,
  output logic           lin_out_valid,
  output logic [15:0]    lin_out_row,
  output logic signed [31:0] lin_out_acc,
  output logic           lin_done,
  // element-wise stage after the linear unit
  input  logic           ew_res_we,
  input  logic [15:0]    ew_res_addr,
  input  logic signed [15:0] ew_res_data,
  input  logic [15:0]    ew_w_scale,
  input  logic           ew_op_silu,
  input  logic           ew_op_mul,
  output logic           ew_out_valid,
  output logic [15:0]    ew_out_row,
  output logic signed [15:0] ew_out_y,
  // rotary position embedding of the element-wise output (pairs of rows)
  input  logic           rope_en,
  input  logic [15:0]    rope_pos,
  output logic           rope_out_valid,
  output logic [15:0]    rope_out_row,
  output logic signed [15:0] rope_out_y0,
  output logic signed [15:0] rope_out_y1,
  // observation
  output logic [31:0]    attn_kv_rows
);
  localparam int unsigned BPR = D / EPB;
  localparam int unsigned BW  = $clog2(BPR);

  // ---------------- control ----------------
  port_mode_e  mode;
  logic [15:0] n_tok;
  logic [7:0]  layer, n_layers;
  logic [31:0] q_base, k_base, v_base, o_base;
  logic        attn_start, decouple, attn_busy, attn_done, lld;
  rm_id_e      loaded_rm;

  logic_swap_ctrl u_ctrl (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .irq,
    .mode, .n_tok, .layer, .n_layers, .q_base, .k_base, .v_base, .o_base,
    .attn_start, .decouple, .loaded_rm, .attn_busy, .attn_done,
    .last_layer_done(lld));

  // ---------------- dynamic region ----------------
  logic          rq_valid, rq_ready, q_valid, q_ready, out_valid, out_ready;
  row_kind_e     rq_kind;
  logic [15:0]   rq_tok, out_tok;
  beat_t         q_data, out_data;
  logic [1:0]    k_valid, k_ready, v_valid, v_ready;
  beat_t         k_data [2];
  beat_t         v_data [2];
  logic [BW-1:0] out_beat;

  attn_rp #(.NPE(NPE), .D(D), .NHEAD(NHEAD), .MAX_CTX(MAX_CTX)) u_rp (
    .clk, .rst_n,
    .cfg_load_valid(pcap_load_valid), .cfg_load_rm(pcap_load_rm),
    .decouple, .loaded_rm,
    .start(attn_start), .n_tok, .layer, .n_layers,
    .busy(attn_busy), .done(attn_done), .last_layer_done(lld),
    .rq_valid, .rq_ready, .rq_kind, .rq_tok,
    .q_valid, .q_ready, .q_data, .k_valid, .k_ready, .k_data,
    .v_valid, .v_ready, .v_data,
    .out_valid, .out_ready, .out_tok, .out_beat, .out_data,
    .kv_rows(attn_kv_rows));

  hp_port_router #(.D(D)) u_router (
    .clk, .rst_n, .mode, .q_base, .k_base, .v_base, .o_base,
    .rq_valid, .rq_ready, .rq_kind, .rq_tok,
    .q_valid, .q_ready, .q_data, .k_valid, .k_ready, .k_data,
    .v_valid, .v_ready, .v_data,
    .out_valid, .out_ready, .out_tok, .out_beat, .out_data,
    .st_m2s, .st_s2m, .hp_m2s, .hp_s2m);

  // ---------------- static datapath ----------------
  logic               nq_valid;
  logic [AWD-1:0]     nq_idx;
  logic signed [15:0] nq_y;
  logic signed [7:0]  nq_q;

  rmsnorm_findmax #(.D(D)) u_norm (
    .clk, .rst_n, .start(norm_start), .busy(), .done(norm_done),
    .in_valid(norm_in_valid), .in_ready(norm_in_ready),
    .in_x(norm_in_x), .in_gamma(norm_in_gamma),
    .out_valid(nq_valid), .out_idx(nq_idx), .out_y(nq_y), .out_q(nq_q),
    .absmax(norm_absmax));

  // pack NG*G int8 codes into one activation beat
  localparam int unsigned PK = NG * G;
  logic [PK*8-1:0] pack_r;
  logic [$clog2(PK)-1:0] pack_n;
  logic            pack_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pack_r <= '0; pack_n <= '0; pack_valid <= 1'b0;
    end else begin
      pack_valid <= 1'b0;
      if (nq_valid) begin
        pack_r[pack_n*8 +: 8] <= nq_q;
        pack_n <= pack_n + 1'b1;
        if (pack_n == ($clog2(PK))'(PK - 1)) pack_valid <= 1'b1;
      end
    end
  end

  logic            act_valid, act_ready, fifo_in_ready;
  logic [PK*8-1:0] act_data;
  sync_fifo #(.W(PK * 8), .DEPTH(MAX_CHUNKS)) u_act_fifo (
    .clk, .rst_n, .in_valid(pack_valid), .in_ready(fifo_in_ready), .in_data(pack_r),
    .out_valid(act_valid), .out_ready(act_ready), .out_data(act_data));

  tlmm_engine #(.G(G), .NG(NG), .MAX_CHUNKS(MAX_CHUNKS), .WB_DEPTH(WB_DEPTH)) u_tlmm (
    .clk, .rst_n, .start(lin_start), .n_rows(lin_n_rows), .n_chunks(lin_n_chunks),
    .w_base(lin_w_base), .busy(), .done(lin_done),
    .act_valid, .act_ready, .act_data,
    .wb_wr_en, .wb_wr_addr, .wb_wr_data,
    .out_valid(lin_out_valid), .out_row(lin_out_row), .out_acc(lin_out_acc));

  elementwise_unit #(.MAX_ROWS(EW_ROWS)) u_ew (
    .clk, .rst_n, .res_we(ew_res_we), .res_addr(ew_res_addr), .res_data(ew_res_data),
    .act_scale(norm_absmax), .w_scale(ew_w_scale), .op_silu(ew_op_silu), .op_mul(ew_op_mul),
    .in_valid(lin_out_valid), .in_row(lin_out_row), .in_acc(lin_out_acc),
    .out_valid(ew_out_valid), .out_row(ew_out_row), .out_y(ew_out_y));

  // RoPE: with rope_en set, each even row of the element-wise output is held
  // and rotated together with the following odd row; the pair index within
  // the head is (row / 2) mod (HD / 2). rope_out_row is the even row.
  localparam int unsigned HD  = D / NHEAD;
  localparam int unsigned RPI = $clog2(HD / 2);
  logic signed [15:0] rope_x0;
  logic [15:0]        rope_row_q, rope_row_d;
  logic               rope_fire;
  logic [RPI-1:0]     rope_idx;
  assign rope_fire = rope_en && ew_out_valid && ew_out_row[0];
  assign rope_idx  = RPI'((ew_out_row >> 1) % 16'(HD / 2));
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rope_x0 <= '0; rope_row_q <= '0; rope_row_d <= '0;
    end else begin
      if (rope_en && ew_out_valid && !ew_out_row[0]) rope_x0 <= ew_out_y;
      rope_row_q <= {ew_out_row[15:1], 1'b0};
      rope_row_d <= rope_row_q;
    end
  assign rope_out_row = rope_row_d;

  rope_unit #(.HD(HD)) u_rope (
    .clk, .rst_n, .in_valid(rope_fire), .in_pos(rope_pos), .in_idx(rope_idx),
    .in_x0(rope_x0), .in_x1(ew_out_y),
    .out_valid(rope_out_valid), .out_idx(), .out_y0(rope_out_y0), .out_y1(rope_out_y1));

  a_act_fifo: assert property (@(posedge clk) disable iff (!rst_n) pack_valid |-> fifo_in_ready);
  a_swap_safe: assert property (@(posedge clk) disable iff (!rst_n)
    pcap_load_valid |-> decouple);
endmodule
