// hp_port_router: maps the four HP DDR ports to whichever engine owns them.
//
// MODE_LINEAR : the ports belong to the static region's masters (weight and
//               activation traffic), passed through unchanged.
// MODE_PREFILL: one port per stream, as in a conventional attention engine:
//               HP0 reads Q rows, HP1 K rows, HP2 V rows, HP3 writes outputs.
// MODE_DECODE : the bandwidth-oriented mapping for decode attention. A K row
//               request becomes two half-row bursts, first half on HP0 and
//               second half on HP1; a V row likewise on HP2 and HP3. The Q
//               row is first streamed on HP0 alone (the "bypass"), and the
//               output row is written back on HP0 once the decode module has
//               finished all KV reads (it holds the row until then).
// In both attention modes the static masters are blocked (ar_ready, r_valid
// and w_ready held low) so that the attention kernel has the ports to itself.
//
// A row request (kind, token) is turned into bursts at
// base(kind) + token*2*D bytes, D/8 beats per row (D/16 per half row). When
// a request needs two ports, each port's burst is issued once; the request is
// acknowledged when both have been accepted. The port assignment per mode
// follows the architecture; the burst protocol and the address layout
// (rows stored densely, one after another) are this implementation's.
module hp_port_router
  import pdswap_pkg::*;
#(
  parameter int unsigned D = 1536,
  localparam int unsigned BPR = D / EPB,
  localparam int unsigned BW  = $clog2(BPR)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  port_mode_e    mode,
  input  logic [31:0]   q_base,
  input  logic [31:0]   k_base,
  input  logic [31:0]   v_base,
  input  logic [31:0]   o_base,
  // attention side
  input  logic          rq_valid,
  output logic          rq_ready,
  input  row_kind_e     rq_kind,
  input  logic [15:0]   rq_tok,
  output logic          q_valid,
  input  logic          q_ready,
  output beat_t         q_data,
  output logic [1:0]    k_valid,
  input  logic [1:0]    k_ready,
  output beat_t         k_data [2],
  output logic [1:0]    v_valid,
  input  logic [1:0]    v_ready,
  output beat_t         v_data [2],
  input  logic          out_valid,
  output logic          out_ready,
  input  logic [15:0]   out_tok,
  input  logic [BW-1:0] out_beat,
  input  beat_t         out_data,
  // static region masters
  input  hp_m2s_t       st_m2s [NUM_HP],
  output hp_s2m_t       st_s2m [NUM_HP],
  // HP ports to DDR
  output hp_m2s_t       hp_m2s [NUM_HP],
  input  hp_s2m_t       hp_s2m [NUM_HP]
);
  localparam int unsigned RB = 2 * D;          // bytes per row

  logic [NUM_HP-1:0] need, accepted, acc_now;
  logic [31:0] row_addr;
  logic [15:0] q_left;                          // Q beats still due on HP0 (decode)

  always_comb begin
    unique case (rq_kind)
      ROW_Q:   row_addr = q_base + 32'(rq_tok) * RB;
      ROW_K:   row_addr = k_base + 32'(rq_tok) * RB;
      default: row_addr = v_base + 32'(rq_tok) * RB;
    endcase
  end

  // ports a request needs
  always_comb begin
    need = '0;
    if (mode == MODE_PREFILL)
      unique case (rq_kind)
        ROW_Q:   need = 4'b0001;
        ROW_K:   need = 4'b0010;
        default: need = 4'b0100;
      endcase
    else if (mode == MODE_DECODE)
      unique case (rq_kind)
        ROW_Q:   need = 4'b0001;
        ROW_K:   need = 4'b0011;
        default: need = 4'b1100;
      endcase
  end

  always_comb
    for (int p = 0; p < NUM_HP; p++)
      acc_now[p] = rq_valid && need[p] && hp_m2s[p].ar_valid && hp_s2m[p].ar_ready;

  assign rq_ready = rq_valid && (need != '0) && ((need & ~(accepted | acc_now)) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      accepted <= '0;
      q_left   <= '0;
    end else begin
      accepted <= rq_ready ? '0 : (accepted | acc_now);
      if (mode == MODE_DECODE && rq_ready && rq_kind == ROW_Q) q_left <= 16'(BPR);
      else if (q_valid && q_ready && q_left != 0)              q_left <= q_left - 1'b1;
    end
  end

  always_comb begin
    // defaults: nothing moves
    for (int p = 0; p < NUM_HP; p++) begin
      hp_m2s[p] = '0;
      st_s2m[p] = '0;
    end
    q_valid = 1'b0; q_data = '0;
    k_valid = '0;   v_valid = '0;
    for (int L = 0; L < 2; L++) begin k_data[L] = '0; v_data[L] = '0; end
    out_ready = 1'b0;

    unique case (mode)
      MODE_PREFILL: begin
        for (int p = 0; p < 3; p++) begin
          hp_m2s[p].ar_valid = rq_valid && need[p] && !accepted[p];
          hp_m2s[p].ar_addr  = row_addr;
          hp_m2s[p].ar_beats = 16'(BPR);
        end
        q_valid    = hp_s2m[0].r_valid; q_data    = hp_s2m[0].r_data; hp_m2s[0].r_ready = q_ready;
        k_valid[0] = hp_s2m[1].r_valid; k_data[0] = hp_s2m[1].r_data; hp_m2s[1].r_ready = k_ready[0];
        v_valid[0] = hp_s2m[2].r_valid; v_data[0] = hp_s2m[2].r_data; hp_m2s[2].r_ready = v_ready[0];
        hp_m2s[3].w_valid = out_valid;
        hp_m2s[3].w_addr  = o_base + 32'(out_tok) * RB + 32'(out_beat) * (BEAT_W / 8);
        hp_m2s[3].w_data  = out_data;
        out_ready = hp_s2m[3].w_ready;
      end
      MODE_DECODE: begin
        for (int p = 0; p < NUM_HP; p++) begin
          hp_m2s[p].ar_valid = rq_valid && need[p] && !accepted[p];
          hp_m2s[p].ar_addr  = row_addr + ((p % 2 == 1) ? 32'(RB / 2) : 32'd0);
          hp_m2s[p].ar_beats = (rq_kind == ROW_Q) ? 16'(BPR) : 16'(BPR / 2);
        end
        if (q_left != 0) begin
          q_valid = hp_s2m[0].r_valid; q_data = hp_s2m[0].r_data; hp_m2s[0].r_ready = q_ready;
        end else begin
          k_valid[0] = hp_s2m[0].r_valid; k_data[0] = hp_s2m[0].r_data; hp_m2s[0].r_ready = k_ready[0];
        end
        k_valid[1] = hp_s2m[1].r_valid; k_data[1] = hp_s2m[1].r_data; hp_m2s[1].r_ready = k_ready[1];
        v_valid[0] = hp_s2m[2].r_valid; v_data[0] = hp_s2m[2].r_data; hp_m2s[2].r_ready = v_ready[0];
        v_valid[1] = hp_s2m[3].r_valid; v_data[1] = hp_s2m[3].r_data; hp_m2s[3].r_ready = v_ready[1];
        hp_m2s[0].w_valid = out_valid;
        hp_m2s[0].w_addr  = o_base + 32'(out_tok) * RB + 32'(out_beat) * (BEAT_W / 8);
        hp_m2s[0].w_data  = out_data;
        out_ready = hp_s2m[0].w_ready;
      end
      default: begin
        for (int p = 0; p < NUM_HP; p++) begin
          hp_m2s[p] = st_m2s[p];
          st_s2m[p] = hp_s2m[p];
        end
      end
    endcase
  end
endmodule
