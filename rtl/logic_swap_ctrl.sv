// logic_swap_ctrl: configuration registers and logic-swap control of the
// programmable logic, seen by the processor as a small register file.
//
// The processor runs the inference schedule. Through these registers it
// selects the port mode, sets the attention kernel's token count, layer
// index and layer count and the DDR base addresses, and starts kernels.
// The swap handshake with the processor is:
//   1. The prefill attention module finishes the final layer's attention and
//      pulses last_layer_done. The controller latches it and raises `irq` at
//      once, while the static region goes on with the rest of the layer
//      (output projection, FFN, LM head), so reconfiguration overlaps them.
//   2. The processor writes RECONF_BEGIN: `decouple` goes high and isolates
//      the dynamic region while the partial bitstream is written.
//   3. The processor writes RECONF_END after the configuration port reports
//      the load complete: `decouple` goes low.
//   4. A START in decode mode is only passed on if the decode module is the
//      one loaded and the region is not decoupled; otherwise it is refused
//      and STATUS.start_rejected is set. Likewise prefill mode needs the
//      prefill module.
// Register map (word addresses, 32-bit data, write when reg_we is high,
// read data combinational):
//   0 CTRL   (W) bit0 START, bit1 RECONF_BEGIN, bit2 RECONF_END, bit3 IRQ_CLEAR
//   1 MODE   (RW) port_mode_e        2 N_TOK  (RW)   3 LAYER (RW)
//   4 NLAYER (RW)   5 Q_BASE  6 K_BASE  7 V_BASE  8 O_BASE (RW)
//   9 STATUS (R) bit0 busy, bit1 done (sticky), bit2 last-layer irq (sticky),
//             bit3 decouple, bit4 loaded module, bit5 start_rejected (sticky)
//  10 SWAPS  (R) number of completed RECONF_BEGIN/RECONF_END pairs
// The early signal, the decoupling and the conservative decode start follow
// the architecture; the register map is this implementation's.
module logic_swap_ctrl
  import pdswap_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_we,
  input  logic [3:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        irq,
  // to the static region and the partition
  output port_mode_e  mode,
  output logic [15:0] n_tok,
  output logic [7:0]  layer,
  output logic [7:0]  n_layers,
  output logic [31:0] q_base,
  output logic [31:0] k_base,
  output logic [31:0] v_base,
  output logic [31:0] o_base,
  output logic        attn_start,
  output logic        decouple,
  // from the partition
  input  rm_id_e      loaded_rm,
  input  logic        attn_busy,
  input  logic        attn_done,
  input  logic        last_layer_done
);
  logic done_s, irq_s, rej_s;
  logic [31:0] swaps;
  logic wr_ctrl, start_ok;

  assign wr_ctrl  = reg_we && reg_addr == 4'd0;
  assign start_ok = !decouple && !attn_busy &&
                    ((mode == MODE_PREFILL && loaded_rm == RM_PREFILL) ||
                     (mode == MODE_DECODE  && loaded_rm == RM_DECODE));
  assign irq = irq_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= MODE_LINEAR; n_tok <= '0; layer <= '0; n_layers <= '0;
      q_base <= '0; k_base <= '0; v_base <= '0; o_base <= '0;
      attn_start <= 1'b0; decouple <= 1'b0;
      done_s <= 1'b0; irq_s <= 1'b0; rej_s <= 1'b0; swaps <= '0;
    end else begin
      attn_start <= 1'b0;
      if (attn_done)       done_s <= 1'b1;
      if (last_layer_done) irq_s  <= 1'b1;
      if (reg_we)
        unique case (reg_addr)
          4'd1: mode     <= port_mode_e'(reg_wdata[1:0]);
          4'd2: n_tok    <= reg_wdata[15:0];
          4'd3: layer    <= reg_wdata[7:0];
          4'd4: n_layers <= reg_wdata[7:0];
          4'd5: q_base   <= reg_wdata;
          4'd6: k_base   <= reg_wdata;
          4'd7: v_base   <= reg_wdata;
          4'd8: o_base   <= reg_wdata;
          default: ;
        endcase
      if (wr_ctrl) begin
        if (reg_wdata[0]) begin
          if (start_ok) begin attn_start <= 1'b1; done_s <= 1'b0; end
          else rej_s <= 1'b1;
        end
        if (reg_wdata[1]) decouple <= 1'b1;
        if (reg_wdata[2] && decouple) begin decouple <= 1'b0; swaps <= swaps + 1; end
        if (reg_wdata[3]) begin irq_s <= 1'b0; rej_s <= 1'b0; end
      end
    end
  end

  always_comb begin
    unique case (reg_addr)
      4'd1:    reg_rdata = 32'(mode);
      4'd2:    reg_rdata = 32'(n_tok);
      4'd3:    reg_rdata = 32'(layer);
      4'd4:    reg_rdata = 32'(n_layers);
      4'd5:    reg_rdata = q_base;
      4'd6:    reg_rdata = k_base;
      4'd7:    reg_rdata = v_base;
      4'd8:    reg_rdata = o_base;
      4'd9:    reg_rdata = {26'd0, rej_s, loaded_rm, decouple, irq_s, done_s, attn_busy};
      4'd10:   reg_rdata = swaps;
      default: reg_rdata = '0;
    endcase
  end
endmodule
