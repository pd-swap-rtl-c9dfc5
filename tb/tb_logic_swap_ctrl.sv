// tb_logic_swap_ctrl: register write/read-back, irq on last_layer_done and
// its clear, the decouple window of a swap and the swap counter, and the
// start gating: refused in linear mode, refused for decode while the prefill
// module is loaded or while decoupled, accepted once the decode module is in.
module tb_logic_swap_ctrl;
  import pdswap_pkg::*;
  logic clk = 0, rst_n = 0, reg_we = 0;
  logic [3:0] reg_addr = '0;
  logic [31:0] reg_wdata = '0, reg_rdata;
  logic irq;
  port_mode_e mode;
  logic [15:0] n_tok;
  logic [7:0] layer, n_layers;
  logic [31:0] q_base, k_base, v_base, o_base;
  logic attn_start, decouple;
  rm_id_e loaded_rm = RM_PREFILL;
  logic attn_busy = 0, attn_done = 0, last_layer_done = 0;
  int checks = 0, failures = 0, starts = 0;

  logic_swap_ctrl dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && attn_start) starts++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input int a, input int d);
    @(negedge clk) begin reg_we = 1; reg_addr = 4'(a); reg_wdata = 32'(d); end
    @(negedge clk) reg_we = 0;
    @(negedge clk);
  endtask
  logic [31:0] st, rv;
  // read one register into rv and STATUS into st
  task automatic rd(input int a);
    reg_addr = 4'(a);
    #1 rv = reg_rdata;
    reg_addr = 4'd9;
    #1 st = reg_rdata;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 2; a <= 8; a++) begin
      int v;
      v = (a <= 4) ? (a * 3) : (32'h1000_0000 + a);
      wr(a, v);
      rd(a);
      chk(rv == 32'(v), $sformatf("reg %0d read-back", a));
    end
    chk(n_tok == 16'd6 && layer == 8'd9 && n_layers == 8'd12 && k_base == 32'h1000_0006, "register outputs");
    // start refused in linear mode
    wr(0, 1);
    rd(9);
    chk(starts == 0 && st[5], "start refused in linear mode");
    wr(0, 8);
    wr(1, int'(MODE_PREFILL));
    wr(0, 1);
    rd(9);
    chk(starts == 1 && !st[5], "prefill start accepted");
    // done and last-layer irq
    @(negedge clk) begin attn_done = 1; last_layer_done = 1; end
    @(negedge clk) begin attn_done = 0; last_layer_done = 0; end
    rd(9);
    chk(irq && st[1] && st[2], "irq and done latched");
    // swap
    wr(0, 2);
    rd(9);
    chk(decouple && st[3], "decouple on RECONF_BEGIN");
    wr(0, 1);
    rd(9);
    chk(starts == 1 && st[5], "prefill start refused while decoupled");
    wr(0, 8);
    wr(1, int'(MODE_DECODE));
    wr(0, 1);
    rd(9);
    chk(starts == 1 && st[5], "decode start refused while decoupled / prefill loaded");
    wr(0, 8);
    chk(!irq, "irq cleared");
    @(negedge clk) loaded_rm = RM_DECODE;
    wr(0, 4);
    rd(10);
    chk(!decouple && rv == 1, "RECONF_END releases decouple, swap counted");
    wr(0, 1);
    chk(starts == 2, "decode start accepted after load");
    @(negedge clk) loaded_rm = RM_PREFILL;
    wr(0, 1);
    chk(starts == 2, "decode start refused with prefill module loaded");
    @(negedge clk) begin loaded_rm = RM_DECODE; attn_busy = 1; end
    wr(0, 1);
    chk(starts == 2, "start refused while busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
