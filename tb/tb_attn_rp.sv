// tb_attn_rp: the dynamic region's swap behaviour. Checks that the prefill
// module is in place after reset and runs; that decouple silences every
// output; that a completed load of the decode module replaces it (the
// prefill module's state is gone) and the decode module then runs with
// two-lane K reads; and that loading the prefill module again works.
module tb_attn_rp;
  import pdswap_pkg::*;
  localparam int D = 64, NH = 2, BPR = D / EPB, BW = $clog2(BPR);
  logic clk = 0, rst_n = 0, cfg_load_valid = 0, decouple = 0;
  rm_id_e cfg_load_rm = RM_PREFILL, loaded_rm;
  logic start = 0;
  logic [15:0] n_tok = '0;
  logic [7:0] layer = '0, n_layers = 8'd1;
  logic busy, done, last_layer_done, rq_valid, rq_ready = 0;
  row_kind_e rq_kind;
  logic [15:0] rq_tok, out_tok;
  logic q_valid = 0, q_ready;
  beat_t q_data = '0;
  logic [1:0] k_valid = '0, k_ready, v_valid = '0, v_ready;
  beat_t k_data [2];
  beat_t v_data [2];
  logic out_valid, out_ready = 0;
  logic [BW-1:0] out_beat;
  beat_t out_data;
  logic [31:0] kv_rows;
  int checks = 0, failures = 0;

  attn_rp #(.NPE(2), .D(D), .NHEAD(NH), .MAX_CTX(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin k_data[0] = '0; k_data[1] = '0; v_data[0] = '0; v_data[1] = '0; end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(loaded_rm == RM_PREFILL, "prefill module loaded after reset");
    n_tok = 16'd3; start = 1;
    @(negedge clk) start = 0;
    repeat (2) @(negedge clk);
    chk(busy && rq_valid && rq_kind == ROW_Q && rq_tok == 16'd2, "prefill asks for the last query first");
    decouple = 1;
    #1 chk(!rq_valid && !busy && !out_valid && q_ready == 0, "decoupled outputs idle");
    // load the decode module
    @(negedge clk) begin cfg_load_valid = 1; cfg_load_rm = RM_DECODE; end
    @(negedge clk) cfg_load_valid = 0;
    chk(loaded_rm == RM_DECODE, "decode module loaded");
    @(negedge clk) decouple = 0;
    #1 chk(!busy && !rq_valid, "new module starts idle");
    n_tok = 16'd5; start = 1;
    @(negedge clk) start = 0;
    @(negedge clk);
    chk(rq_valid && rq_kind == ROW_Q && rq_tok == 16'd4, "decode asks for query of token ctx-1");
    rq_ready = 1;
    @(negedge clk) rq_ready = 0;
    for (int b = 0; b < BPR; b++) begin
      q_valid = 1;
      @(negedge clk);
    end
    q_valid = 0;
    @(negedge clk);
    chk(rq_valid && rq_kind == ROW_K && rq_tok == 16'd0, "decode then reads K row 0");
    rq_ready = 1;
    @(negedge clk) rq_ready = 0;
    chk(k_ready == 2'b11, "both K lanes ready");
    // swap back
    decouple = 1;
    #1 chk(!busy && !rq_valid && k_ready == 2'b00, "decoupled decode module silent");
    @(negedge clk) begin cfg_load_valid = 1; cfg_load_rm = RM_PREFILL; end
    @(negedge clk) begin cfg_load_valid = 0; decouple = 0; end
    #1 chk(loaded_rm == RM_PREFILL && !busy && !rq_valid, "prefill module back, idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
