// tb_hp_port_router: checks the port mapping of each mode: pass-through of
// the static masters in MODE_LINEAR; Q/K/V/O on HP0..HP3 in MODE_PREFILL
// with the static masters blocked; in MODE_DECODE, K on HP0+HP1 and V on
// HP2+HP3 as half-row bursts (each issued once even when the two ports
// accept on different clocks), the Q bypass on HP0 and the write-back on HP0.
module tb_hp_port_router;
  import pdswap_pkg::*;
  localparam int D = 64, RB = 2 * D, BPR = D / EPB, BW = $clog2(BPR);
  logic clk = 0, rst_n = 0;
  port_mode_e mode = MODE_LINEAR;
  logic [31:0] q_base = 32'h1000, k_base = 32'h2000, v_base = 32'h3000, o_base = 32'h4000;
  logic rq_valid = 0, rq_ready;
  row_kind_e rq_kind = ROW_Q;
  logic [15:0] rq_tok = '0;
  logic q_valid, q_ready = 1;
  beat_t q_data;
  logic [1:0] k_valid, k_ready = 2'b11, v_valid, v_ready = 2'b11;
  beat_t k_data [2];
  beat_t v_data [2];
  logic out_valid = 0, out_ready;
  logic [15:0] out_tok = '0;
  logic [BW-1:0] out_beat = '0;
  beat_t out_data = '0;
  hp_m2s_t st_m2s [NUM_HP];
  hp_s2m_t st_s2m [NUM_HP];
  hp_m2s_t hp_m2s [NUM_HP];
  hp_s2m_t hp_s2m [NUM_HP];
  int checks = 0, failures = 0;
  int issued [NUM_HP];

  hp_port_router #(.D(D)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NUM_HP; p++) if (hp_m2s[p].ar_valid && hp_s2m[p].ar_ready) issued[p]++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NUM_HP; p++) begin st_m2s[p] = '0; hp_s2m[p] = '0; issued[p] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- linear: pass-through
    for (int it = 0; it < 20; it++) begin
      @(negedge clk);
      for (int p = 0; p < NUM_HP; p++) begin
        st_m2s[p] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        hp_s2m[p] = {$urandom, $urandom, $urandom, $urandom, $urandom};
      end
      #1;
      for (int p = 0; p < NUM_HP; p++) begin
        chk(hp_m2s[p] == st_m2s[p], "linear m2s");
        chk(st_s2m[p] == hp_s2m[p], "linear s2m");
      end
    end
    // ---- prefill
    @(negedge clk);
    mode = MODE_PREFILL;
    for (int p = 0; p < NUM_HP; p++) begin
      st_m2s[p] = '0; st_m2s[p].ar_valid = 1;
      hp_s2m[p] = '0; hp_s2m[p].ar_ready = 1; hp_s2m[p].w_ready = 1;
    end
    rq_valid = 1; rq_kind = ROW_K; rq_tok = 16'd5;
    #1;
    chk(hp_m2s[1].ar_valid && hp_m2s[1].ar_addr == 32'h2000 + 5 * RB && hp_m2s[1].ar_beats == BPR, "prefill K on HP1");
    chk(!hp_m2s[0].ar_valid && !hp_m2s[2].ar_valid && !hp_m2s[3].ar_valid, "prefill K only HP1");
    chk(rq_ready, "prefill rq_ready");
    for (int p = 0; p < NUM_HP; p++) chk(st_s2m[p] == '0, "static blocked in prefill");
    rq_kind = ROW_V; #1;
    chk(hp_m2s[2].ar_valid && hp_m2s[2].ar_addr == 32'h3000 + 5 * RB, "prefill V on HP2");
    rq_kind = ROW_Q; #1;
    chk(hp_m2s[0].ar_valid && hp_m2s[0].ar_addr == 32'h1000 + 5 * RB, "prefill Q on HP0");
    @(negedge clk) rq_valid = 0;
    hp_s2m[1].r_valid = 1; hp_s2m[1].r_data = 128'hdead;
    hp_s2m[2].r_valid = 1; hp_s2m[2].r_data = 128'hbeef;
    out_valid = 1; out_tok = 16'd3; out_beat = BW'(2); out_data = 128'h1234;
    #1;
    chk(k_valid[0] && k_data[0] == 128'hdead && hp_m2s[1].r_ready, "prefill K data");
    chk(v_valid[0] && v_data[0] == 128'hbeef, "prefill V data");
    chk(hp_m2s[3].w_valid && hp_m2s[3].w_addr == 32'h4000 + 3 * RB + 2 * 16 && hp_m2s[3].w_data == 128'h1234 && out_ready, "prefill O on HP3");
    @(negedge clk);
    out_valid = 0;
    for (int p = 0; p < NUM_HP; p++) begin hp_s2m[p].r_valid = 0; issued[p] = 0; end
    // ---- decode: K with HP1 late
    mode = MODE_DECODE;
    hp_s2m[1].ar_ready = 0;
    rq_valid = 1; rq_kind = ROW_K; rq_tok = 16'd7;
    #1;
    chk(hp_m2s[0].ar_valid && hp_m2s[0].ar_addr == 32'h2000 + 7 * RB && hp_m2s[0].ar_beats == BPR / 2, "decode K half 0 on HP0");
    chk(hp_m2s[1].ar_valid && hp_m2s[1].ar_addr == 32'h2000 + 7 * RB + RB / 2 && hp_m2s[1].ar_beats == BPR / 2, "decode K half 1 on HP1");
    chk(!rq_ready, "decode waits for both ports");
    @(negedge clk);
    chk(!hp_m2s[0].ar_valid, "HP0 burst not repeated");
    chk(!rq_ready, "still waiting HP1");
    hp_s2m[1].ar_ready = 1;
    #1 chk(rq_ready, "both accepted");
    @(negedge clk) rq_valid = 0;
    chk(issued[0] == 1 && issued[1] == 1 && issued[2] == 0 && issued[3] == 0, "one burst per port");
    rq_valid = 1; rq_kind = ROW_V; rq_tok = 16'd1;
    #1;
    chk(hp_m2s[2].ar_valid && hp_m2s[3].ar_valid && hp_m2s[3].ar_addr == 32'h3000 + RB + RB / 2 && rq_ready, "decode V on HP2+HP3");
    // Q bypass
    @(negedge clk) rq_kind = ROW_Q; rq_tok = 16'd9;
    #1 chk(hp_m2s[0].ar_valid && !hp_m2s[1].ar_valid && hp_m2s[0].ar_beats == BPR && rq_ready, "decode Q on HP0 only");
    @(negedge clk) rq_valid = 0;
    for (int b = 0; b < BPR + 2; b++) begin
      hp_s2m[0].r_valid = 1; hp_s2m[0].r_data = 128'(b);
      #1;
      if (b < BPR) chk(q_valid && !k_valid[0] && q_data == 128'(b), "Q bypass beat on q stream");
      else         chk(!q_valid && k_valid[0], "after Q, HP0 carries K");
      @(negedge clk);
    end
    hp_s2m[0].r_valid = 0;
    hp_s2m[3].r_valid = 1; #1 chk(v_valid[1] && !v_valid[0], "HP3 is V lane 1");
    hp_s2m[3].r_valid = 0;
    out_valid = 1; out_tok = 16'd9; out_beat = '0; #1;
    chk(hp_m2s[0].w_valid && hp_m2s[0].w_addr == 32'h4000 + 9 * RB && !hp_m2s[3].w_valid, "decode write-back on HP0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
