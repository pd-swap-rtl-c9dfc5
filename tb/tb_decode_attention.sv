// tb_decode_attention: one query against a random KV cache, checked against a
// floating-point reference computed from the same Q8.8 data. The memory
// model serves K and V rows as two half-row bursts on two lanes, with random
// gaps, independently per lane. Checks: every output element (6 LSB),
// output only after the last KV beat, 2*ctx_len KV row requests, one Q
// request, that both lanes move data in the same clock (two ports used),
// and, with gap-free sources, that every KV beat moves in such a dual-port
// clock: two beats per clock, twice the bandwidth of one port.
module tb_decode_attention;
  import pdswap_pkg::*;
  localparam int D = 64, NH = 4, HD = D / NH, BPR = D / EPB, HALF = BPR / 2, BW = $clog2(BPR);
  localparam int MAXC = 32;

  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] ctx_len = '0;
  logic busy, done;
  logic rq_valid, rq_ready = 0;
  row_kind_e rq_kind;
  logic [15:0] rq_tok;
  logic q_valid = 0, q_ready;
  beat_t q_data = '0;
  logic [1:0] k_valid = '0, k_ready, v_valid = '0, v_ready;
  beat_t k_data [2];
  beat_t v_data [2];
  logic out_valid, out_ready = 0;
  logic [BW-1:0] out_beat;
  beat_t out_data;
  logic [31:0] kv_rows;

  decode_attention #(.D(D), .NHEAD(NH), .MAX_CTX(MAXC)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int qv [D], km [MAXC][D], vm [MAXC][D], got [D];
  int q_reqs, kv_reqs, dual_cycles, kv_beats_after_out, n_out;
  bit out_started;
  bit gaps = 1;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin k_data[0] = '0; k_data[1] = '0; v_data[0] = '0; v_data[1] = '0; end

  task automatic lane(input row_kind_e kd, input int tk, input int L);
    for (int b = 0; b < HALF; b++) begin
      beat_t bt;
      int gb;
      gb = L * HALF + b;
      while (gaps && $urandom_range(3) == 0) @(negedge clk);
      for (int e = 0; e < EPB; e++)
        bt[e*16 +: 16] = 16'(kd == ROW_K ? km[tk][gb*EPB+e] : vm[tk][gb*EPB+e]);
      if (kd == ROW_K) begin k_data[L] = bt; k_valid[L] = 1; end
      else             begin v_data[L] = bt; v_valid[L] = 1; end
      @(posedge clk);
      while (!((k_valid[L] && k_ready[L]) || (v_valid[L] && v_ready[L]))) @(posedge clk);
      @(negedge clk);
      k_valid[L] = 0; v_valid[L] = 0;
    end
  endtask

  initial begin
    forever begin
      @(negedge clk);
      if (rq_valid) begin
        row_kind_e kd; int tk;
        kd = rq_kind; tk = int'(rq_tok);
        rq_ready = 1;
        @(negedge clk) rq_ready = 0;
        if (kd == ROW_Q) begin
          q_reqs++;
          for (int b = 0; b < BPR; b++) begin
            for (int e = 0; e < EPB; e++) q_data[e*16 +: 16] = 16'(qv[b*EPB+e]);
            q_valid = 1;
            @(posedge clk);
            while (!q_ready) @(posedge clk);
            @(negedge clk) q_valid = 0;
          end
        end else begin
          kv_reqs++;
          fork
            lane(kd, tk, 0);
            lane(kd, tk, 1);
          join
        end
      end
    end
  end

  always @(negedge clk) out_ready = ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n) begin
    if ((k_valid[0] && k_ready[0] && k_valid[1] && k_ready[1]) ||
        (v_valid[0] && v_ready[0] && v_valid[1] && v_ready[1])) dual_cycles++;
    if (out_valid) out_started = 1;
    if (out_started && ((|(k_valid & k_ready)) || (|(v_valid & v_ready)))) kv_beats_after_out++;
    if (out_valid && out_ready) begin
      n_out++;
      for (int e = 0; e < EPB; e++) got[out_beat*EPB+e] = int'($signed(out_data[e*16 +: 16]));
    end
  end

  task automatic run(input int n, input int vscale);
    real s [MAXC];
    q_reqs = 0; kv_reqs = 0; dual_cycles = 0; kv_beats_after_out = 0; n_out = 0; out_started = 0;
    for (int i = 0; i < D; i++) begin qv[i] = int'($urandom_range(2*vscale)) - vscale; got[i] = 99999; end
    for (int t = 0; t < n; t++)
      for (int i = 0; i < D; i++) begin
        km[t][i] = int'($urandom_range(2*vscale)) - vscale;
        vm[t][i] = int'($urandom_range(1024)) - 512;
      end
    @(negedge clk);
    ctx_len = 16'(n); start = 1;
    @(negedge clk) start = 0;
    @(posedge clk iff done);
    repeat (2) @(posedge clk);
    for (int h = 0; h < NH; h++) begin
      real mx, den;
      mx = -1.0e30; den = 0.0;
      for (int j = 0; j < n; j++) begin
        s[j] = 0.0;
        for (int e = 0; e < HD; e++) s[j] += (qv[h*HD+e] / 256.0) * (km[j][h*HD+e] / 256.0);
        s[j] = s[j] / $sqrt(real'(HD));
        if (s[j] > mx) mx = s[j];
      end
      for (int j = 0; j < n; j++) den += $exp(s[j] - mx);
      for (int e = 0; e < HD; e++) begin
        real o; int want, d;
        o = 0.0;
        for (int j = 0; j < n; j++) o += $exp(s[j] - mx) / den * (vm[j][h*HD+e] / 256.0);
        want = int'(o * 256.0);
        d = got[h*HD+e] - want;
        checks++;
        if (d > 6 || d < -6) begin
          failures++;
          if (failures < 10) $display("ctx %0d elem %0d: got %0d want %0d", n, h*HD+e, got[h*HD+e], want);
        end
      end
    end
    checks += 5;
    if (n_out != BPR) begin failures++; $display("out beats %0d", n_out); end
    if (q_reqs != 1) begin failures++; $display("q reqs %0d", q_reqs); end
    if (kv_reqs != 2 * n || int'(kv_rows) != 2 * n) begin failures++; $display("kv reqs %0d rows %0d", kv_reqs, kv_rows); end
    if (kv_beats_after_out != 0) begin failures++; $display("KV beats after output started"); end
    if (dual_cycles == 0) begin failures++; $display("the two lanes never moved together"); end
    // rate: with no source gaps every K and V beat moves together with its
    // partner on the other port, i.e. two beats per clock (twice one port)
    if (!gaps) begin
      checks++;
      if (dual_cycles != 2 * n * HALF) begin failures++; $display("dual-port clocks %0d, want %0d", dual_cycles, 2 * n * HALF); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 256);
    run(7, 256);
    gaps = 0;
    run(20, 512);
    gaps = 1;
    run(MAXC, 768);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
