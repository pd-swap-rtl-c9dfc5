// tb_prefill_attention: causal attention over a small prompt, checked against
// a floating-point reference computed here from the same Q8.8 inputs.
// A behavioural memory answers row requests with random gaps between beats.
// Checks: every output element (tolerance 6 LSB of Q8.8), every token and
// beat delivered once, Q rows fetched once each, K/V row fetches equal to the
// reverse-schedule count (N(N+4)/8 for NPE = 4 and N a multiple of 4), and
// last_layer_done only on the final layer.
module tb_prefill_attention;
  import pdswap_pkg::*;
  localparam int NPE = 4, D = 64, NH = 2, HD = D / NH, BPR = D / EPB, BW = $clog2(BPR);
  localparam int MAXN = 16;

  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] n_tok = '0;
  logic [7:0] layer = '0, n_layers = 8'd2;
  logic busy, done, last_layer_done;
  logic rq_valid, rq_ready = 0;
  row_kind_e rq_kind;
  logic [15:0] rq_tok;
  logic q_valid = 0, q_ready, k_valid = 0, k_ready, v_valid = 0, v_ready;
  beat_t q_data = '0, k_data = '0, v_data = '0;
  logic out_valid, out_ready = 0;
  logic [15:0] out_tok;
  logic [BW-1:0] out_beat;
  beat_t out_data;
  logic [31:0] kv_rows;

  prefill_attention #(.NPE(NPE), .D(D), .NHEAD(NH), .FIFO_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int qm [MAXN][D], km [MAXN][D], vm [MAXN][D];
  int got [MAXN][D];
  bit seen [MAXN][BPR];
  int q_reqs, lld_count;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory model: accept a request, then stream BPR beats of the row
  initial begin
    forever begin
      @(negedge clk);
      if (rq_valid) begin
        row_kind_e kd; int tk;
        kd = rq_kind; tk = int'(rq_tok);
        rq_ready = 1;
        if (kd == ROW_Q) q_reqs++;
        @(negedge clk) rq_ready = 0;
        for (int b = 0; b < BPR; b++) begin
          beat_t bt;
          while ($urandom_range(3) == 0) @(negedge clk);
          for (int e = 0; e < EPB; e++)
            bt[e*16 +: 16] = 16'(kd == ROW_Q ? qm[tk][b*EPB+e] : kd == ROW_K ? km[tk][b*EPB+e] : vm[tk][b*EPB+e]);
          q_data = bt; k_data = bt; v_data = bt;
          q_valid = (kd == ROW_Q); k_valid = (kd == ROW_K); v_valid = (kd == ROW_V);
          @(posedge clk);
          while (!((q_valid && q_ready) || (k_valid && k_ready) || (v_valid && v_ready))) @(posedge clk);
          @(negedge clk);
          q_valid = 0; k_valid = 0; v_valid = 0;
        end
      end
    end
  end

  // output sink with back-pressure
  always @(negedge clk) out_ready = ($urandom_range(4) != 0);
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      if (seen[out_tok][out_beat]) begin failures++; $display("duplicate tok %0d beat %0d", out_tok, out_beat); end
      seen[out_tok][out_beat] = 1;
      for (int e = 0; e < EPB; e++) got[out_tok][out_beat*EPB+e] = int'($signed(out_data[e*16 +: 16]));
    end
    if (last_layer_done) lld_count++;
  end

  task automatic run(input int n, input int lay);
    real s [MAXN];
    q_reqs = 0; lld_count = 0;
    for (int t = 0; t < n; t++)
      for (int i = 0; i < D; i++) begin
        qm[t][i] = int'($urandom_range(512)) - 256;
        km[t][i] = int'($urandom_range(512)) - 256;
        vm[t][i] = int'($urandom_range(1024)) - 512;
        got[t][i] = 99999;
      end
    foreach (seen[a, b]) seen[a][b] = 0;
    @(negedge clk);
    n_tok = 16'(n); layer = 8'(lay); start = 1;
    @(negedge clk) start = 0;
    @(posedge clk iff done);
    repeat (2) @(posedge clk);
    // reference
    for (int i = 0; i < n; i++)
      for (int h = 0; h < NH; h++) begin
        real mx, den;
        mx = -1.0e30; den = 0.0;
        for (int j = 0; j <= i; j++) begin
          s[j] = 0.0;
          for (int e = 0; e < HD; e++) s[j] += (qm[i][h*HD+e] / 256.0) * (km[j][h*HD+e] / 256.0);
          s[j] = s[j] / $sqrt(real'(HD));
          if (s[j] > mx) mx = s[j];
        end
        for (int j = 0; j <= i; j++) den += $exp(s[j] - mx);
        for (int e = 0; e < HD; e++) begin
          real o; int want, d;
          o = 0.0;
          for (int j = 0; j <= i; j++) o += $exp(s[j] - mx) / den * (vm[j][h*HD+e] / 256.0);
          want = int'(o * 256.0);
          d = got[i][h*HD+e] - want;
          checks++;
          if (d > 6 || d < -6) begin
            failures++;
            if (failures < 10) $display("tok %0d elem %0d: got %0d want %0d", i, h*HD+e, got[i][h*HD+e], want);
          end
        end
      end
    for (int t = 0; t < n; t++)
      for (int b = 0; b < BPR; b++) begin checks++; if (!seen[t][b]) failures++; end
    checks++;
    if (q_reqs != n) begin failures++; $display("Q requests %0d", q_reqs); end
    begin
      int want_rows; want_rows = 0;
      for (int t0 = n - 1; t0 >= 0; t0 -= NPE) want_rows += t0 + 1;
      checks++;
      if (int'(kv_rows) != want_rows) begin failures++; $display("kv rows %0d want %0d", kv_rows, want_rows); end
      if (n % 4 == 0) begin
        checks++;
        if (int'(kv_rows) != n * (n + 4) / 8) begin failures++; $display("kv rows %0d != N(N+4)/8", kv_rows); end
      end
    end
    checks++;
    if (lld_count != ((lay == 1) ? 1 : 0)) begin failures++; $display("last_layer_done count %0d", lld_count); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(12, 0);
    run(10, 1);
    run(1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
