// tb_pdswap_top: end-to-end run of the accelerator through one request.
//
// Around the fabric it models the processor (register writes, reaction to
// irq), the configuration port (a partial load that takes RCFG clocks) and
// DDR (four HP ports, random ready/valid gaps). The sequence:
//   1. load ternary weights into the weight buffer;
//   2. prefill attention for N tokens, layer 0 then the last layer; outputs
//      in DDR are checked against a floating-point causal attention;
//   3. on irq (final prefill attention done) the processor at once begins
//      the swap (decouple) and, while the decode module is being loaded, runs
//      the static RMSNorm -> table-lookup linear chain (the rest of the
//      layer); its results are checked exactly against the int8 codes the
//      norm unit produced, the norm against a float RMSNorm, and the
//      dequantised rows (with residual) against a float reference, and each
//      pair of those rows after RoPE (position 37) against a float rotation;
//   4. a decode START issued before the load completes must be refused;
//   5. after load and RECONF_END, one decode step over N+1 cached tokens;
//      its output row is checked against a float reference.
// Each mechanism is counted and must occur: reconfiguration, overlap of the
// linear unit with the decoupled region, refused early start, last-layer
// irq, both decode K ports moving in one clock, the Q bypass on HP0, static
// masters blocked during attention, output back-pressure, static pass-through, RoPE pairs.
// Reduced sizes: D = 64, two heads, 6-token prompt.
module tb_pdswap_top;
  import pdswap_pkg::*;
  localparam int NPE = 4, D = 64, NH = 2, MAXC = 32, NG = 8, MAXCH = 16, WBD = 1024;
  localparam int N = 6, ROWS = 8, RCFG = 3000, WATCHDOG = 400000, TT = N + 2;
  localparam int BPR = D / EPB, RB = 2 * D, CH = D / 16, WBA = $clog2(WBD), BW = $clog2(BPR);
  localparam int QB = 32'h0000_0000, KB = 32'h0010_0000, VB = 32'h0020_0000, OB = 32'h0030_0000;

  logic clk = 0, rst_n = 0;
  logic reg_we = 0;
  logic [3:0] reg_addr = 4'd9;
  logic [31:0] reg_wdata = '0, reg_rdata;
  logic irq;
  logic pcap_load_valid = 0;
  rm_id_e pcap_load_rm = RM_DECODE;
  hp_m2s_t hp_m2s [NUM_HP];
  hp_s2m_t hp_s2m [NUM_HP];
  hp_m2s_t st_m2s [NUM_HP];
  hp_s2m_t st_s2m [NUM_HP];
  logic norm_start = 0, norm_in_valid = 0, norm_in_ready, norm_done;
  logic signed [15:0] norm_in_x = '0, norm_in_gamma = '0;
  logic [15:0] norm_absmax;
  logic lin_start = 0;
  logic [15:0] lin_n_rows = 16'(ROWS), lin_n_chunks = 16'(CH);
  logic [WBA-1:0] lin_w_base = '0;
  logic wb_wr_en = 0;
  logic [WBA-1:0] wb_wr_addr = '0;
  logic [NG*4-1:0] wb_wr_data = '0;
  logic lin_out_valid, lin_done;
  logic [15:0] lin_out_row;
  logic signed [31:0] lin_out_acc;
  logic [31:0] attn_kv_rows;
  logic ew_res_we = 0, ew_op_silu = 0, ew_op_mul = 0;
  logic [15:0] ew_res_addr = '0, ew_w_scale = 16'd300;
  logic signed [15:0] ew_res_data = '0;
  logic ew_out_valid;
  logic [15:0] ew_out_row;
  logic signed [15:0] ew_out_y;
  int lin_acc [ROWS], ew_res [ROWS], ew_y [ROWS];
  logic rope_en = 1;
  logic [15:0] rope_pos = 16'd37;
  logic rope_out_valid;
  logic [15:0] rope_out_row;
  logic signed [15:0] rope_out_y0, rope_out_y1;
  int c_rope;
  int n_ew;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // DDR: 16-bit words addressed by byte address / 2, per region
  int qm [TT][D], km [TT][D], vm [TT][D], om [TT][D];
  int w [ROWS][D], xs [D], gs [D], qcode [D];
  int n_q, n_lin_out;
  // mechanism counters
  int c_swap, c_overlap, c_reject, c_irq, c_dual, c_qbypass, c_blocked, c_bp, c_st_beats;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rd16(input logic [31:0] a);
    int t, i;
    t = int'(a[19:0]) / RB; i = (int'(a[19:0]) % RB) / 2;
    case (a[23:20])
      4'h0: return qm[t][i];
      4'h1: return km[t][i];
      4'h2: return vm[t][i];
      default: return om[t][i];
    endcase
  endfunction

  // ---------------- DDR model, one process per HP port ----------------
  for (genvar p = 0; p < NUM_HP; p++) begin : g_ddr
    initial begin
      hp_s2m[p] = '0;
      forever begin
        @(negedge clk);
        hp_s2m[p].w_ready = ($urandom_range(5) != 0);
        if (hp_m2s[p].ar_valid && $urandom_range(1) == 1) begin
          logic [31:0] a; int nb; bit acc;
          hp_s2m[p].ar_ready = 1;
          @(posedge clk);
          acc = hp_m2s[p].ar_valid; a = hp_m2s[p].ar_addr; nb = int'(hp_m2s[p].ar_beats);
          @(negedge clk) hp_s2m[p].ar_ready = 0;
          if (acc) for (int b = 0; b < nb; b++) begin
            while ($urandom_range(4) == 0) @(negedge clk);
            for (int e = 0; e < EPB; e++) hp_s2m[p].r_data[e*16 +: 16] = 16'(rd16(a + 32'(b*16 + e*2)));
            hp_s2m[p].r_valid = 1;
            @(posedge clk);
            while (!hp_m2s[p].r_ready) @(posedge clk);
            @(negedge clk) hp_s2m[p].r_valid = 0;
          end
        end
      end
    end
    always @(posedge clk) if (rst_n && hp_m2s[p].w_valid && hp_s2m[p].w_ready) begin
      int t;
      t = int'(hp_m2s[p].w_addr[19:0]) / RB;
      for (int e = 0; e < EPB; e++)
        om[t][(int'(hp_m2s[p].w_addr[19:0]) % RB) / 2 + e] = int'($signed(hp_m2s[p].w_data[e*16 +: 16]));
    end
  end

  // ---------------- monitors ----------------
  always @(posedge clk) if (rst_n) begin
    if (dut.decouple && dut.u_tlmm.busy) c_overlap++;
    if (dut.mode == MODE_DECODE && hp_m2s[0].r_ready && hp_s2m[0].r_valid &&
        hp_m2s[1].r_ready && hp_s2m[1].r_valid) c_dual++;
    if (dut.mode == MODE_DECODE && dut.q_valid && dut.q_ready) c_qbypass++;
    if (dut.mode != MODE_LINEAR && st_m2s[0].ar_valid && !st_s2m[0].ar_ready) c_blocked++;
    if (dut.out_valid && !dut.out_ready) c_bp++;
    if (st_s2m[0].r_valid && st_m2s[0].r_ready) c_st_beats++;
    if (dut.nq_valid) qcode[dut.nq_idx] = int'(dut.nq_q);
    if (lin_out_valid) begin
      int want;
      want = 0;
      for (int i = 0; i < D; i++) want += w[int'(lin_out_row)][i] * qcode[i];
      chk(lin_out_acc == want, $sformatf("linear row %0d: %0d vs %0d", lin_out_row, lin_out_acc, want));
      lin_acc[int'(lin_out_row)] = lin_out_acc;
      n_lin_out++;
    end
    if (ew_out_valid) begin
      real y; int want, d;
      y = ew_res[int'(ew_out_row)] / 256.0 + real'(lin_acc[int'(ew_out_row)]) * (norm_absmax / 256.0) * (ew_w_scale / 256.0) / 127.0;
      want = int'(y * 256.0);
      if (want > 32767) want = 32767;
      if (want < -32768) want = -32768;
      d = int'(ew_out_y) - want;
      chk(d <= 1 && d >= -1, $sformatf("dequantised row %0d: %0d vs %0d", ew_out_row, ew_out_y, want));
      ew_y[int'(ew_out_row)] = int'(ew_out_y);
      n_ew++;
    end
    if (rope_out_valid) begin
      real th; int r, w0, w1;
      r = int'(rope_out_row);
      th = real'(rope_pos) * $pow(10000.0, -2.0 * real'((r / 2) % (D / NH / 2)) / real'(D / NH));
      w0 = int'(ew_y[r] * $cos(th) - ew_y[r + 1] * $sin(th));
      w1 = int'(ew_y[r] * $sin(th) + ew_y[r + 1] * $cos(th));
      chk(rope_out_y0 - w0 <= 2 && w0 - rope_out_y0 <= 2 && rope_out_y1 - w1 <= 2 && w1 - rope_out_y1 <= 2,
          $sformatf("rope rows %0d/%0d: (%0d,%0d) vs (%0d,%0d)", r, r + 1, rope_out_y0, rope_out_y1, w0, w1));
      c_rope++;
    end
  end

  // ---------------- processor model ----------------
  task automatic wr(input int a, input int d);
    @(negedge clk) begin reg_we = 1; reg_addr = 4'(a); reg_wdata = 32'(d); end
    @(negedge clk) begin reg_we = 0; reg_addr = 4'd9; end
    @(negedge clk);
  endtask

  task automatic wait_done();
    @(negedge clk);
    while (!reg_rdata[1]) @(negedge clk);
  endtask

  task automatic run_static_chain();
    real ms, rms;
    for (int i = 0; i < D; i++) begin
      xs[i] = int'($urandom_range(1024)) - 512;
      gs[i] = int'($urandom_range(512)) - 256;
    end
    n_lin_out = 0; n_ew = 0;
    @(negedge clk) begin lin_start = 1; norm_start = 1; end
    @(negedge clk) begin lin_start = 0; norm_start = 0; end
    for (int i = 0; i < D; i++) begin
      norm_in_x = 16'(xs[i]); norm_in_gamma = 16'(gs[i]); norm_in_valid = 1;
      @(posedge clk);
      while (!norm_in_ready) @(posedge clk);
      @(negedge clk);
    end
    norm_in_valid = 0;
    @(posedge clk iff lin_done);
    @(negedge clk);
    repeat (3) @(negedge clk);
    chk(n_lin_out == ROWS && n_ew == ROWS, "all linear rows produced and dequantised");
    ms = 0.0;
    for (int i = 0; i < D; i++) ms += (xs[i] / 256.0) ** 2;
    rms = $sqrt(ms / D);
    begin
      real mx; int want;
      mx = 0.0;
      for (int i = 0; i < D; i++) begin
        real y; y = (xs[i] / 256.0) * (gs[i] / 256.0) / rms;
        if (y < 0) y = -y;
        if (y > mx) mx = y;
      end
      want = int'(mx * 256.0);
      chk(int'(norm_absmax) - want <= 3 && want - int'(norm_absmax) <= 3, "RMSNorm absmax");
    end
  endtask

  task automatic check_attn(input int i, input int ctx, input string what);
    real s [TT];
    for (int h = 0; h < NH; h++) begin
      real mx, den;
      int hd;
      hd = D / NH;
      mx = -1.0e30; den = 0.0;
      for (int j = 0; j < ctx; j++) begin
        s[j] = 0.0;
        for (int e = 0; e < hd; e++) s[j] += (qm[i][h*hd+e] / 256.0) * (km[j][h*hd+e] / 256.0);
        s[j] = s[j] / $sqrt(real'(hd));
        if (s[j] > mx) mx = s[j];
      end
      for (int j = 0; j < ctx; j++) den += $exp(s[j] - mx);
      for (int e = 0; e < hd; e++) begin
        real o; int want, d;
        o = 0.0;
        for (int j = 0; j < ctx; j++) o += $exp(s[j] - mx) / den * (vm[j][h*hd+e] / 256.0);
        want = int'(o * 256.0);
        d = om[i][h*hd+e] - want;
        chk(d <= 6 && d >= -6, $sformatf("%s token %0d elem %0d: %0d vs %0d", what, i, h*hd+e, om[i][h*hd+e], want));
      end
    end
  endtask

  initial begin
    for (int p = 0; p < NUM_HP; p++) st_m2s[p] = '0;
    for (int t = 0; t < TT; t++)
      for (int i = 0; i < D; i++) begin
        qm[t][i] = int'($urandom_range(512)) - 256;
        km[t][i] = int'($urandom_range(512)) - 256;
        vm[t][i] = int'($urandom_range(1024)) - 512;
        om[t][i] = 77777;
      end
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < D; i++) w[r][i] = int'($urandom_range(2)) - 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. weights
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < CH; c++) begin
        @(negedge clk);
        wb_wr_en = 1; wb_wr_addr = WBA'(r * CH + c);
        for (int g = 0; g < NG; g++)
          wb_wr_data[g*4 +: 4] = 4'((w[r][(c*NG+g)*2] + 1) * 3 + (w[r][(c*NG+g)*2+1] + 1));
      end
    @(negedge clk) wb_wr_en = 0;
    for (int r = 0; r < ROWS; r++) begin
      ew_res[r] = int'($urandom_range(2048)) - 1024;
      @(negedge clk) begin ew_res_we = 1; ew_res_addr = 16'(r); ew_res_data = 16'(ew_res[r]); end
    end
    @(negedge clk) ew_res_we = 0;
    wr(5, QB); wr(6, KB); wr(7, VB); wr(8, OB); wr(4, 2);
    // static master pass-through in linear mode: one 2-beat burst
    st_m2s[0].ar_valid = 1; st_m2s[0].ar_addr = KB; st_m2s[0].ar_beats = 16'd2; st_m2s[0].r_ready = 1;
    @(posedge clk iff st_s2m[0].ar_ready);
    @(negedge clk) st_m2s[0].ar_valid = 0;
    repeat (40) @(negedge clk);
    chk(c_st_beats == 2, "static master burst served in linear mode");
    // a static master keeps asking during attention: it must be held off
    // 2. prefill, two layers; the mode changes only between bursts
    wr(1, int'(MODE_PREFILL)); wr(2, N);
    st_m2s[0].ar_valid = 1;
    for (int l = 0; l < 2; l++) begin
      wr(3, l);
      wr(0, 1);
      if (l == 0) begin
        wait_done();
        chk(!irq, "no irq after layer 0");
        wr(0, 8);
      end else begin
        // 3. the processor reacts to irq at once
        @(negedge clk);
        while (!irq) @(negedge clk);
        c_irq++;
        st_m2s[0].ar_valid = 0;
        wr(0, 2 | 8);          // RECONF_BEGIN, clear irq
        fork
          begin : pcap
            repeat (RCFG) @(negedge clk);
            pcap_load_valid = 1; pcap_load_rm = RM_DECODE;
            @(negedge clk) pcap_load_valid = 0;
          end
          begin : ps
            // 4. early decode start must be refused
            wr(1, int'(MODE_DECODE));
            wr(0, 1);
            if (reg_rdata[5]) c_reject++;
            wr(0, 8);
            wr(1, int'(MODE_LINEAR));
            run_static_chain();
          end
        join
        wr(0, 4);              // RECONF_END
        reg_addr = 4'd10; #1;
        if (reg_rdata == 1) c_swap++;
        reg_addr = 4'd9;
      end
    end
    for (int i = 0; i < N; i++) check_attn(i, i + 1, "prefill");
    // 5. decode step for token N over N+1 cached tokens
    wr(1, int'(MODE_DECODE));
    st_m2s[0].ar_valid = 1; wr(2, N + 1); wr(0, 1);
    wait_done();
    st_m2s[0].ar_valid = 0;
    chk(int'(attn_kv_rows) == 2 * (N + 1), "decode read every K and V row once");
    check_attn(N, N + 1, "decode");
    chk(c_swap == 1, "reconfiguration happened");
    chk(c_overlap > 0, "linear unit ran while the region was being reconfigured");
    chk(c_reject == 1, "early decode start refused");
    chk(c_irq == 1, "last-layer irq");
    chk(c_dual > 0, "two K ports moved in one clock");
    chk(c_qbypass == BPR, "Q row came over the bypass port");
    chk(c_blocked > 0, "static master held off during attention");
    chk(c_bp > 0, "output back-pressure seen");
    chk(c_rope > 0 && 2 * c_rope == n_ew, "every pair of element-wise rows rotated by RoPE");
    $display("mechanisms: swap=%0d overlap=%0d reject=%0d irq=%0d dual=%0d qbypass=%0d blocked=%0d backpressure=%0d rope=%0d",
             c_swap, c_overlap, c_reject, c_irq, c_dual, c_qbypass, c_blocked, c_bp, c_rope);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pdswap_top #(.NPE(NPE), .D(D), .NHEAD(NH), .MAX_CTX(MAXC), .NG(NG),
               .MAX_CHUNKS(MAXCH), .WB_DEPTH(WBD)) dut (.*);
endmodule
