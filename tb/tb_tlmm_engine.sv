// tb_tlmm_engine: loads random ternary weights into the weight buffer, runs
// several tokens (the per-token GEMV loop) and compares every row sum with a
// direct sum of w*x. Also checks the lookup rate: one row result every
// n_chunks clocks and `done` n_rows*n_chunks + 1 clocks after the last
// activation beat.
module tb_tlmm_engine;
  localparam int G = 2, NG = 8, WBD = 4096, WBA = 12;
  localparam int ROWS = 20, CH = 6, DIN = CH * NG * G, TOKENS = 3, BASE = 100;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done, act_valid = 0, act_ready, wb_wr_en = 0;
  logic [15:0] n_rows = ROWS, n_chunks = CH;
  logic [WBA-1:0] w_base = BASE, wb_wr_addr = '0;
  logic [127:0] act_data = '0;
  logic [31:0] wb_wr_data = '0;
  logic out_valid;
  logic [15:0] out_row;
  logic signed [31:0] out_acc;
  int checks = 0, failures = 0;
  int w [ROWS][DIN];
  int x [DIN];
  int last_out_cycle, cyc = 0, act_last_cycle, n_out;

  tlmm_engine #(.G(G), .NG(NG), .MAX_CHUNKS(16), .WB_DEPTH(WBD)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker
  always @(posedge clk) if (rst_n && out_valid) begin
    int want;
    want = 0;
    for (int i = 0; i < DIN; i++) want += w[out_row][i] * x[i];
    checks++;
    if (out_acc !== want) begin
      failures++;
      $display("row %0d: got %0d want %0d", out_row, out_acc, want);
    end
    if (n_out > 0) begin
      checks++;
      if (cyc - last_out_cycle != CH) begin failures++; $display("row spacing %0d", cyc - last_out_cycle); end
    end
    last_out_cycle = cyc;
    n_out++;
  end

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < DIN; i++) w[r][i] = int'($urandom_range(2)) - 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load the weight buffer: word (r, c) holds groups g = 0..NG-1
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < CH; c++) begin
        @(negedge clk);
        wb_wr_en = 1;
        wb_wr_addr = WBA'(BASE + r * CH + c);
        for (int g = 0; g < NG; g++) begin
          int i0;
          i0 = (c * NG + g) * G;
          wb_wr_data[g*4 +: 4] = 4'((w[r][i0] + 1) * 3 + (w[r][i0+1] + 1));
        end
      end
    @(negedge clk) wb_wr_en = 0;
    for (int t = 0; t < TOKENS; t++) begin
      for (int i = 0; i < DIN; i++) x[i] = int'($signed(8'($urandom)));
      if (t == 1) for (int i = 0; i < DIN; i++) x[i] = 127;
      n_out = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      for (int c = 0; c < CH; c++) begin
        for (int k = 0; k < NG * G; k++) act_data[k*8 +: 8] = 8'(x[c*NG*G + k]);
        act_valid = 1;
        @(posedge clk);
        while (!act_ready) @(posedge clk);
        act_last_cycle = cyc;
        @(negedge clk);
      end
      act_valid = 0;
      // done is sampled one edge after the edge that set it
      @(posedge clk iff done);
      checks++;
      if (cyc - act_last_cycle != ROWS * CH + 2) begin
        failures++;
        $display("done after %0d clocks, want %0d", cyc - act_last_cycle, ROWS * CH + 2);
      end
      @(negedge clk);
      checks++;
      if (n_out != ROWS) begin failures++; $display("rows out %0d", n_out); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
