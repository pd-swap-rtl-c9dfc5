// tb_rmsnorm_findmax: random vectors and gains; y checked against a
// floating-point RMSNorm (3 LSB), absmax against the maximum |y| the unit
// produced, and q against round(127*y/absmax) (1 LSB). Also checks that all
// D outputs come out on consecutive clocks.
module tb_rmsnorm_findmax;
  localparam int D = 64;
  logic clk = 0, rst_n = 0, start = 0, busy, done, in_valid = 0, in_ready, out_valid;
  logic signed [15:0] in_x = '0, in_gamma = '0, out_y;
  logic signed [7:0] out_q;
  logic [$clog2(D)-1:0] out_idx;
  logic [15:0] absmax;
  int checks = 0, failures = 0;
  int xs [D], gs [D], ys [D], qs [D], n_out, first_out, last_out, cyc;

  rmsnorm_findmax #(.D(D)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    if (n_out == 0) first_out = cyc;
    last_out = cyc;
    ys[out_idx] = int'(out_y);
    qs[out_idx] = int'(out_q);
    n_out++;
  end

  task automatic run(input int xr, input int gr);
    real ms, rms;
    int mx;
    n_out = 0;
    for (int i = 0; i < D; i++) begin
      xs[i] = int'($urandom_range(2*xr)) - xr;
      gs[i] = int'($urandom_range(2*gr)) - gr;
    end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int i = 0; i < D; i++) begin
      in_x = 16'(xs[i]); in_gamma = 16'(gs[i]); in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
    @(posedge clk iff done);
    @(negedge clk);
    ms = 0.0;
    for (int i = 0; i < D; i++) ms += (xs[i] / 256.0) * (xs[i] / 256.0);
    rms = $sqrt(ms / D);
    mx = 0;
    for (int i = 0; i < D; i++) begin
      int want, d;
      want = int'((xs[i] / 256.0) * (gs[i] / 256.0) / rms * 256.0);
      d = ys[i] - want;
      checks++;
      if (d > 3 || d < -3) begin failures++; $display("y[%0d] got %0d want %0d", i, ys[i], want); end
      if ((ys[i] < 0 ? -ys[i] : ys[i]) > mx) mx = (ys[i] < 0 ? -ys[i] : ys[i]);
    end
    checks++;
    if (int'(absmax) != mx) begin failures++; $display("absmax %0d want %0d", absmax, mx); end
    for (int i = 0; i < D; i++) begin
      int want, d;
      want = int'(127.0 * ys[i] / mx);
      d = qs[i] - want;
      checks++;
      if (d > 1 || d < -1) begin failures++; $display("q[%0d] got %0d want %0d", i, qs[i], want); end
    end
    checks++;
    if (n_out != D || last_out - first_out != D - 1) begin failures++; $display("outputs %0d span %0d", n_out, last_out - first_out); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1024, 512);
    run(64, 256);
    run(8000, 300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
