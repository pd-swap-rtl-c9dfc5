// tb_elementwise_unit: random residuals, scales and linear results; every
// output is compared with y = res + acc * act_scale * w_scale / 127 (or, in
// SiLU mode, SiLU of the dequantised value; in multiply mode, the
// dequantised value times the stored row value) computed in real arithmetic
// (tolerance 1 LSB of Q8.8 for the residual path, 2 LSB for SiLU, and
// 1 + |stored|/256 LSB for the product, whose factor is first rounded;
// saturation included), and each output must leave exactly two clocks after
// its input, in order.
module tb_elementwise_unit;
  import pdswap_pkg::*;
  localparam int R = 64, NIN = 1200;
  logic clk = 0, rst_n = 0;
  logic res_we = 0;
  logic [15:0] res_addr = '0;
  logic signed [15:0] res_data = '0;
  logic [15:0] act_scale = '0, w_scale = '0;
  logic op_silu = 0, op_mul = 0;
  logic in_valid = 0;
  logic [15:0] in_row = '0;
  logic signed [31:0] in_acc = '0;
  logic out_valid;
  logic [15:0] out_row;
  logic signed [15:0] out_y;
  int checks = 0, failures = 0;
  int res [R];
  int q_row [$], q_acc [$], q_t [$];
  int cyc = 0, n_out = 0, n_silu = 0, n_mul = 0;

  elementwise_unit #(.MAX_ROWS(R)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int abs_i(input int v); return v < 0 ? -v : v; endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    int row, acc, t, want, d;
    real y;
    row = q_row.pop_front(); acc = q_acc.pop_front(); t = q_t.pop_front();
    y = real'(acc) * (act_scale / 256.0) * (w_scale / 256.0) / 127.0;
    if (!op_silu && !op_mul) y = y + res[row] / 256.0;
    if (y > 32767.0 / 256.0) y = 32767.0 / 256.0;
    if (y < -128.0) y = -128.0;
    if (op_silu) y = y / (1.0 + $exp(-y));
    if (op_mul) begin
      y = y * res[row] / 256.0;
      if (y > 32767.0 / 256.0) y = 32767.0 / 256.0;
      if (y < -128.0) y = -128.0;
    end
    want = int'(y * 256.0);
    d = int'(out_y) - want;
    if (op_silu) begin n_silu++; if (d == 2 || d == -2) d = 0; end
    // d was rounded to Q8.8 before the product: up to |stored| / 256 more
    if (op_mul) begin n_mul++; if (d <= 1 + abs_i(res[row]) / 256 && d >= -1 - abs_i(res[row]) / 256) d = 0; end
    chk(out_row == 16'(row), "row order");
    chk(d <= 1 && d >= -1, $sformatf("row %0d acc %0d: %0d vs %0d", row, acc, out_y, want));
    chk(cyc - t == 2, $sformatf("latency %0d", cyc - t));
    n_out++;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++) begin
      res[r] = int'($urandom_range(4096)) - 2048;
      @(negedge clk) begin res_we = 1; res_addr = 16'(r); res_data = 16'(res[r]); end
    end
    @(negedge clk) res_we = 0;
    for (int k = 0; k < 8; k++) begin
      op_silu = (k == 4 || k == 5);
      op_mul  = (k >= 6);
      act_scale = 16'($urandom_range(2000) + 16);
      w_scale   = 16'($urandom_range(400) + 16);
      for (int i = 0; i < NIN / 8; i++) begin
        @(negedge clk);
        in_valid = ($urandom_range(3) != 0);
        in_row = 16'($urandom_range(R - 1));
        if (k == 4 || k == 6) in_acc = 32'($urandom_range(400)) - 200;
        else in_acc = (k == 3 || k == 5) ? 32'($urandom_range(2000000)) - 1000000 : 32'($urandom_range(4000)) - 2000;
        if (in_valid) begin q_row.push_back(int'(in_row)); q_acc.push_back(int'(in_acc)); q_t.push_back(cyc + 1); end
      end
      @(negedge clk) in_valid = 0;
      repeat (4) @(negedge clk);
    end
    chk(q_row.size() == 0 && n_out > NIN / 2 && n_silu > 100 && n_mul > 100, "all inputs produced an output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
