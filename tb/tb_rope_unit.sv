// tb_rope_unit: random Q8.8 pairs, positions 0..4095 and pair indices are
// rotated and compared with the rotation computed in real arithmetic
// (tolerance 2 LSB) at the default head dimension of 96; every result must leave exactly two clocks after its
// input, in order, and position 0 must return the pair unchanged (within
// 1 LSB).
module tb_rope_unit;
  localparam int HD = 96, NP = HD / 2, NIN = 3000;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [15:0] in_pos = '0;
  logic [$clog2(NP)-1:0] in_idx = '0;
  logic signed [15:0] in_x0 = '0, in_x1 = '0;
  logic out_valid;
  logic [$clog2(NP)-1:0] out_idx;
  logic signed [15:0] out_y0, out_y1;
  int checks = 0, failures = 0, cyc = 0, n_out = 0;
  int q_pos [$], q_idx [$], q_x0 [$], q_x1 [$], q_t [$];

  rope_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int pos, idx, x0, x1, t, w0, w1, tol;
    real th;
    pos = q_pos.pop_front(); idx = q_idx.pop_front(); x0 = q_x0.pop_front(); x1 = q_x1.pop_front();
    t = q_t.pop_front();
    th = real'(pos) * $pow(10000.0, -2.0 * real'(idx) / real'(HD));
    w0 = int'(x0 * $cos(th) - x1 * $sin(th));
    w1 = int'(x0 * $sin(th) + x1 * $cos(th));
    tol = (pos == 0) ? 1 : 2;
    chk(int'(out_idx) == idx, "index order");
    chk(out_y0 - w0 <= tol && w0 - out_y0 <= tol && out_y1 - w1 <= tol && w1 - out_y1 <= tol,
        $sformatf("pos %0d idx %0d (%0d,%0d): got (%0d,%0d) want (%0d,%0d)", pos, idx, x0, x1, out_y0, out_y1, w0, w1));
    chk(cyc - t == 2, $sformatf("latency %0d", cyc - t));
    n_out++;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NIN; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_pos = (i < 100) ? 16'd0 : 16'($urandom_range(4095));
      in_idx = ($clog2(NP))'($urandom_range(NP - 1));
      in_x0 = 16'(int'($urandom_range(32000)) - 16000);
      in_x1 = 16'(int'($urandom_range(32000)) - 16000);
      if (in_valid) begin
        q_pos.push_back(int'(in_pos)); q_idx.push_back(int'(in_idx));
        q_x0.push_back(int'(in_x0)); q_x1.push_back(int'(in_x1)); q_t.push_back(cyc + 1);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(negedge clk);
    chk(q_pos.size() == 0 && n_out > NIN / 2, "all pairs produced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
