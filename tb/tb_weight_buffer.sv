// tb_weight_buffer: writes random words to the weight buffer, reads them back
// in a shuffled order and checks data and the one-cycle read latency.
module tb_weight_buffer;
  localparam int DEPTH = 1024, W = 32;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [W-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  weight_buffer #(.DEPTH(DEPTH), .WORD_W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = i[$clog2(DEPTH)-1:0]; wr_data = $urandom; ref_mem[i] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 500; i++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      @(negedge clk) begin rd_en = 1; rd_addr = a[$clog2(DEPTH)-1:0]; end
      @(negedge clk) rd_en = 0;
      checks++;
      if (rd_data !== ref_mem[a]) begin
        failures++;
        $display("addr %0d: got %h want %h", a, rd_data, ref_mem[a]);
      end
    end
    // rd_en low holds the previous output
    @(negedge clk);
    checks++;
    if (rd_data !== ref_mem[rd_addr]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
