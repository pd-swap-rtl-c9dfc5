// tb_tlmm_precompute: random int8 activations; every table entry must equal
// the ternary dot product whose weights are the entry index read in base 3
// (digit = weight + 1, first element most significant).
module tb_tlmm_precompute;
  localparam int G = 2, NG = 8, TE = 9, TW = 10;
  logic signed [7:0]    act [NG*G];
  logic signed [TW-1:0] tbl [NG][TE];
  int checks = 0, failures = 0;

  tlmm_precompute #(.G(G), .NG(NG)) dut (.act(act), .table_o(tbl));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      for (int i = 0; i < NG*G; i++) act[i] = 8'($urandom);
      if (it == 0) for (int i = 0; i < NG*G; i++) act[i] = -8'sd128;
      #1;
      for (int g = 0; g < NG; g++)
        for (int e = 0; e < TE; e++) begin
          int w0, w1, want;
          w0 = e / 3 - 1;
          w1 = e % 3 - 1;
          want = w0 * int'(act[g*2]) + w1 * int'(act[g*2+1]);
          checks++;
          if (int'(tbl[g][e]) != want) begin
            failures++;
            if (failures < 10) $display("g%0d e%0d got %0d want %0d", g, e, tbl[g][e], want);
          end
        end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
