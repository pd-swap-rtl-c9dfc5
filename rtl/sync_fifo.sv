// sync_fifo: single-clock first-in first-out buffer with valid/ready ports.
//
// DEPTH entries of W bits. in_ready is low when full, out_valid is high when
// not empty; a word moves on a cycle where valid and ready are both high.
// Used as the output FIFO of the prefill attention module.
module sync_fifo #(
  parameter int unsigned W     = 128,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;

  assign in_ready  = (cnt != (AW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (out_valid && out_ready) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(in_valid && in_ready) - (AW+1)'(out_valid && out_ready);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt <= (AW+1)'(DEPTH));
endmodule
