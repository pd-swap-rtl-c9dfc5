// weight_buffer: on-chip store of the packed ternary weights of the
// table-lookup linear unit (the URAM "table entries" of the architecture).
//
// One word holds the lookup indices for all parallel table lookups of one
// clock (NG groups of 4-bit indices by default). A write port loads the
// buffer from DDR once; the engine reads one word per clock with a read
// latency of one cycle. The weights stay resident for both prefill and
// decode, which is the point of the static region. Depth and word width are
// this implementation's choice: the default holds one 1536 x 4096 projection.
module weight_buffer #(
  parameter int unsigned DEPTH  = 393216,
  parameter int unsigned WORD_W = 32
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WORD_W-1:0]        wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WORD_W-1:0]        rd_data
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
