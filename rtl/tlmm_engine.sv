// tlmm_engine: table-lookup linear unit for ternary (1.58-bit) weights.
//
// Computes one token's GEMV y[r] = sum_i W[r][i] * x[i] with int8 x and
// ternary W, as in the architecture's shared linear engine: weights stay
// resident in the on-chip weight buffer, and prefill is handled as a loop of
// independent per-token GEMVs, so no weight tiling is needed.
//
// Operation for one token, after `start`:
//   1. Table phase: n_chunks activation beats (NG*G int8 values each) are
//      accepted, one per clock; each is expanded by tlmm_precompute into NG
//      tables of 3^G partial sums and stored in the table memory.
//   2. Row phase: for each output row r and chunk c the engine reads the
//      weight word at w_base + r*n_chunks + c (NG packed indices), does NG
//      lookups in parallel, adds them and accumulates over the chunks.
//      One weight word per clock; a row result appears every n_chunks clocks
//      and `done` pulses n_rows*n_chunks + 1 clocks after the clock that
//      accepted the last activation beat.
// Results leave as (row, int32 sum) on a valid-only stream; `done` pulses
// with the last one. Dequantisation happens downstream.
// The weight buffer is loaded through the wb_wr_* port.
module tlmm_engine
#(
  parameter int unsigned G          = 2,
  parameter int unsigned NG         = 8,
  parameter int unsigned MAX_CHUNKS = 256,
  parameter int unsigned WB_DEPTH   = 393216,
  localparam int unsigned TE  = 3 ** G,
  localparam int unsigned IW  = $clog2(TE),
  localparam int unsigned WW  = NG * IW,
  localparam int unsigned AW  = NG * G * 8,
  localparam int unsigned WBA = $clog2(WB_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // control
  input  logic           start,
  input  logic [15:0]    n_rows,
  input  logic [15:0]    n_chunks,
  input  logic [WBA-1:0] w_base,
  output logic           busy,
  output logic           done,
  // activation stream (int8, element 0 in the low byte)
  input  logic           act_valid,
  output logic           act_ready,
  input  logic [AW-1:0]  act_data,
  // weight buffer load port
  input  logic           wb_wr_en,
  input  logic [WBA-1:0] wb_wr_addr,
  input  logic [WW-1:0]  wb_wr_data,
  // results
  output logic           out_valid,
  output logic [15:0]    out_row,
  output logic signed [31:0] out_acc
);
  localparam int unsigned TW = 8 + $clog2(G) + 1;

  typedef enum logic [1:0] {S_IDLE, S_TABLE, S_ROWS, S_DRAIN} state_e;
  state_e state;

  logic signed [7:0]    act_arr [NG*G];
  logic signed [TW-1:0] tbl_new [NG][TE];
  logic signed [TW-1:0] tbl_mem [MAX_CHUNKS][NG][TE];
  logic signed [TW-1:0] tbl_q   [NG][TE];

  logic [15:0] rows_r, chunks_r, r_cnt, c_cnt;
  logic [WBA-1:0] base_r, rd_addr;
  logic [WW-1:0]  w_word;
  logic s1_valid, s1_first, s1_last;
  logic [15:0] s1_row;
  logic signed [31:0] acc, lookup_sum;

  always_comb
    for (int i = 0; i < NG*G; i++) act_arr[i] = act_data[i*8 +: 8];

  tlmm_precompute #(.G(G), .NG(NG)) u_pre (.act(act_arr), .table_o(tbl_new));

  weight_buffer #(.DEPTH(WB_DEPTH), .WORD_W(WW)) u_wb (
    .clk, .wr_en(wb_wr_en), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data),
    .rd_en(state == S_ROWS), .rd_addr(rd_addr), .rd_data(w_word));

  assign act_ready = (state == S_TABLE);
  assign busy      = (state != S_IDLE);
  assign rd_addr   = WBA'(base_r + WBA'(32'(r_cnt) * 32'(chunks_r) + 32'(c_cnt)));

  // table memory write and registered read
  always_ff @(posedge clk) begin
    if (state == S_TABLE && act_valid) tbl_mem[c_cnt[$clog2(MAX_CHUNKS)-1:0]] <= tbl_new;
    if (state == S_ROWS)               tbl_q <= tbl_mem[c_cnt[$clog2(MAX_CHUNKS)-1:0]];
  end

  // parallel table lookup and adder tree
  always_comb begin
    lookup_sum = '0;
    for (int g = 0; g < NG; g++)
      lookup_sum += 32'(tbl_q[g][w_word[g*IW +: IW]]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; rows_r <= '0; chunks_r <= '0; base_r <= '0;
      r_cnt <= '0; c_cnt <= '0; s1_valid <= 1'b0; s1_first <= 1'b0;
      s1_last <= 1'b0; s1_row <= '0; acc <= '0;
      out_valid <= 1'b0; out_row <= '0; out_acc <= '0; done <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      s1_valid  <= 1'b0;
      // stage 2: accumulate
      if (s1_valid) begin
        if (s1_last) begin
          out_valid <= 1'b1;
          out_row   <= s1_row;
          out_acc   <= (s1_first ? 32'sd0 : acc) + lookup_sum;
          if (s1_row == rows_r - 1) done <= 1'b1;
        end
        acc <= (s1_first ? 32'sd0 : acc) + lookup_sum;
      end
      case (state)
        S_IDLE: if (start) begin
          rows_r <= n_rows; chunks_r <= n_chunks; base_r <= w_base;
          r_cnt <= '0; c_cnt <= '0;
          state <= S_TABLE;
        end
        S_TABLE: if (act_valid) begin
          if (c_cnt == chunks_r - 1) begin
            c_cnt <= '0;
            state <= S_ROWS;
          end else c_cnt <= c_cnt + 1'b1;
        end
        S_ROWS: begin
          s1_valid <= 1'b1;
          s1_first <= (c_cnt == 0);
          s1_last  <= (c_cnt == chunks_r - 1);
          s1_row   <= r_cnt;
          if (c_cnt == chunks_r - 1) begin
            c_cnt <= '0;
            if (r_cnt == rows_r - 1) state <= S_DRAIN;
            else r_cnt <= r_cnt + 1'b1;
          end else c_cnt <= c_cnt + 1'b1;
        end
        S_DRAIN: if (done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_chunks: assert property (@(posedge clk) disable iff (!rst_n)
    start && state == S_IDLE |-> n_chunks != 0 && n_chunks <= 16'(MAX_CHUNKS) && n_rows != 0);
endmodule
