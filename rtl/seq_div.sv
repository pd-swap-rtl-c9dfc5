// seq_div: unsigned restoring divider, one quotient bit per clock.
//
// Computes quo = num / den (floor) for an NW-bit numerator and DW-bit
// denominator. Pulse `start` with the operands; `busy` is high for NW cycles
// and `done` pulses in the cycle `quo` becomes valid. Division by zero returns
// all ones. Used for the few reciprocals the design needs (one per attention
// head per output token, one per RMSNorm vector), where a slow but tiny
// divider is enough; the source architecture only names a "scalar divider".
module seq_div #(
  parameter int unsigned NW = 33,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quo
);
  logic [NW-1:0]   q_r;
  logic [DW:0]     rem_r;
  logic [DW-1:0]   den_r;
  logic [$clog2(NW+1)-1:0] cnt;
  logic [DW:0]     trial;

  always_comb trial = {rem_r[DW-1:0], q_r[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      q_r   <= '0;
      rem_r <= '0;
      den_r <= '0;
      cnt   <= '0;
      quo   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        q_r   <= num;
        rem_r <= '0;
        den_r <= den;
        cnt   <= ($clog2(NW+1))'(NW);
      end else if (busy) begin
        if (trial >= {1'b0, den_r}) begin
          rem_r <= trial - {1'b0, den_r};
          q_r   <= {q_r[NW-2:0], 1'b1};
        end else begin
          rem_r <= trial;
          q_r   <= {q_r[NW-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= (trial >= {1'b0, den_r}) ? {q_r[NW-2:0], 1'b1} : {q_r[NW-2:0], 1'b0};
        end
      end
    end
  end
endmodule
