// seq_isqrt: unsigned integer square root, one result bit per clock.
//
// root = floor(sqrt(rad)) for a W-bit radicand (W even), computed by the
// classic digit-by-digit method in W/2 clocks. Pulse `start`; `done` pulses
// when `root` is valid. Helper of the RMSNorm unit.
module seq_isqrt #(
  parameter int unsigned W = 48
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [W-1:0]     rad,
  output logic             busy,
  output logic             done,
  output logic [W/2-1:0]   root
);
  logic [W-1:0]   x_r;
  logic [W/2+1:0] rem_r;
  logic [W/2-1:0] q_r;
  logic [$clog2(W/2+1)-1:0] cnt;
  logic [W/2+2:0] trial, cur;

  always_comb begin
    cur   = {rem_r[W/2:0], x_r[W-1 -: 2]};
    trial = {1'b0, q_r, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_r <= '0; rem_r <= '0; q_r <= '0; cnt <= '0;
      busy <= 1'b0; done <= 1'b0; root <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        x_r <= rad; rem_r <= '0; q_r <= '0; busy <= 1'b1;
        cnt <= ($clog2(W/2+1))'(W/2);
      end else if (busy) begin
        x_r <= x_r << 2;
        if (cur >= trial) begin
          rem_r <= (W/2+2)'(cur - trial);
          q_r   <= {q_r[W/2-2:0], 1'b1};
        end else begin
          rem_r <= (W/2+2)'(cur);
          q_r   <= {q_r[W/2-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= (cur >= trial) ? {q_r[W/2-2:0], 1'b1} : {q_r[W/2-2:0], 1'b0};
        end
      end
    end
  end
endmodule
