// ratio_divider: sequential divider that turns two event counts into a ratio in ppm.
//
// Computes  q = floor(num * SCALE / den)  for 32-bit counts, SCALE = 1,000,000 by
// default, so that q is the ratio in parts per million (0.1 % = 1000 ppm). This is the
// "division circuit" PART uses to form allPF = totalPrefetches / totalMSHRRequests and
// expiredPF = expired_unused_prefetches / totalPrefetches. A zero denominator gives 0,
// and a quotient beyond 32 bits saturates.
//
// It is a restoring divider producing one quotient bit per cycle: `start` (one cycle,
// while not busy) loads the operands, `done` pulses QW + 1 = 65 cycles later (one load cycle, then one cycle per quotient bit) with `quot`
// valid, and `quot` holds until the next start. The paper only names the divider; its
// radix, width and ppm scaling are this design's choices.
module ratio_divider #(
  parameter int unsigned SCALE = 1_000_000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] num,
  input  logic [31:0] den,
  output logic        busy,
  output logic        done,
  output logic [31:0] quot
);

  localparam int unsigned QW = 64;

  logic [QW-1:0] dvd_q;     // remaining dividend bits, shifted out MSB first
  logic [QW-1:0] q_q;
  logic [32:0]   rem_q;
  logic [31:0]   den_q;
  logic [6:0]    cnt_q;
  logic          zero_q;

  logic [32:0] rem_sh;
  assign rem_sh = {rem_q[31:0], dvd_q[QW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dvd_q  <= '0;
      q_q    <= '0;
      rem_q  <= '0;
      den_q  <= '0;
      cnt_q  <= '0;
      zero_q <= 1'b0;
      busy   <= 1'b0;
      done   <= 1'b0;
      quot   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        dvd_q  <= 64'(num) * 64'(SCALE);
        den_q  <= den;
        zero_q <= (den == '0);
        rem_q  <= '0;
        q_q    <= '0;
        cnt_q  <= '0;
        busy   <= 1'b1;
      end else if (busy) begin
        dvd_q <= dvd_q << 1;
        if (rem_sh >= {1'b0, den_q}) begin
          rem_q <= rem_sh - {1'b0, den_q};
          q_q   <= {q_q[QW-2:0], 1'b1};
        end else begin
          rem_q <= rem_sh;
          q_q   <= {q_q[QW-2:0], 1'b0};
        end
        cnt_q <= cnt_q + 7'd1;
        if (cnt_q == 7'(QW - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (zero_q)
            quot <= '0;
          else if (q_q[QW-2:31] != '0)          // final quotient above 32 bits
            quot <= '1;
          else
            quot <= {q_q[30:0], (rem_sh >= {1'b0, den_q})};
        end
      end
    end
  end

endmodule
