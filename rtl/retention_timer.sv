// retention_timer: time base for STTRAM block expiration.
//
// Every cache block carries a small age counter of CNT_BITS bits that restarts when the
// block is written. This module divides the clock so that one `tick` occurs every
// retention_time / 2**CNT_BITS; a block whose counter is already saturated when a tick
// arrives has expired. A block therefore expires between (2**CNT_BITS-1)/2**CNT_BITS and
// one full retention time after its last write. The paper states only that blocks expire
// once the unit's retention time has passed; the coarse shared-tick scheme is this
// design's choice.
//
// Interface: `rt` selects the active retention unit; `restart` (one cycle) zeroes the
// prescaler, which the cache pulses when it switches retention unit. `tick` is a one-cycle
// pulse, registered. With CYCLES_PER_US = 2000 (2 GHz, as in the paper) the 1 ms unit
// ticks every 500,000 cycles and the 25 us unit every 12,500 cycles.
module retention_timer
  import part_pkg::*;
#(
  parameter int unsigned CYCLES_PER_US = 2000,  // clock cycles per microsecond (2 GHz)
  parameter int unsigned CNT_BITS      = 2      // per-block age counter width
) (
  input  logic clk,
  input  logic rst_n,
  input  rt_e  rt,
  input  logic restart,
  output logic tick
);

  logic [31:0] period;   // cycles between ticks
  logic [31:0] cnt;

  always_comb begin
    period = (32'(rt_us(rt)) * 32'(CYCLES_PER_US)) >> CNT_BITS;
    if (period == '0) period = 32'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (restart) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (cnt >= period - 32'd1) begin
      cnt  <= '0;
      tick <= 1'b1;
    end else begin
      cnt  <= cnt + 32'd1;
      tick <= 1'b0;
    end
  end

endmodule
