// rpc_mapper: Retention time-based Prefetch Control (RPC) distance table.
//
// Maps expiredPF -- expired unused prefetches over total prefetches, measured at
// prefetch distance 1 in the sampling interval of the retention time PART selected --
// to the prefetch distance used for the rest of the run (the paper's Table 1):
//
//     expiredPF above 5 %          -> 1
//     1.01 % .. 5 %                -> 4
//     0.51 % .. 1 %                -> 8
//     0.05 % .. 0.5 %              -> 16
//     below 0.05 %                 -> 32
//
// The ratio arrives in ppm. The table's printed bounds leave gaps (5.00-5.01 %,
// 1.00-1.01 %, 0.50-0.51 %); this design closes them by treating each range as ending
// exactly at the next one's printed upper bound: > 50000, > 10000, > 5000, >= 500 ppm.
// Purely combinational; the paper counts RPC's cost as one 32-bit comparator, this
// version uses four in parallel.
module rpc_mapper
  import part_pkg::*;
(
  input  logic [31:0] expired_pf_ppm,
  output pf_dist_t    distance
);

  always_comb begin
    if (expired_pf_ppm > 32'd50000)      distance = 6'd1;
    else if (expired_pf_ppm > 32'd10000) distance = 6'd4;
    else if (expired_pf_ppm > 32'd5000)  distance = 6'd8;
    else if (expired_pf_ppm >= 32'd500)  distance = 6'd16;
    else                                 distance = 6'd32;
  end

endmodule
