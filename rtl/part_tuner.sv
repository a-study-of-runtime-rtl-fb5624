// part_tuner: Prefetch-Aware Retention time Tuning (PART) with RPC.
//
// When `start` is pulsed (a new application begins its profiling phase), the tuner runs
// the application for one sampling interval of INTERVAL_INSTR retired instructions on
// each retention unit in turn, longest first (1 ms, 100 us, 75 us, 50 us, 25 us), with
// the prefetch distance held at 1. During each interval it counts prefetches issued,
// MSHR requests (demand misses plus prefetches sent to memory), expired unused
// prefetches, accesses and misses in 32-bit saturating counters. At the end of the
// interval the shared divider forms, in ppm,
//
//     allPF     = totalPrefetches / totalMSHRRequests
//     expiredPF = expired_unused_prefetches / totalPrefetches
//
// and the paper's Algorithm 1 decides:
//   * allPF <= 0.1 %: prefetching hardly matters. The current unit becomes the result
//     and is handed to the miss-based tuning of the base architecture through the
//     mt_* ports; its answer is final.
//   * otherwise, with no baseExpiredPF yet: the current unit becomes the result and, if
//     expiredPF > 0.02 %, expiredPF becomes baseExpiredPF.
//   * otherwise, if expiredPF < 2 * baseExpiredPF the current unit becomes the result
//     and the next shorter one is tried; if not, the last result is final.
// After the shortest unit the last result is final. The expiredPF measured on the unit
// finally chosen goes through the RPC table (rpc_mapper) to give the prefetch distance.
// `done` pulses once, and from then on `rt_sel` and `distance` hold the result.
//
// Outside tuning the outputs hold their last result; after reset they are the 1 ms unit
// and distance DEFAULT_DIST (16, the paper's base prefetcher). The counters, the ppm
// unit, the instruction-count input and the miss-based hand-off ports are this design's
// choices; the decisions and thresholds are the paper's.
module part_tuner
  import part_pkg::*;
#(
  parameter int unsigned INTERVAL_INSTR = 10_000_000,  // sampling interval, instructions
  parameter int unsigned EXP_W          = 10,          // width of the expiry-count input
  parameter int unsigned DEFAULT_DIST   = 16,          // distance before the first tuning
  parameter int unsigned SAMPLE_DIST    = 1            // distance while sampling
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [1:0]        inst_retired,   // instructions retired this cycle (0..3)
  // cache events
  input  logic              ev_access,
  input  logic              ev_miss,
  input  logic              ev_mshr_req,
  input  logic              ev_pf_issue,
  input  logic [EXP_W-1:0]  ev_exp_unused,
  // results
  output rt_e               rt_sel,
  output pf_dist_t          distance,
  output logic              tuning,
  output logic              done,
  output logic [31:0]       allpf_ppm,      // last measured allPF
  output logic [31:0]       expiredpf_ppm,  // last measured expiredPF
  // hand-off to the base architecture's miss-based tuning
  output logic              mt_start,
  output rt_e               mt_rt,
  output logic [31:0]       mt_accesses,
  output logic [31:0]       mt_misses,
  input  logic              mt_done,
  input  rt_e               mt_result
);

  typedef enum logic [2:0] {T_IDLE, T_SAMPLE, T_DIV_ALL, T_DIV_EXP, T_DECIDE, T_MISS, T_FINISH} tstate_e;

  tstate_e     st_q;
  rt_e         r_q;          // unit being sampled
  rt_e         out_q;        // OutputRetentionTime
  logic [31:0] out_epf_q;    // expiredPF measured on out_q
  logic [31:0] base_q;       // baseExpiredPF
  logic        base_set_q;
  logic [31:0] instr_q;
  logic [31:0] c_pf, c_mshr, c_exp, c_acc, c_miss;
  logic        div_start, div_busy, div_done;
  logic [31:0] div_num, div_den, div_quot;
  pf_dist_t    rpc_dist, dist_q;
  rt_e         rt_q;

  ratio_divider u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quot(div_quot)
  );

  rpc_mapper u_rpc (.expired_pf_ppm(out_epf_q), .distance(rpc_dist));

  assign tuning      = (st_q != T_IDLE);
  assign rt_sel      = rt_q;
  assign distance    = dist_q;
  assign mt_rt       = out_q;
  assign mt_accesses = c_acc;
  assign mt_misses   = c_miss;

  function automatic logic [31:0] sat_add(logic [31:0] a, logic [31:0] b);
    logic [32:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[32] ? '1 : s[31:0];
  endfunction

  always_comb begin
    div_start = 1'b0;
    div_num   = c_pf;
    div_den   = c_mshr;
    if (st_q == T_SAMPLE && instr_q >= INTERVAL_INSTR) div_start = 1'b1;
    if (st_q == T_DIV_ALL && div_done) begin
      div_start = 1'b1;
      div_num   = c_exp;
      div_den   = c_pf;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q          <= T_IDLE;
      r_q           <= RT_1MS;
      out_q         <= RT_1MS;
      out_epf_q     <= '0;
      base_q        <= '0;
      base_set_q    <= 1'b0;
      instr_q       <= '0;
      {c_pf, c_mshr, c_exp, c_acc, c_miss} <= '0;
      rt_q          <= RT_1MS;
      dist_q        <= pf_dist_t'(DEFAULT_DIST);
      done          <= 1'b0;
      mt_start      <= 1'b0;
      allpf_ppm     <= '0;
      expiredpf_ppm <= '0;
    end else begin
      done     <= 1'b0;
      mt_start <= 1'b0;
      case (st_q)
        T_IDLE: if (start) begin
          r_q        <= RT_1MS;
          out_q      <= RT_1MS;
          out_epf_q  <= '0;
          base_set_q <= 1'b0;
          base_q     <= '0;
          instr_q    <= '0;
          {c_pf, c_mshr, c_exp, c_acc, c_miss} <= '0;
          rt_q       <= RT_1MS;
          dist_q     <= pf_dist_t'(SAMPLE_DIST);
          st_q       <= T_SAMPLE;
        end
        T_SAMPLE: begin
          instr_q <= instr_q + 32'(inst_retired);
          c_pf    <= sat_add(c_pf,   32'(ev_pf_issue));
          c_mshr  <= sat_add(c_mshr, 32'(ev_mshr_req));
          c_exp   <= sat_add(c_exp,  32'(ev_exp_unused));
          c_acc   <= sat_add(c_acc,  32'(ev_access));
          c_miss  <= sat_add(c_miss, 32'(ev_miss));
          if (instr_q >= INTERVAL_INSTR) st_q <= T_DIV_ALL;
        end
        T_DIV_ALL: if (div_done) begin
          allpf_ppm <= div_quot;
          st_q      <= T_DIV_EXP;
        end
        T_DIV_EXP: if (div_done) begin
          expiredpf_ppm <= div_quot;
          st_q          <= T_DECIDE;
        end
        T_DECIDE: begin
          if (allpf_ppm > ALLPF_MIN_PPM) begin
            if (base_set_q && !({1'b0, expiredpf_ppm} < {base_q, 1'b0})) begin
              st_q <= T_FINISH;                       // expiredPF grew too much
            end else begin
              out_q     <= r_q;
              out_epf_q <= expiredpf_ppm;
              if (!base_set_q && expiredpf_ppm > EXPPF_BASE_PPM) begin
                base_q     <= expiredpf_ppm;
                base_set_q <= 1'b1;
              end
              if (r_q == RT_25US) begin
                st_q <= T_FINISH;
              end else begin
                r_q     <= rt_e'(r_q - 3'd1);
                rt_q    <= rt_e'(r_q - 3'd1);
                instr_q <= '0;
                {c_pf, c_mshr, c_exp, c_acc, c_miss} <= '0;
                st_q    <= T_SAMPLE;
              end
            end
          end else begin
            out_q     <= r_q;
            out_epf_q <= expiredpf_ppm;
            mt_start  <= 1'b1;
            st_q      <= T_MISS;
          end
        end
        T_MISS: if (mt_done) begin
          out_q <= mt_result;
          st_q  <= T_FINISH;
        end
        T_FINISH: begin
          rt_q   <= out_q;
          dist_q <= rpc_dist;
          done   <= 1'b1;
          st_q   <= T_IDLE;
        end
        default: st_q <= T_IDLE;
      endcase
    end
  end

  a_div_idle: assert property (@(posedge clk) disable iff (!rst_n) div_start |-> !div_busy);

endmodule
