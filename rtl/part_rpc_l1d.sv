// part_rpc_l1d: STTRAM L1 data cache with stride prefetching, PART and RPC.
//
// The complete design: a reduced-retention STTRAM L1 data cache (sttram_l1_cache) whose
// blocks expire after the retention time of the active unit (retention_timer), a
// PC-based stride prefetcher that also re-fetches expired blocks (stride_prefetcher),
// and the PART/RPC tuner (part_tuner) that, during a profiling phase started by
// `tune_start`, samples each retention unit, selects the retention time from the
// expired_unused_prefetches statistics and sets the prefetch distance through the RPC
// table. The cache counts the events the tuner needs; the tuner drives the cache's
// retention unit and the prefetcher's distance.
//
// External interfaces: the core's load/store port (valid/ready request, one-cycle
// response, PC with each access, count of retired instructions per cycle), the memory
// port (line read requests tagged demand/prefetch, line responses, write-through
// stores), and the hand-off to the base architecture's miss-based retention tuning,
// which Algorithm 1 calls when prefetches are a negligible share of memory traffic and
// which lies outside this design. Defaults are the paper's configuration: 32 KB, 64 B
// lines, 4 ways, 2 GHz, degree 4, five retention units, 10 M-instruction intervals.
module part_rpc_l1d
  import part_pkg::*;
#(
  parameter int unsigned SIZE_BYTES     = 32768,
  parameter int unsigned LINE_BYTES     = 64,
  parameter int unsigned WAYS           = 4,
  parameter int unsigned CNT_BITS       = 2,
  parameter int unsigned MSHRS          = 8,
  parameter int unsigned MIGRATE_CYCLES = 2560,
  parameter int unsigned CYCLES_PER_US  = 2000,
  parameter int unsigned INTERVAL_INSTR = 10_000_000,
  parameter int unsigned PF_ENTRIES     = 16,
  parameter int unsigned PF_DEGREE      = 4,
  parameter int unsigned PFQ_DEPTH      = 8,
  localparam int unsigned LINE_W = LINE_BYTES * 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // core
  input  logic              core_req_valid,
  output logic              core_req_ready,
  input  core_req_t         core_req,
  output logic              core_resp_valid,
  output core_resp_t        core_resp,
  input  logic [1:0]        inst_retired,
  // memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mem_req_t          mem_req,
  input  logic              mem_resp_valid,
  output logic              mem_resp_ready,
  input  logic [ADDR_W-1:0] mem_resp_addr,
  input  logic [LINE_W-1:0] mem_resp_data,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output mem_wr_t           mem_wr,
  // tuning control and status
  input  logic              tune_start,
  output logic              tuning,
  output logic              tune_done,
  output rt_e               rt_active,
  output pf_dist_t          pf_distance,
  output logic              migrating,
  output logic [31:0]       allpf_ppm,
  output logic [31:0]       expiredpf_ppm,
  // event strobes for observation
  output logic              ev_exp_miss,    // demand miss on an expired block
  output logic              ev_pf_used,     // first demand hit on a prefetched block
  output logic              ev_late_pf,     // demand miss waiting for its prefetch
  output logic [$clog2(SIZE_BYTES / LINE_BYTES + 1)-1:0] ev_exp_unused,
  // miss-based tuning of the base architecture
  output logic              mt_start,
  output rt_e               mt_rt,
  output logic [31:0]       mt_accesses,
  output logic [31:0]       mt_misses,
  input  logic              mt_done,
  input  rt_e               mt_result
);

  localparam int unsigned EXP_W = $clog2(SIZE_BYTES / LINE_BYTES + 1);

  rt_e               rt_sel;
  logic              tick, timer_restart;
  logic              train_valid, train_trigger;
  logic [ADDR_W-1:0] train_pc, train_addr;
  logic              pf_valid, pf_ready;
  logic [ADDR_W-1:0] pf_addr;
  logic              ev_access, ev_miss, ev_mshr_req, ev_pf_issue;

  retention_timer #(.CYCLES_PER_US(CYCLES_PER_US), .CNT_BITS(CNT_BITS)) u_timer (
    .clk, .rst_n, .rt(rt_active), .restart(timer_restart), .tick
  );

  sttram_l1_cache #(
    .SIZE_BYTES(SIZE_BYTES), .LINE_BYTES(LINE_BYTES), .WAYS(WAYS), .CNT_BITS(CNT_BITS),
    .MSHRS(MSHRS), .MIGRATE_CYCLES(MIGRATE_CYCLES)
  ) u_cache (
    .clk, .rst_n,
    .core_req_valid, .core_req_ready, .core_req, .core_resp_valid, .core_resp,
    .rt_sel, .rt_active, .migrating, .tick, .timer_restart,
    .train_valid, .train_pc, .train_addr, .train_trigger,
    .pf_valid, .pf_addr, .pf_ready,
    .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp_ready, .mem_resp_addr, .mem_resp_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr,
    .ev_access, .ev_miss, .ev_exp_miss, .ev_mshr_req, .ev_pf_issue,
    .ev_pf_used, .ev_late_pf, .ev_exp_unused
  );

  stride_prefetcher #(
    .ENTRIES(PF_ENTRIES), .DEGREE(PF_DEGREE), .QDEPTH(PFQ_DEPTH), .LINE_BYTES(LINE_BYTES)
  ) u_pf (
    .clk, .rst_n, .train_valid, .train_pc, .train_addr, .train_trigger,
    .distance(pf_distance), .pf_valid, .pf_addr, .pf_ready
  );

  part_tuner #(.INTERVAL_INSTR(INTERVAL_INSTR), .EXP_W(EXP_W)) u_tuner (
    .clk, .rst_n, .start(tune_start), .inst_retired,
    .ev_access, .ev_miss, .ev_mshr_req, .ev_pf_issue, .ev_exp_unused,
    .rt_sel, .distance(pf_distance), .tuning, .done(tune_done),
    .allpf_ppm, .expiredpf_ppm,
    .mt_start, .mt_rt, .mt_accesses, .mt_misses, .mt_done, .mt_result
  );

endmodule
