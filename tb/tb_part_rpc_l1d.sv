// tb_part_rpc_l1d: end-to-end test of the STTRAM L1 data cache with stride prefetching,
// PART and RPC, at a scaled time base.
//
// Scaling: CYCLES_PER_US = 20 (the 25 us unit lasts 500 cycles, 1 ms 20000 cycles) and
// sampling intervals of 3000 instructions, three per completed access; everything else
// is at the design's defaults (32 KB, 4 ways, 2560-cycle migration, degree 4).
//
// Three profiling phases run back to back: strided streams (PART decides from
// expiredPF), random accesses (prefetches are a negligible share of memory requests, so
// the decision is handed to miss-based tuning, modelled here by keeping the proposed
// unit), and strided streams again. The testbench counts, over the tuner's own sampling
// windows, the prefetches, memory requests and expired unused prefetches visible at the
// ports, and replays Algorithm 1 and Table 1 on them to predict the retention unit and
// prefetch distance each phase must end with. Every load's data is checked. Each
// mechanism must occur at least once: expiration miss, prefetch issued, prefetch used,
// expired unused prefetch, late prefetch, migration, store write-through, miss-based
// hand-off and completed tuning.
module tb_part_rpc_l1d;
  import part_pkg::*;
  localparam int unsigned INTERVAL = 3000;
  localparam int unsigned EXP_W    = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  logic core_req_valid, core_req_ready, core_resp_valid;
  core_req_t core_req;
  core_resp_t core_resp;
  logic [1:0] inst_retired;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready, mem_wr_valid, mem_wr_ready;
  mem_req_t mem_req;
  logic [31:0] mem_resp_addr;
  logic [511:0] mem_resp_data;
  mem_wr_t mem_wr;
  logic tune_start = 1'b0, tuning, tune_done, migrating;
  rt_e rt_active, mt_rt, mt_result;
  pf_dist_t pf_distance;
  logic [31:0] allpf_ppm, expiredpf_ppm, mt_accesses, mt_misses;
  logic ev_exp_miss, ev_pf_used, ev_late_pf;
  logic [EXP_W-1:0] ev_exp_unused;
  logic mt_start, mt_done = 1'b0;
  logic enable = 1'b0, mode = 1'b0;
  int n_loads, n_hits, n_errors, n_demand, n_pf;
  int checks = 0, failures = 0;

  part_rpc_l1d #(.CYCLES_PER_US(20), .INTERVAL_INSTR(INTERVAL)) dut (.*);

  mem_model #(.LAT(40), .READY_RANDOM(1'b1)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_ready(mem_resp_ready), .resp_addr(mem_resp_addr),
    .resp_data(mem_resp_data), .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr(mem_wr),
    .n_demand, .n_pf
  );

  core_model u_core (
    .clk, .rst_n, .enable, .mode, .core_req_valid, .core_req_ready, .core_req,
    .core_resp_valid, .core_resp, .n_loads, .n_hits, .n_errors
  );

  always #5 clk = ~clk;

  // every completed access stands for three instructions (one memory, two others)
  assign inst_retired = core_resp_valid ? 2'd3 : 2'd0;

  // miss-based tuning of the base architecture: keeps the proposed unit
  assign mt_result = mt_rt;
  always @(posedge clk) mt_done <= mt_start;

  // ---------------------------------------------------------------- mechanism counters
  int m_exp_miss = 0, m_pf = 0, m_pf_used = 0, m_exp_unused = 0, m_late = 0, m_migr = 0;
  int m_wt = 0, m_handoff = 0, m_done = 0;
  logic mig_d = 1'b0;
  always @(posedge clk) if (rst_n) begin
    m_exp_miss   += int'(ev_exp_miss);
    m_pf         += int'(mem_req_valid && mem_req_ready && mem_req.is_pf);
    m_pf_used    += int'(ev_pf_used);
    m_exp_unused += int'(ev_exp_unused);
    m_late       += int'(ev_late_pf);
    m_migr       += int'(migrating && !mig_d);
    m_wt         += int'(mem_wr_valid && mem_wr_ready);
    m_handoff    += int'(mt_start);
    m_done       += int'(tune_done);
    mig_d        <= migrating;
  end

  // ---------------------------------------------------------------- reference PART
  typedef struct { longint pf; longint mshr; longint exp; } sample_t;
  sample_t samples[$];
  sample_t cur;
  logic in_win_d = 1'b0;
  logic in_win;
  assign in_win = (dut.u_tuner.st_q == 3'd1);   // the tuner's sampling state

  always @(posedge clk) if (rst_n) begin
    if (in_win && !in_win_d) cur = '{0, 0, 0};
    if (in_win) begin
      cur.pf   += longint'(mem_req_valid && mem_req_ready && mem_req.is_pf);
      cur.mshr += longint'(mem_req_valid && mem_req_ready);
      cur.exp  += longint'(ev_exp_unused);
    end
    if (!in_win && in_win_d) samples.push_back(cur);
    in_win_d <= in_win;
  end

  function automatic longint ppm(longint n, longint d);
    return (d == 0) ? 0 : (n * 1000000) / d;
  endfunction

  function automatic int rpc_ref(longint e);
    if (e > 50000) return 1;
    if (e > 10000) return 4;
    if (e > 5000)  return 8;
    if (e >= 500)  return 16;
    return 32;
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run_phase(logic m, string name);
    int exp_rt, n_used;
    longint base, epf, a, e;
    bit base_set, fin, miss;
    mode = m;
    samples.delete();
    @(negedge clk);
    tune_start = 1'b1;
    @(negedge clk);
    tune_start = 1'b0;
    while (!tune_done) begin
      @(negedge clk);
      if (tuning && dut.u_tuner.st_q == 3'd1)
        if (pf_distance != 6'd1) begin check(0, "distance 1 while sampling"); break; end
    end
    @(negedge clk);
    // replay Algorithm 1
    exp_rt = 4; epf = 0; base_set = 0; base = 0; fin = 0; miss = 0; n_used = 0;
    foreach (samples[k]) begin
      if (fin) break;
      n_used++;
      a = ppm(samples[k].pf, samples[k].mshr);
      e = ppm(samples[k].exp, samples[k].pf);
      if (a > 1000) begin
        if (base_set) begin
          if (e < 2 * base) begin exp_rt = 4 - k; epf = e; end else fin = 1;
        end else begin
          exp_rt = 4 - k; epf = e;
          if (e > 200) begin base = e; base_set = 1; end
        end
      end else begin
        exp_rt = 4 - k; epf = e; miss = 1; fin = 1;
      end
    end
    $display("%s: %0d intervals, rt %0d (expected %0d), distance %0d (expected %0d), allPF %0d ppm, expiredPF %0d ppm",
             name, samples.size(), rt_active, exp_rt, pf_distance, rpc_ref(epf), allpf_ppm, expiredpf_ppm);
    check(n_used == samples.size(), "intervals sampled");
    check(int'(dut.u_tuner.rt_sel) == exp_rt, $sformatf("%s: retention unit", name));
    check(int'(pf_distance) == rpc_ref(epf), $sformatf("%s: prefetch distance", name));
    // let the cache settle in the chosen unit
    repeat (3000) @(negedge clk);
    check(rt_active == dut.u_tuner.rt_sel, $sformatf("%s: cache runs the chosen unit", name));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    enable = 1'b1;
    repeat (200) @(negedge clk);
    run_phase(1'b0, "strided");
    run_phase(1'b1, "random");
    run_phase(1'b0, "strided again");
    enable = 1'b0;
    repeat (200) @(negedge clk);
    check(n_errors == 0, $sformatf("load data errors %0d", n_errors));
    check(n_loads > 1000, "loads completed");
    $display("loads %0d hits %0d | expiration misses %0d, prefetches %0d, used %0d, expired unused %0d, late %0d, migrations %0d, write-throughs %0d, hand-offs %0d, tunings %0d",
             n_loads, n_hits, m_exp_miss, m_pf, m_pf_used, m_exp_unused, m_late, m_migr, m_wt, m_handoff, m_done);
    check(m_exp_miss > 0, "expiration miss occurred");
    check(m_pf > 0, "prefetch issued");
    check(m_pf_used > 0, "prefetch used");
    check(m_exp_unused > 0, "expired unused prefetch occurred");
    check(m_late > 0, "late prefetch occurred");
    check(m_migr > 0, "migration occurred");
    check(m_wt > 0, "write-through occurred");
    check(m_handoff > 0, "miss-based hand-off occurred");
    check(m_done == 3, "three tunings completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
