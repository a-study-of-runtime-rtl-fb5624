// tb_part_rpc_l1d_full: one complete PART/RPC profiling phase with every parameter of the
// design at its default: 32 KB cache, 2 GHz time base (25 us = 50,000 cycles, 1 ms =
// 2,000,000 cycles), 2560-cycle migrations and sampling intervals of 10 million
// instructions, i.e. up to 50 million instructions for the five retention units.
//
// The core model runs strided streams; every completed access stands for three
// instructions. The testbench counts prefetches, memory requests and expired unused
// prefetches over the tuner's own sampling windows, replays Algorithm 1 and Table 1 on
// them, and checks the resulting retention unit and prefetch distance, that the cache
// migrates to the chosen unit, and every load's data.
module tb_part_rpc_l1d_full;
  import part_pkg::*;

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
  logic [9:0] ev_exp_unused;
  logic mt_start, mt_done = 1'b0;
  logic enable = 1'b0, mode = 1'b0;
  int n_loads, n_hits, n_errors, n_demand, n_pf;
  int checks = 0, failures = 0;

  part_rpc_l1d dut (.*);

  mem_model #(.LAT(40)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_ready(mem_resp_ready), .resp_addr(mem_resp_addr),
    .resp_data(mem_resp_data), .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr(mem_wr),
    .n_demand, .n_pf
  );

  core_model #(.REGION_LINES(1024)) u_core (
    .clk, .rst_n, .enable, .mode, .core_req_valid, .core_req_ready, .core_req,
    .core_resp_valid, .core_resp, .n_loads, .n_hits, .n_errors
  );

  always #5 clk = ~clk;
  assign inst_retired = core_resp_valid ? 2'd3 : 2'd0;
  assign mt_result = mt_rt;
  always @(posedge clk) mt_done <= mt_start;

  typedef struct { longint pf; longint mshr; longint exp; } sample_t;
  sample_t samples[$];
  sample_t cur;
  logic in_win_d = 1'b0;
  logic in_win;
  assign in_win = (dut.u_tuner.st_q == 3'd1);

  always @(posedge clk) if (rst_n) begin
    if (in_win && !in_win_d) cur = '{0, 0, 0};
    if (in_win) begin
      cur.pf   += longint'(mem_req_valid && mem_req_ready && mem_req.is_pf);
      cur.mshr += longint'(mem_req_valid && mem_req_ready);
      cur.exp  += longint'(ev_exp_unused);
    end
    if (!in_win && in_win_d) begin
      samples.push_back(cur);
      $display("interval %0d: prefetches %0d, memory requests %0d, expired unused %0d",
               samples.size(), cur.pf, cur.mshr, cur.exp);
    end
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

  initial begin
    int exp_rt;
    longint base, epf, a, e;
    bit base_set, fin;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    enable = 1'b1;
    repeat (100) @(negedge clk);
    tune_start = 1'b1;
    @(negedge clk);
    tune_start = 1'b0;
    while (!tune_done) @(negedge clk);
    @(negedge clk);
    exp_rt = 4; epf = 0; base_set = 0; base = 0; fin = 0;
    foreach (samples[k]) begin
      if (fin) break;
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
        exp_rt = 4 - k; epf = e; fin = 1;
      end
    end
    check(int'(dut.u_tuner.rt_sel) == exp_rt, $sformatf("retention unit %0d expected %0d", dut.u_tuner.rt_sel, exp_rt));
    check(int'(pf_distance) == rpc_ref(epf), $sformatf("distance %0d expected %0d", pf_distance, rpc_ref(epf)));
    repeat (5000) @(negedge clk);
    check(rt_active == dut.u_tuner.rt_sel, "cache runs the chosen unit");
    enable = 1'b0;
    repeat (200) @(negedge clk);
    check(n_errors == 0, $sformatf("load data errors %0d", n_errors));
    check(n_loads > 0, "loads completed");
    $display("chosen unit %0d, distance %0d; loads %0d, hits %0d", rt_active, pf_distance, n_loads, n_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
