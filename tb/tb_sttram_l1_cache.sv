// tb_sttram_l1_cache: directed and random tests of the STTRAM L1 data cache at its
// default size (32 KB, 4 ways, 64 B lines) against a behavioural memory.
//
// The testbench drives the retention tick itself and stands in for the prefetcher. It
// checks: miss and hit data; the 1-cycle load-hit latency; store-hit latency of one
// accept cycle plus the unit's write latency (4 cycles at 1 ms, 2 at 25 us);
// write-through; expiration after exactly 2**CNT_BITS ticks and the expiration-miss
// strobe; retention restart on a store; the expired_unused_prefetches count (unused
// prefetched blocks counted, used ones not); the prefetch filter (present lines dropped,
// expired lines fetched again); a late prefetch merged with the demand miss; the 2560-
// cycle migration stall with contents kept and retention restarted; round-robin
// replacement; a demand miss while every MSHR holds a prefetch; and a random load/store run compared with a reference memory.
module tb_sttram_l1_cache;
  import part_pkg::*;
  localparam int unsigned LAT = 20;
  logic clk = 1'b0, rst_n = 1'b0;

  logic core_req_valid = 1'b0, core_req_ready, core_resp_valid;
  core_req_t core_req = '0;
  core_resp_t core_resp;
  rt_e rt_sel = RT_1MS, rt_active;
  logic migrating, tick = 1'b0, timer_restart;
  logic train_valid, train_trigger;
  logic [31:0] train_pc, train_addr;
  logic pf_valid = 1'b0, pf_ready;
  logic [31:0] pf_addr = '0;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready, mem_wr_valid, mem_wr_ready;
  mem_req_t mem_req;
  logic [31:0] mem_resp_addr;
  logic [511:0] mem_resp_data;
  mem_wr_t mem_wr;
  logic ev_access, ev_miss, ev_exp_miss, ev_mshr_req, ev_pf_issue, ev_pf_used, ev_late_pf;
  logic [9:0] ev_exp_unused;
  int n_demand, n_pf;

  int checks = 0, failures = 0;
  int c_exp_miss = 0, c_exp_unused = 0, c_pf_used = 0, c_late = 0, c_pf_issue = 0, c_trig = 0;
  logic [63:0] ref_mem [logic [31:0]];

  sttram_l1_cache dut (.*);

  mem_model #(.LAT(LAT)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_ready(mem_resp_ready), .resp_addr(mem_resp_addr),
    .resp_data(mem_resp_data), .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr(mem_wr),
    .n_demand, .n_pf
  );

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    c_exp_miss   += int'(ev_exp_miss);
    c_exp_unused += int'(ev_exp_unused);
    c_pf_used    += int'(ev_pf_used);
    c_late       += int'(ev_late_pf);
    c_pf_issue   += int'(ev_pf_issue);
    c_trig       += int'(train_trigger);
  end

  function automatic logic [63:0] ref_rd(logic [31:0] a);
    if (ref_mem.exists(a)) return ref_mem[a];
    return {~a, a};
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // One core access; returns the response and the accept-to-response latency.
  task automatic access(input logic we, input logic [31:0] a, input logic [63:0] wd,
                        output core_resp_t r, output int lat);
    @(negedge clk);
    core_req_valid = 1'b1;
    core_req = '{we: we, addr: a, pc: 32'h1000, wdata: wd};
    @(posedge clk);
    while (!core_req_ready) @(posedge clk);
    @(negedge clk);
    core_req_valid = 1'b0;
    lat = 1;
    while (!core_resp_valid) begin @(negedge clk); lat++; end
    r = core_resp;
    if (we) ref_mem[a] = wd;
  endtask

  task automatic load_chk(logic [31:0] a, bit exp_hit, string msg);
    core_resp_t r; int lat;
    access(1'b0, a, '0, r, lat);
    check(r.hit == exp_hit, $sformatf("%s: hit=%0d expected %0d", msg, r.hit, exp_hit));
    check(r.rdata == ref_rd(a), $sformatf("%s: data %h expected %h", msg, r.rdata, ref_rd(a)));
    if (exp_hit) check(lat == 1, $sformatf("%s: hit latency %0d", msg, lat));
  endtask

  task automatic ticks(int n);
    repeat (n) begin
      @(negedge clk); tick = 1'b1;
      @(negedge clk); tick = 1'b0;
    end
  endtask

  task automatic prefetch(logic [31:0] a);
    @(negedge clk);
    pf_valid = 1'b1; pf_addr = a;
    @(posedge clk);
    while (!pf_ready) @(posedge clk);
    @(negedge clk);
    pf_valid = 1'b0;
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  initial begin
    core_resp_t r; int lat, d0, p0, e0, t0, mig;
    logic [31:0] A = 32'h0010_0040, B = 32'h0010_0080, P = 32'h0020_0000, Q = 32'h0020_0040;
    logic [31:0] R = 32'h0030_0000, X = 32'h0040_0100;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // cold miss, then hit with 1-cycle latency
    d0 = n_demand; t0 = c_trig;
    load_chk(A, 0, "cold miss");
    check(n_demand == d0 + 1, "one demand request");
    check(c_trig == t0 + 1, "miss triggers the prefetcher");
    load_chk(A + 8, 1, "hit");

    // store hit at 1 ms: write-through, 1 + 4 cycles
    access(1'b1, A + 8, 64'hDEAD_BEEF_0123_4567, r, lat);
    check(r.hit && lat == 5, $sformatf("store hit at 1 ms latency %0d", lat));
    check(u_mem.store.exists(A + 8) && u_mem.store[A + 8] == 64'hDEAD_BEEF_0123_4567, "write-through");
    load_chk(A + 8, 1, "load after store");
    // store miss: no allocation
    access(1'b1, X, 64'h1111, r, lat);
    check(!r.hit, "store miss");
    load_chk(X, 0, "no write allocate");

    // expiration after 4 ticks, not 3
    load_chk(B, 0, "B fill");
    ticks(3);
    load_chk(B, 1, "B alive after 3 ticks");
    e0 = c_exp_miss;
    ticks(1);
    load_chk(B, 0, "B expired after 4 ticks");
    check(c_exp_miss == e0 + 1, "expiration miss strobe");

    // a store restarts retention
    ticks(3);
    access(1'b1, B, 64'h55, r, lat);
    ticks(3);
    load_chk(B, 1, "store restarted retention");

    // prefetches: unused one counted at expiry, used one not
    p0 = n_pf; e0 = c_exp_unused;
    prefetch(P);
    prefetch(Q);
    idle(LAT + 20);
    check(n_pf == p0 + 2 && c_pf_issue == 2, "two prefetches issued");
    t0 = c_trig;
    load_chk(Q + 16, 1, "prefetched block hit");
    check(c_pf_used == 1, "prefetch used once");
    check(c_trig == t0 + 1, "prefetch hit triggers the prefetcher");
    load_chk(Q, 1, "second hit");
    check(c_pf_used == 1, "only first hit counts as use");
    ticks(4);
    check(c_exp_unused == e0 + 1, $sformatf("expired unused prefetches %0d", c_exp_unused - e0));

    // prefetch filter: present line dropped, expired line fetched again
    load_chk(A, 0, "A re-fetched after expiry");
    p0 = n_pf;
    prefetch(A);
    idle(5);
    check(n_pf == p0, "prefetch of a present line dropped");
    prefetch(P);
    idle(LAT + 10);
    check(n_pf == p0 + 1, "prefetch of an expired line issued");

    // late prefetch
    p0 = n_pf; d0 = n_demand;
    prefetch(R);
    load_chk(R + 24, 0, "late prefetch");
    check(c_late == 1 && n_pf == p0 + 1 && n_demand == d0, "late prefetch merged");

    // migration to 25 us: 2560-cycle stall, contents kept, retention restarted
    load_chk(A, 1, "A before migration");
    ticks(3);
    @(negedge clk);
    rt_sel = RT_25US;
    mig = 0;
    @(negedge clk);
    while (migrating) begin @(negedge clk); mig++; end
    check(mig == 2560, $sformatf("migration %0d cycles", mig));
    check(rt_active == RT_25US, "unit switched");
    ticks(3);
    load_chk(A, 1, "A kept across migration");
    access(1'b1, A + 8, 64'h77, r, lat);
    check(r.hit && lat == 3, $sformatf("store hit at 25 us latency %0d", lat));

    // replacement: five lines in one set, the first (round-robin way 0) is evicted
    ticks(4);      // empty the cache
    for (int k = 0; k < 5; k++) load_chk(32'h0100_0000 + 32'(k) * 8192, 0, "set fill");
    load_chk(32'h0100_0000, 0, "oldest evicted");
    for (int k = 2; k < 5; k++) load_chk(32'h0100_0000 + 32'(k) * 8192, 1, "others kept");

    // all MSHRs held by prefetches: a demand miss must still complete
    p0 = n_pf;
    for (int k = 0; k < 8; k++) prefetch(32'h0500_0000 + 32'(k) * 64);
    load_chk(32'h0600_0000, 0, "demand miss behind eight prefetches");
    check(n_pf == p0 + 8, "eight prefetches issued");
    idle(LAT + 40);
    for (int k = 0; k < 8; k++) load_chk(32'h0500_0000 + 32'(k) * 64, 1, "prefetched line present");

    // random run against the reference memory
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] a;
      a = 32'h0200_0000 + 32'($urandom_range(0, 255)) * 8 + 32'($urandom_range(0, 3)) * 8192;
      if ($urandom_range(0, 19) == 0) ticks(1);
      if ($urandom_range(0, 9) == 0) prefetch(a);
      if ($urandom_range(0, 3) == 0) access(1'b1, a, {$urandom(), $urandom()}, r, lat);
      else begin
        access(1'b0, a, '0, r, lat);
        check(r.rdata == ref_rd(a), $sformatf("random load %h: %h expected %h", a, r.rdata, ref_rd(a)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
