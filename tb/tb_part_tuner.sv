// tb_part_tuner: runs the PART/RPC tuner through many profiling phases with scripted
// event counts per sampling interval and checks the chosen retention unit, the prefetch
// distance, the number of intervals sampled and the hand-off to miss-based tuning
// against a reference model of Algorithm 1 and Table 1 written in this testbench.
// Ratios are compared in the same unit as the hardware (floor of parts per million).
// Also checks that the sampling distance is 1, that each interval lasts INTERVAL_INSTR
// retired instructions, and the outputs after reset.
module tb_part_tuner;
  import part_pkg::*;
  localparam int unsigned INTERVAL = 1000;
  logic       clk = 1'b0, rst_n = 1'b0;
  logic       start = 1'b0;
  logic [1:0] inst_retired = 2'd1;
  logic       ev_access = 1'b0, ev_miss = 1'b0, ev_mshr_req = 1'b0, ev_pf_issue = 1'b0;
  logic [9:0] ev_exp_unused = '0;
  rt_e        rt_sel, mt_rt, mt_result = RT_50US;
  pf_dist_t   distance;
  logic       tuning, done, mt_start, mt_done = 1'b0;
  logic [31:0] allpf_ppm, expiredpf_ppm, mt_accesses, mt_misses;
  int         checks = 0, failures = 0;
  int         cyc = 0;

  part_tuner #(.INTERVAL_INSTR(INTERVAL), .EXP_W(10)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  typedef struct { int pf; int mshr; int exp; } sample_t;

  function automatic longint ppm(int n, int d);
    return (d == 0) ? 0 : (longint'(n) * 1000000) / d;
  endfunction

  function automatic int rpc_ref(longint e);
    // Table 1 in hundredths of a percent (1 % = 10000 ppm)
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

  // one sampling interval: events in the first 600 cycles
  task automatic drive(sample_t s);
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      ev_pf_issue   = (i < s.pf);
      ev_mshr_req   = (i < s.mshr);
      ev_exp_unused = (i < s.exp) ? 10'd1 : 10'd0;
      ev_access     = 1'b1;
      ev_miss       = (i < 50);
    end
    @(negedge clk);
    {ev_pf_issue, ev_mshr_req, ev_access, ev_miss} = '0;
    ev_exp_unused = '0;
  endtask

  task automatic phase(sample_t s[5], rt_e mres);
    int exp_out, exp_n, n, t0;
    longint base, exp_epf, a, e;
    bit base_set, miss, fin;
    rt_e prev;
    // reference
    exp_out = 4; exp_epf = 0; base_set = 0; base = 0; miss = 0; exp_n = 0; fin = 0;
    for (int k = 0; k < 5 && !fin; k++) begin
      int r = 4 - k;
      exp_n++;
      a = ppm(s[k].pf, s[k].mshr);
      e = ppm(s[k].exp, s[k].pf);
      if (a > 1000) begin
        if (base_set) begin
          if (e < 2 * base) begin exp_out = r; exp_epf = e; end
          else fin = 1;
        end else begin
          exp_out = r; exp_epf = e;
          if (e > 200) begin base = e; base_set = 1; end
        end
      end else begin
        exp_out = r; exp_epf = e; miss = 1; fin = 1;
      end
    end
    // run
    mt_result = mres;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(distance == 6'd1 && rt_sel == RT_1MS && tuning, "sampling starts at 1 ms, distance 1");
    n = 0;
    forever begin
      prev = rt_sel;
      t0 = cyc;
      drive(s[n]);
      n++;
      while (rt_sel == prev && !done && !mt_start) @(negedge clk);
      if (n == 1 && rt_sel != prev)
        check(cyc - t0 >= INTERVAL && cyc - t0 <= INTERVAL + 140, $sformatf("interval length %0d", cyc - t0));
      if (rt_sel != prev && tuning) begin
        check(int'(rt_sel) == int'(prev) - 1, "next shorter unit");
        check(distance == 6'd1, "distance 1 while sampling");
        continue;
      end
      break;
    end
    if (mt_start) begin
      check(miss, "miss-based tuning requested");
      check(int'(mt_rt) == exp_out, $sformatf("mt_rt %0d expected %0d", mt_rt, exp_out));
      repeat (5) @(negedge clk);
      mt_done = 1'b1;
      @(negedge clk);
      mt_done = 1'b0;
      exp_out = int'(mres);
      while (!done) @(negedge clk);
    end else begin
      check(!miss, "no miss-based tuning");
    end
    @(negedge clk);
    check(!tuning, "tuning finished");
    check(n == exp_n, $sformatf("intervals %0d expected %0d", n, exp_n));
    check(int'(rt_sel) == exp_out, $sformatf("rt %0d expected %0d", rt_sel, exp_out));
    check(int'(distance) == rpc_ref(exp_epf), $sformatf("distance %0d expected %0d (epf %0d ppm)",
                                                    distance, rpc_ref(exp_epf), exp_epf));
  endtask

  initial begin
    sample_t s[5];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(rt_sel == RT_1MS && distance == 6'd16 && !tuning, "reset outputs");

    // directed: base set at 1 ms, stays below 2x until 50 us, which doubles -> 75 us
    s = '{'{300, 500, 3}, '{300, 500, 4}, '{300, 500, 5}, '{300, 500, 7}, '{300, 500, 2}};
    phase(s, RT_50US);
    // directed: expiredPF tiny everywhere -> 25 us, distance 32
    s = '{'{400, 500, 0}, '{400, 500, 0}, '{400, 500, 0}, '{400, 500, 0}, '{400, 500, 0}};
    phase(s, RT_50US);
    // directed: prefetches negligible at 100 us -> miss-based tuning answers 75 us
    s = '{'{300, 500, 30}, '{0, 500, 0}, '{300, 500, 1}, '{300, 500, 1}, '{300, 500, 1}};
    phase(s, RT_75US);
    // directed: large expiredPF -> distance 1 (stays at 1 ms since 100 us doubles)
    s = '{'{100, 500, 20}, '{100, 500, 41}, '{100, 500, 1}, '{100, 500, 1}, '{100, 500, 1}};
    phase(s, RT_25US);
    // random
    for (int t = 0; t < 25; t++) begin
      foreach (s[k]) begin
        s[k].mshr = $urandom_range(400, 600);
        s[k].pf   = ($urandom_range(0, 9) == 0) ? 0 : $urandom_range(1, s[k].mshr);
        s[k].exp  = $urandom_range(0, 30);
      end
      phase(s, rt_e'($urandom_range(0, 4)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
