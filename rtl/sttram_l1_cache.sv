// sttram_l1_cache: reduced-retention STTRAM L1 data cache with expiring blocks.
//
// A set-associative cache (default 32 KB, 64 B lines, 4 ways: 128 sets of 4 blocks) in
// which every block is lost once the retention time of the active STTRAM unit has passed
// since it was last written. Each block holds, besides tag and data, a valid bit, an
// "expired" bit (the tag is kept so that a later miss to it can be counted as an
// expiration miss), a prefetch bit (set when a prefetch filled the block, cleared by the
// first demand access to it) and an age counter. On every `tick` of the retention timer
// the age counter of each valid block advances; a block whose counter is saturated
// expires instead, and if its prefetch bit is still set it is counted on
// `ev_exp_unused` -- the expired_unused_prefetches event that PART is built on.
//
// Following the paper, expired blocks are not protected from the prefetcher: the
// prefetch filter only drops addresses whose block is present and valid, so a stream
// whose blocks expired is fetched again after its first expiration miss.
//
// Timing (STTRAM figures of the paper): a load hit returns its data one cycle after the
// request is accepted (hit latency 1). Writing a block into the array -- a fill or a
// store hit -- takes the active unit's write latency (2, 3, 3, 3, 4 cycles for 25, 50,
// 75, 100 us, 1 ms), during which the cache accepts nothing else. Switching retention
// unit (`rt_sel` differing from `rt_active`) migrates the cache and stalls it for
// MIGRATE_CYCLES (2560, the paper's worst-case migration); the contents are kept and
// every block's retention restarts in the new unit.
//
// This design's own choices, where the paper is silent: stores are written through to
// memory and allocate nothing on a miss (so an expiring block never holds the only copy
// of dirty data); one demand miss is handled at a time (blocking) while up to MSHRS line
// requests, demand or prefetch, are outstanding; queued prefetches are sent when the
// cache is idle with no core request waiting, or while it waits for a demand miss; a
// demand miss that finds every MSHR taken by prefetches keeps accepting their responses
// until one is free; victims are the first invalid way of the set, else a per-set
// round-robin way; a demand miss to a line whose prefetch is still in flight waits for
// that prefetch (a late prefetch) instead of issuing its own request. Memory may return
// line responses in any order; each carries its line address. A store to a line that is
// still in flight is held until the line has arrived, so a fill never brings back data
// older than a store. Data words are 64 bits.
//
// Interfaces: valid/ready core request and a one-cycle core response; valid/ready memory
// read request, read response and write-through channels; a pop interface towards the
// prefetcher's queue and a training output to it; one-cycle event strobes for the
// PART counters.
module sttram_l1_cache
  import part_pkg::*;
#(
  parameter int unsigned SIZE_BYTES     = 32768,
  parameter int unsigned LINE_BYTES     = 64,
  parameter int unsigned WAYS           = 4,
  parameter int unsigned CNT_BITS       = 2,
  parameter int unsigned MSHRS          = 8,
  parameter int unsigned MIGRATE_CYCLES = 2560,
  localparam int unsigned LINE_W = LINE_BYTES * 8,
  localparam int unsigned LINES  = SIZE_BYTES / LINE_BYTES,
  localparam int unsigned EXP_W  = $clog2(LINES + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // core side
  input  logic              core_req_valid,
  output logic              core_req_ready,
  input  core_req_t         core_req,
  output logic              core_resp_valid,
  output core_resp_t        core_resp,
  // retention unit control
  input  rt_e               rt_sel,
  output rt_e               rt_active,
  output logic              migrating,
  input  logic              tick,
  output logic              timer_restart,
  // prefetcher side
  output logic              train_valid,
  output logic [ADDR_W-1:0] train_pc,
  output logic [ADDR_W-1:0] train_addr,
  output logic              train_trigger,
  input  logic              pf_valid,
  input  logic [ADDR_W-1:0] pf_addr,
  output logic              pf_ready,
  // memory side
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
  // events for the PART counters
  output logic              ev_access,
  output logic              ev_miss,
  output logic              ev_exp_miss,
  output logic              ev_mshr_req,
  output logic              ev_pf_issue,
  output logic              ev_pf_used,
  output logic              ev_late_pf,
  output logic [EXP_W-1:0]  ev_exp_unused
);

  localparam int unsigned SETS   = LINES / WAYS;
  localparam int unsigned OFF_W  = $clog2(LINE_BYTES);
  localparam int unsigned IDX_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned TAG_W  = ADDR_W - OFF_W - IDX_W;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned MSH_W  = (MSHRS > 1) ? $clog2(MSHRS) : 1;
  localparam int unsigned LA_W   = ADDR_W - OFF_W;   // line address width

  typedef enum logic [2:0] {S_IDLE, S_MISS_REQ, S_WAIT, S_FILL, S_STORE, S_MIGRATE} state_e;

  // ---------------------------------------------------------------- block state
  logic                valid_q [LINES];
  logic                expd_q  [LINES];
  logic                pf_q    [LINES];
  logic [CNT_BITS-1:0] age_q   [LINES];
  logic [TAG_W-1:0]    tag_q   [LINES];
  logic [LINE_W-1:0]   data_q  [LINES];
  logic [WAY_W-1:0]    rr_q    [SETS];

  logic                mshr_v  [MSHRS];
  logic [LA_W-1:0]     mshr_la [MSHRS];

  state_e              state_q;
  rt_e                 rt_q;
  core_req_t           req_q;
  logic [LA_W-1:0]     fill_la_q;
  logic [LINE_W-1:0]   fill_data_q;
  logic                fill_pf_q;
  logic                fill_demand_q;
  state_e              fill_ret_q;
  logic [2:0]          wcnt_q;
  logic                st_hit_q;
  logic [WAY_W-1:0]    st_way_q;
  logic                wr_done_q;
  logic [31:0]         mig_cnt_q;
  logic                resp_valid_q;
  core_resp_t          resp_q;

  assign rt_active       = rt_q;
  assign migrating       = (state_q == S_MIGRATE);
  assign core_resp_valid = resp_valid_q;
  assign core_resp       = resp_q;

  logic [2:0] wlat;
  assign wlat = rt_write_lat(rt_q);

  // ---------------------------------------------------------------- helpers
  function automatic logic [IDX_W-1:0] idx_of(logic [ADDR_W-1:0] a);
    return (SETS > 1) ? a[OFF_W +: IDX_W] : '0;
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [ADDR_W-1:0] a);
    return a[ADDR_W-1 -: TAG_W];
  endfunction

  // Lookup of an address: valid hit, and tag match on an expired block.
  typedef struct packed {
    logic             hit;
    logic             exp_hit;
    logic [WAY_W-1:0] way;
  } look_t;

  function automatic look_t lookup(logic [ADDR_W-1:0] a);
    look_t r;
    int unsigned b;
    r = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      b = int'(idx_of(a)) * WAYS + w;
      if (valid_q[b] && tag_q[b] == tag_of(a)) begin
        r.hit = 1'b1;
        r.way = WAY_W'(w);
      end
      if (!valid_q[b] && expd_q[b] && tag_q[b] == tag_of(a)) r.exp_hit = 1'b1;
    end
    return r;
  endfunction

  // Victim way for a line: first invalid way, else the set's round-robin way.
  function automatic logic [WAY_W-1:0] victim(logic [ADDR_W-1:0] a);
    logic [WAY_W-1:0] v;
    logic found;
    v = rr_q[idx_of(a)];
    found = 1'b0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (!found && !valid_q[int'(idx_of(a)) * WAYS + w]) begin
        v = WAY_W'(w);
        found = 1'b1;
      end
    end
    return v;
  endfunction

  // ---------------------------------------------------------------- MSHR view
  logic             mshr_full;
  logic [MSH_W-1:0] mshr_free;
  always_comb begin
    mshr_full = 1'b1;
    mshr_free = '0;
    for (int i = MSHRS - 1; i >= 0; i--) begin
      if (!mshr_v[i]) begin
        mshr_full = 1'b0;
        mshr_free = MSH_W'(i);
      end
    end
  end

  function automatic logic in_mshr(logic [LA_W-1:0] la);
    logic r;
    r = 1'b0;
    for (int i = 0; i < MSHRS; i++) if (mshr_v[i] && mshr_la[i] == la) r = 1'b1;
    return r;
  endfunction

  // ---------------------------------------------------------------- lookups
  look_t lk_core, lk_pf, lk_resp, lk_fill;
  logic [LA_W-1:0] req_la, pf_la, resp_la;
  assign lk_core = lookup(core_req.addr);
  assign lk_pf   = lookup(pf_addr);
  assign lk_resp = lookup(mem_resp_addr);
  assign lk_fill = lookup({fill_la_q, {OFF_W{1'b0}}});
  assign req_la  = req_q.addr[ADDR_W-1:OFF_W];
  assign pf_la   = pf_addr[ADDR_W-1:OFF_W];
  assign resp_la = mem_resp_addr[ADDR_W-1:OFF_W];

  // ---------------------------------------------------------------- control
  logic core_fire, pf_issue, pf_pop, resp_fire, demand_issue;
  logic fill_write, store_write, mig_done;
  logic [WAY_W-1:0] fill_way;
  logic st_done, pf_try;

  always_comb begin
    core_req_ready = 1'b0;
    pf_ready       = 1'b0;
    mem_resp_ready = 1'b0;
    mem_req_valid  = 1'b0;
    mem_req        = '0;
    mem_wr_valid   = 1'b0;
    mem_wr         = '0;
    pf_issue       = 1'b0;
    demand_issue   = 1'b0;
    timer_restart  = 1'b0;
    fill_write     = 1'b0;
    store_write    = 1'b0;
    st_done        = 1'b0;
    mig_done       = 1'b0;
    pf_try         = 1'b0;
    case (state_q)
      S_IDLE: begin
        if (rt_sel != rt_q) begin
          timer_restart = 1'b1;            // leave for S_MIGRATE
        end else if (mem_resp_valid) begin
          mem_resp_ready = 1'b1;           // a prefetch arriving
        end else if (core_req_valid) begin
          // a store to a line still in flight waits until that line has arrived
          core_req_ready = !(core_req.we && in_mshr(core_req.addr[ADDR_W-1:OFF_W]));
        end else if (pf_valid) begin
          pf_try = 1'b1;
        end
      end
      S_MISS_REQ: begin
        mem_resp_ready = mshr_full;        // prefetches in flight free MSHRs
        if (!mshr_full) begin
          mem_req_valid = 1'b1;
          mem_req.addr  = {req_la, {OFF_W{1'b0}}};
          mem_req.is_pf = 1'b0;
          demand_issue  = mem_req_ready;
        end
      end
      S_WAIT: begin
        mem_resp_ready = 1'b1;
        pf_try         = pf_valid;         // prefetches go out under the demand miss
      end
      S_FILL: fill_write = (wcnt_q >= wlat - 3'd1);
      S_STORE: begin
        mem_wr_valid = !wr_done_q;
        mem_wr.addr  = req_q.addr;
        mem_wr.data  = req_q.wdata;
        store_write  = st_hit_q && (wcnt_q >= wlat - 3'd1);
        st_done      = (wr_done_q || mem_wr_ready) && (!st_hit_q || wcnt_q >= wlat - 3'd1);
      end
      S_MIGRATE: begin
        mig_done      = (mig_cnt_q >= MIGRATE_CYCLES - 1);
        timer_restart = mig_done;
      end
      default: ;
    endcase
    // prefetch issue: filtered if present, in flight or no MSHR is free
    if (pf_try) begin
      if (lk_pf.hit || in_mshr(pf_la) || mshr_full) begin
        pf_ready = 1'b1;
      end else begin
        mem_req_valid = 1'b1;
        mem_req.addr  = {pf_la, {OFF_W{1'b0}}};
        mem_req.is_pf = 1'b1;
        pf_ready      = mem_req_ready;
        pf_issue      = mem_req_ready;
      end
    end
  end

  assign core_fire = core_req_valid && core_req_ready;
  assign resp_fire = mem_resp_valid && mem_resp_ready;
  assign pf_pop    = pf_valid && pf_ready;
  assign fill_way  = lk_fill.hit ? lk_fill.way : victim({fill_la_q, {OFF_W{1'b0}}});

  // Training and events.
  always_comb begin
    train_valid   = core_fire;
    train_pc      = core_req.pc;
    train_addr    = core_req.addr;
    train_trigger = core_fire && (!lk_core.hit || pf_q[int'(idx_of(core_req.addr)) * WAYS + int'(lk_core.way)]);
    ev_access     = core_fire;
    ev_miss       = core_fire && !lk_core.hit;
    ev_exp_miss   = core_fire && !lk_core.hit && lk_core.exp_hit;
    ev_pf_used    = core_fire && lk_core.hit && pf_q[int'(idx_of(core_req.addr)) * WAYS + int'(lk_core.way)];
    ev_late_pf    = core_fire && !lk_core.hit && !core_req.we && in_mshr(core_req.addr[ADDR_W-1:OFF_W]);
    ev_pf_issue   = pf_issue;
    ev_mshr_req   = pf_issue || demand_issue;
  end

  // Expiration: blocks whose age is saturated when a tick arrives.
  logic expire [LINES];
  always_comb begin
    ev_exp_unused = '0;
    for (int unsigned b = 0; b < LINES; b++) begin
      expire[b] = tick && valid_q[b] && (age_q[b] == {CNT_BITS{1'b1}});
      if (expire[b] && pf_q[b]) ev_exp_unused = ev_exp_unused + EXP_W'(1);
    end
  end

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_IDLE;
      rt_q          <= RT_1MS;
      req_q         <= '0;
      fill_la_q     <= '0;
      fill_data_q   <= '0;
      fill_pf_q     <= 1'b0;
      fill_demand_q <= 1'b0;
      fill_ret_q    <= S_IDLE;
      wcnt_q        <= '0;
      st_hit_q      <= 1'b0;
      st_way_q      <= '0;
      wr_done_q     <= 1'b0;
      mig_cnt_q     <= '0;
      resp_valid_q  <= 1'b0;
      resp_q        <= '0;
      for (int i = 0; i < MSHRS; i++) begin
        mshr_v[i]  <= 1'b0;
        mshr_la[i] <= '0;
      end
    end else begin
      resp_valid_q <= 1'b0;

      // MSHR allocation and release.
      if (pf_issue) begin
        mshr_v[mshr_free]  <= 1'b1;
        mshr_la[mshr_free] <= pf_la;
      end
      if (demand_issue) begin
        mshr_v[mshr_free]  <= 1'b1;
        mshr_la[mshr_free] <= req_la;
      end
      if (resp_fire) begin
        for (int i = 0; i < MSHRS; i++)
          if (mshr_v[i] && mshr_la[i] == resp_la) mshr_v[i] <= 1'b0;
      end

      case (state_q)
        S_IDLE: begin
          if (rt_sel != rt_q) begin
            state_q   <= S_MIGRATE;
            mig_cnt_q <= '0;
          end else if (resp_fire) begin
            if (!lk_resp.hit) begin
              fill_la_q     <= resp_la;
              fill_data_q   <= mem_resp_data;
              fill_pf_q     <= 1'b1;
              fill_demand_q <= 1'b0;
              fill_ret_q    <= S_IDLE;
              wcnt_q        <= '0;
              state_q       <= S_FILL;
            end
          end else if (core_fire) begin
            req_q <= core_req;
            if (core_req.we) begin
              st_hit_q  <= lk_core.hit;
              st_way_q  <= lk_core.way;
              wr_done_q <= 1'b0;
              wcnt_q    <= '0;
              state_q   <= S_STORE;
            end else if (lk_core.hit) begin
              resp_valid_q <= 1'b1;
              resp_q.hit   <= 1'b1;
              resp_q.rdata <= data_q[int'(idx_of(core_req.addr)) * WAYS + int'(lk_core.way)]
                              [core_req.addr[OFF_W-1:3] * WORD_W +: WORD_W];
            end else if (in_mshr(core_req.addr[ADDR_W-1:OFF_W])) begin
              state_q <= S_WAIT;           // late prefetch: wait for it
            end else begin
              state_q <= S_MISS_REQ;
            end
          end
        end
        S_MISS_REQ: begin
          if (demand_issue) begin
            state_q <= S_WAIT;
          end else if (resp_fire && !lk_resp.hit) begin
            fill_la_q     <= resp_la;
            fill_data_q   <= mem_resp_data;
            fill_pf_q     <= 1'b1;
            fill_demand_q <= 1'b0;
            fill_ret_q    <= S_MISS_REQ;
            wcnt_q        <= '0;
            state_q       <= S_FILL;
          end
        end
        S_WAIT: begin
          if (resp_fire) begin
            wcnt_q      <= '0;
            fill_la_q   <= resp_la;
            fill_data_q <= mem_resp_data;
            if (resp_la == req_la) begin
              fill_pf_q     <= 1'b0;
              fill_demand_q <= 1'b1;
              fill_ret_q    <= S_IDLE;
              state_q       <= S_FILL;
            end else if (!lk_resp.hit) begin
              fill_pf_q     <= 1'b1;
              fill_demand_q <= 1'b0;
              fill_ret_q    <= S_WAIT;
              state_q       <= S_FILL;
            end
          end
        end
        S_FILL: begin
          wcnt_q <= wcnt_q + 3'd1;
          if (fill_write) begin
            state_q <= fill_ret_q;
            if (fill_demand_q) begin
              resp_valid_q <= 1'b1;
              resp_q.hit   <= 1'b0;
              resp_q.rdata <= fill_data_q[req_q.addr[OFF_W-1:3] * WORD_W +: WORD_W];
            end
          end
        end
        S_STORE: begin
          wcnt_q <= wcnt_q + 3'd1;
          if (mem_wr_ready) wr_done_q <= 1'b1;
          if (st_done) begin
            resp_valid_q <= 1'b1;
            resp_q.hit   <= st_hit_q;
            resp_q.rdata <= '0;
            state_q      <= S_IDLE;
          end
        end
        S_MIGRATE: begin
          mig_cnt_q <= mig_cnt_q + 32'd1;
          if (mig_done) begin
            rt_q    <= rt_sel;
            state_q <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- block state update
  int unsigned fill_b, st_b, hit_b;
  assign fill_b = int'(fill_la_q[IDX_W-1:0]) * WAYS + int'(fill_way);
  assign st_b   = int'(idx_of(req_q.addr)) * WAYS + int'(st_way_q);
  assign hit_b  = int'(idx_of(core_req.addr)) * WAYS + int'(lk_core.way);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned b = 0; b < LINES; b++) begin
        valid_q[b] <= 1'b0;
        expd_q[b]  <= 1'b0;
        pf_q[b]    <= 1'b0;
        age_q[b]   <= '0;
      end
      for (int unsigned s = 0; s < SETS; s++) rr_q[s] <= '0;
    end else begin
      // retention: age or expire
      for (int unsigned b = 0; b < LINES; b++) begin
        if (expire[b]) begin
          valid_q[b] <= 1'b0;
          expd_q[b]  <= 1'b1;
          pf_q[b]    <= 1'b0;
        end else if (tick && valid_q[b]) begin
          age_q[b] <= age_q[b] + CNT_BITS'(1);
        end
      end
      // migration end: every block is rewritten into the new unit
      if (mig_done) begin
        for (int unsigned b = 0; b < LINES; b++) age_q[b] <= '0;
      end
      // demand hit uses a prefetched block
      if (core_fire && lk_core.hit) pf_q[hit_b] <= 1'b0;
      // fill
      if (fill_write) begin
        valid_q[fill_b] <= 1'b1;
        expd_q[fill_b]  <= 1'b0;
        pf_q[fill_b]    <= fill_pf_q;
        age_q[fill_b]   <= '0;
        if (!lk_fill.hit && valid_q[fill_b])
          rr_q[fill_la_q[IDX_W-1:0]] <= rr_q[fill_la_q[IDX_W-1:0]] + WAY_W'(1);
      end
      // store hit rewrites the block, which restarts its retention
      if (store_write && valid_q[st_b] && tag_q[st_b] == tag_of(req_q.addr)) begin
        age_q[st_b] <= '0;
      end
    end
  end

  // Tag and data arrays (no reset: guarded by valid_q).
  always_ff @(posedge clk) begin
    if (fill_write) begin
      tag_q[fill_b]  <= tag_of({fill_la_q, {OFF_W{1'b0}}});
      data_q[fill_b] <= fill_data_q;
    end
    if (store_write && valid_q[st_b] && tag_q[st_b] == tag_of(req_q.addr)) begin
      data_q[st_b][req_q.addr[OFF_W-1:3] * WORD_W +: WORD_W] <= req_q.wdata;
    end
  end

  // ---------------------------------------------------------------- checks
  a_one_hot_event: assert property (@(posedge clk) disable iff (!rst_n)
                                    !(ev_pf_issue && ev_access));
  a_resp_known: assert property (@(posedge clk) disable iff (!rst_n)
                                 mem_resp_ready && mem_resp_valid |-> in_mshr(resp_la));

endmodule
