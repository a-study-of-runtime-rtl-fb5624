// stride_prefetcher: PC-indexed stride prefetcher with a runtime prefetch distance.
//
// A reference prediction table (ENTRIES entries, direct mapped by the load/store PC)
// remembers for each instruction the last address it touched, the stride between its
// last two addresses and a saturating confidence counter. Each demand access trains the
// entry of its PC: a repeated stride raises the confidence, a different one lowers it,
// and the stride is replaced once the confidence has dropped to zero. When the cache
// flags the access as a trigger (a demand miss -- expiration misses included -- or the
// first demand hit on a prefetched block) and the entry is confident, DEGREE prefetch
// addresses are generated:
//
//     addr + (distance + d) * step,   d = 0 .. DEGREE-1,
//
// each rounded down to its line, where `step` is the stride, or one line in the
// stride's direction if the stride is shorter than a line. With distance 1 and a
// one-line stride this gives A+1 .. A+4 after a miss on A. The addresses go one per
// cycle into a QDEPTH-entry queue that the cache pops (`pf_valid`/`pf_ready`). A new
// trigger abandons the addresses of the previous one not yet queued; addresses that
// find the queue full wait.
//
// From the paper: PC-based stride prefetching, degree 4, distances 1/4/8/16/32 set at
// runtime, prefetching of expired blocks. This design's own choices: the table size,
// the direct-mapped organisation, the 2-bit confidence with threshold 2, the trigger
// condition, the line-size minimum step and the queue.
module stride_prefetcher
  import part_pkg::*;
#(
  parameter int unsigned ENTRIES     = 16,
  parameter int unsigned DEGREE      = 4,
  parameter int unsigned QDEPTH      = 8,
  parameter int unsigned LINE_BYTES  = 64,
  parameter int unsigned CONF_THRESH = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              train_valid,
  input  logic [ADDR_W-1:0] train_pc,
  input  logic [ADDR_W-1:0] train_addr,
  input  logic              train_trigger,
  input  pf_dist_t          distance,
  output logic              pf_valid,
  output logic [ADDR_W-1:0] pf_addr,
  input  logic              pf_ready
);

  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int unsigned TAG_W = ADDR_W - 2 - IDX_W;
  localparam int unsigned OFF_W = $clog2(LINE_BYTES);
  localparam int unsigned QP_W  = (QDEPTH > 1) ? $clog2(QDEPTH) : 1;
  localparam int unsigned DEG_W = $clog2(DEGREE + 1);

  typedef struct packed {
    logic              valid;
    logic [TAG_W-1:0]  tag;
    logic [ADDR_W-1:0] last;
    logic [ADDR_W-1:0] stride;   // two's complement
    logic [1:0]        conf;
  } rpt_t;

  rpt_t rpt_q [ENTRIES];

  // ------------------------------------------------------------ training
  logic [IDX_W-1:0]  t_idx;
  logic [TAG_W-1:0]  t_tag;
  rpt_t              e, e_new;
  logic [ADDR_W-1:0] new_stride, step;
  logic              fire;

  assign t_idx = (ENTRIES > 1) ? train_pc[2 +: IDX_W] : '0;
  assign t_tag = train_pc[ADDR_W-1 -: TAG_W];
  assign e     = rpt_q[t_idx];

  always_comb begin
    new_stride = train_addr - e.last;
    e_new      = e;
    fire       = 1'b0;
    if (!e.valid || e.tag != t_tag) begin
      e_new = '{valid: 1'b1, tag: t_tag, last: train_addr, stride: '0, conf: 2'd0};
    end else begin
      e_new.last = train_addr;
      if (new_stride == e.stride) begin
        if (e.conf != 2'd3) e_new.conf = e.conf + 2'd1;
      end else if (e.conf != 2'd0) begin
        e_new.conf = e.conf - 2'd1;
      end else begin
        e_new.stride = new_stride;
      end
      fire = train_trigger && (e_new.conf >= 2'(CONF_THRESH)) && (e_new.stride != '0);
    end
    // step: the stride, at least one line
    if ($signed(e_new.stride) >= $signed(LINE_BYTES) || $signed(e_new.stride) <= -$signed(LINE_BYTES))
      step = e_new.stride;
    else if (e_new.stride[ADDR_W-1])
      step = -ADDR_W'(LINE_BYTES);
    else
      step = ADDR_W'(LINE_BYTES);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) rpt_q[i] <= '0;
    end else if (train_valid) begin
      rpt_q[t_idx] <= e_new;
    end
  end

  // ------------------------------------------------------------ address generation
  logic              gen_active_q;
  logic [ADDR_W-1:0] gen_addr_q, gen_step_q;
  logic [DEG_W-1:0]  gen_left_q;
  logic              q_full, q_push;

  assign q_push = gen_active_q && !q_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gen_active_q <= 1'b0;
      gen_addr_q   <= '0;
      gen_step_q   <= '0;
      gen_left_q   <= '0;
    end else if (train_valid && fire) begin
      gen_active_q <= 1'b1;
      gen_addr_q   <= train_addr + ADDR_W'(distance) * step;
      gen_step_q   <= step;
      gen_left_q   <= DEG_W'(DEGREE);
    end else if (q_push) begin
      gen_addr_q <= gen_addr_q + gen_step_q;
      gen_left_q <= gen_left_q - DEG_W'(1);
      if (gen_left_q == DEG_W'(1)) gen_active_q <= 1'b0;
    end
  end

  // ------------------------------------------------------------ prefetch queue
  logic [ADDR_W-1:0] q_mem [QDEPTH];
  logic [QP_W-1:0]   q_wp, q_rp;
  logic [QP_W:0]     q_cnt;
  logic              q_pop;

  assign q_full   = (q_cnt == (QP_W + 1)'(QDEPTH));
  assign pf_valid = (q_cnt != '0);
  assign pf_addr  = q_mem[q_rp];
  assign q_pop    = pf_valid && pf_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_wp  <= '0;
      q_rp  <= '0;
      q_cnt <= '0;
    end else begin
      if (q_push) q_wp <= (q_wp == QP_W'(QDEPTH - 1)) ? '0 : q_wp + QP_W'(1);
      if (q_pop)  q_rp <= (q_rp == QP_W'(QDEPTH - 1)) ? '0 : q_rp + QP_W'(1);
      q_cnt <= q_cnt + (QP_W + 1)'(q_push) - (QP_W + 1)'(q_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (q_push) q_mem[q_wp] <= {gen_addr_q[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) q_cnt <= (QP_W + 1)'(QDEPTH));

endmodule
