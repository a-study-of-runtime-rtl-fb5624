// mem_model: behavioural main memory for the testbenches (not part of the design).
//
// Accepts line read requests (ready is asserted unless READY_RANDOM picks a stall), and
// returns each line LAT cycles later, in request order, holding the response until the
// cache takes it. Every 64-bit word reads as its initial pattern {~addr, addr} unless a
// write-through store has changed it; stores are applied when accepted. Counts the reads
// it received, demand and prefetch separately.
module mem_model
  import part_pkg::*;
#(
  parameter int unsigned LAT          = 20,
  parameter int unsigned LINE_BYTES   = 64,
  parameter bit          READY_RANDOM = 1'b0,
  localparam int unsigned LINE_W = LINE_BYTES * 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  mem_req_t          req,
  output logic              resp_valid,
  input  logic              resp_ready,
  output logic [ADDR_W-1:0] resp_addr,
  output logic [LINE_W-1:0] resp_data,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  mem_wr_t           wr,
  output int                n_demand,
  output int                n_pf
);

  logic [WORD_W-1:0] store [logic [ADDR_W-1:0]];
  typedef struct { logic [ADDR_W-1:0] addr; longint due; } pend_t;
  pend_t  q[$];
  longint now = 0;

  function automatic logic [WORD_W-1:0] rd_word(logic [ADDR_W-1:0] a);
    if (store.exists(a)) return store[a];
    return {~a, a};
  endfunction

  function automatic logic [LINE_W-1:0] rd_line(logic [ADDR_W-1:0] a);
    logic [LINE_W-1:0] l;
    for (int w = 0; w < LINE_BYTES / 8; w++) l[w*WORD_W +: WORD_W] = rd_word(a + ADDR_W'(8*w));
    return l;
  endfunction

  assign wr_ready   = 1'b1;
  assign resp_valid = (q.size() > 0) && (q[0].due <= now);
  assign resp_addr  = (q.size() > 0) ? q[0].addr : '0;
  assign resp_data  = (q.size() > 0) ? rd_line(q[0].addr) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) req_ready <= 1'b1;
    else        req_ready <= READY_RANDOM ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  always @(posedge clk) begin
    now <= now + 1;
    if (!rst_n) begin
      n_demand <= 0;
      n_pf     <= 0;
    end else begin
      if (resp_valid && resp_ready) void'(q.pop_front());
      if (req_valid && req_ready) begin
        q.push_back('{addr: req.addr, due: now + LAT});
        if (req.is_pf) n_pf <= n_pf + 1;
        else           n_demand <= n_demand + 1;
      end
      if (wr_valid && wr_ready) store[wr.addr] = wr.data;
    end
  end

endmodule
