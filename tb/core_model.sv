// core_model: load/store traffic generator and checker for the end-to-end testbenches
// (not part of the design).
//
// Mode 0 issues strided streams: STREAMS load/store instructions (one PC each), each
// walking a region of REGION_LINES lines with a stride of one line (the last stream two
// lines) and wrapping around, so lines come back after they may have expired. Mode 1
// issues random accesses (any word of a line) over a large region from many PCs, which a stride prefetcher
// cannot follow. One access in eight is a store. Every load's data is compared with the
// reference contents: the memory pattern {~addr, addr} unless this model stored to it.
module core_model
  import part_pkg::*;
#(
  parameter int unsigned STREAMS      = 4,
  parameter int unsigned REGION_LINES = 96
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic       mode,
  output logic       core_req_valid,
  input  logic       core_req_ready,
  output core_req_t  core_req,
  input  logic       core_resp_valid,
  input  core_resp_t core_resp,
  output int         n_loads,
  output int         n_hits,
  output int         n_errors
);

  logic [WORD_W-1:0] ref_mem [logic [ADDR_W-1:0]];
  int unsigned pos [STREAMS];
  int unsigned sel = 0;
  logic        busy = 1'b0;      // an access is outstanding
  logic        acc  = 1'b0;      // ... and has been accepted
  core_req_t   cur;

  function automatic logic [WORD_W-1:0] ref_rd(logic [ADDR_W-1:0] a);
    if (ref_mem.exists(a)) return ref_mem[a];
    return {~a, a};
  endfunction

  function automatic core_req_t next_req();
    core_req_t r;
    int unsigned s, stride;
    r.we    = ($urandom_range(0, 7) == 0);
    r.wdata = {$urandom(), $urandom()};
    if (mode == 1'b0) begin
      s       = sel;
      stride  = (s == STREAMS - 1) ? 128 : 64;
      r.pc    = 32'h0000_4000 + 32'(4 * s);
      r.addr  = 32'h1000_0000 + 32'(s) * 32'h0010_0000 + 32'(pos[s] % REGION_LINES) * 32'(stride)
                + 32'(8 * s);
    end else begin
      r.pc    = 32'h0000_8000 + 32'(4 * $urandom_range(0, 63));
      r.addr  = 32'h2000_0000 + 32'($urandom_range(0, 4095)) * 64 + 32'(8 * $urandom_range(0, 7));
    end
    return r;
  endfunction

  assign core_req_valid = busy && !acc && rst_n;
  assign core_req       = cur;

  always @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      acc      <= 1'b0;
      n_loads  <= 0;
      n_hits   <= 0;
      n_errors <= 0;
      for (int s = 0; s < STREAMS; s++) pos[s] = 0;
    end else begin
      if (core_resp_valid) begin
        if (!cur.we) begin
          n_loads <= n_loads + 1;
          if (core_resp.hit) n_hits <= n_hits + 1;
          if (core_resp.rdata != ref_rd(cur.addr)) begin
            n_errors <= n_errors + 1;
            $display("core_model: load %h returned %h, expected %h", cur.addr, core_resp.rdata,
                     ref_rd(cur.addr));
          end
        end
        busy <= 1'b0;
        acc  <= 1'b0;
      end
      if (busy && !acc && core_req_ready) begin
        acc <= 1'b1;
        if (cur.we) ref_mem[cur.addr] = cur.wdata;
      end
      if ((!busy || core_resp_valid) && enable) begin
        cur  <= next_req();
        busy <= 1'b1;
        if (mode == 1'b0) begin
          pos[sel] = pos[sel] + 1;
          sel = (sel + 1) % STREAMS;
        end
      end
    end
  end

endmodule
