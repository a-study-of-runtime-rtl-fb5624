// part_pkg: types and constants shared by the prefetch-aware STTRAM L1 data cache.
//
// The five retention-time units (25us, 50us, 75us, 100us, 1ms), their STTRAM write
// latencies (2, 3, 3, 3, 4 cycles; hit latency 1 cycle) and the prefetch distances
// (1, 4, 8, 16, 32) are the paper's figures. The ratio unit (parts per million), the
// request structures and the address widths are this design's own choices.
package part_pkg;

  localparam int unsigned ADDR_W = 32;   // byte address width (assumed)
  localparam int unsigned WORD_W = 64;   // core data word (assumed)
  localparam int unsigned NUM_RT = 5;    // number of retention-time units

  // Retention-time units, shortest first. The code is the index into the PART
  // retention set R = {25us, 50us, 75us, 100us, 1ms}.
  typedef enum logic [2:0] {
    RT_25US  = 3'd0,
    RT_50US  = 3'd1,
    RT_75US  = 3'd2,
    RT_100US = 3'd3,
    RT_1MS   = 3'd4
  } rt_e;

  // Prefetch distance, 1..32 (6 bits).
  typedef logic [5:0] pf_dist_t;

  // Ratios (allPF, expiredPF) are carried in parts per million.
  localparam int unsigned PPM = 1_000_000;

  // Algorithm 1 thresholds, in ppm.
  localparam logic [31:0] ALLPF_MIN_PPM   = 32'd1000;  // 0.1 %
  localparam logic [31:0] EXPPF_BASE_PPM  = 32'd200;   // 0.02 %

  // Retention time of a unit in microseconds.
  function automatic int unsigned rt_us(rt_e r);
    case (r)
      RT_25US:  return 25;
      RT_50US:  return 50;
      RT_75US:  return 75;
      RT_100US: return 100;
      default:  return 1000;
    endcase
  endfunction

  // STTRAM write latency of a unit in cycles (Table 2).
  function automatic logic [2:0] rt_write_lat(rt_e r);
    case (r)
      RT_25US:  return 3'd2;
      RT_50US:  return 3'd3;
      RT_75US:  return 3'd3;
      RT_100US: return 3'd3;
      default:  return 3'd4;
    endcase
  endfunction

  // Core load/store request.
  typedef struct packed {
    logic              we;     // 1 = store
    logic [ADDR_W-1:0] addr;   // byte address (word aligned)
    logic [ADDR_W-1:0] pc;     // PC of the load/store instruction
    logic [WORD_W-1:0] wdata;  // store data
  } core_req_t;

  // Core response.
  typedef struct packed {
    logic              hit;    // the access hit in the cache
    logic [WORD_W-1:0] rdata;  // load data (0 for stores)
  } core_resp_t;

  // Line read request to memory (an MSHR request).
  typedef struct packed {
    logic [ADDR_W-1:0] addr;   // line-aligned byte address
    logic              is_pf;  // 1 = prefetch, 0 = demand miss
  } mem_req_t;

  // Store written through to memory.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [WORD_W-1:0] data;
  } mem_wr_t;

endpackage
