// tb_rpc_mapper: checks the RPC distance table at and around every range boundary and on
// random ratios, against a reference written from the table (distance 1 above 5 %, 4 down
// to 1.01 %, 8 down to 0.51 %, 16 down to 0.05 %, 32 below).
module tb_rpc_mapper;
  import part_pkg::*;

  logic        clk = 1'b0;
  logic [31:0] ppm;
  pf_dist_t    dist_o;
  int          checks = 0, failures = 0;

  rpc_mapper dut (.expired_pf_ppm(ppm), .distance(dist_o));

  always #5 clk = ~clk;

  // reference: percentages in hundredths of a percent, i.e. 100 ppm steps
  function automatic int ref_dist(longint unsigned p);
    if (p * 100 > 5_000_000) return 1;        // > 5 %
    if (p * 100 > 1_000_000) return 4;        // > 1 %
    if (p * 100 > 500_000)   return 8;        // > 0.5 %
    if (p * 100 >= 50_000)   return 16;       // >= 0.05 %
    return 32;
  endfunction

  task automatic check(logic [31:0] v);
    ppm = v;
    @(posedge clk);
    checks++;
    if (int'(dist_o) != ref_dist(longint'(v))) begin
      failures++;
      $display("FAIL ppm=%0d dist_o=%0d expected=%0d", v, dist_o, ref_dist(longint'(v)));
    end
  endtask

  initial begin
    automatic logic [31:0] pts[] = '{0, 1, 499, 500, 501, 5000, 5001, 5100, 9999, 10000,
                                     10001, 10100, 49999, 50000, 50001, 1000000, 32'hFFFF_FFFF};
    foreach (pts[i]) check(pts[i]);
    repeat (200) check($urandom_range(0, 120000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
