// tb_retention_timer: measures the tick period for every retention unit and checks it
// equals retention_us * CYCLES_PER_US / 2**CNT_BITS; checks that `restart` realigns it.
// A scaled clock (CYCLES_PER_US = 8) keeps the run short.
module tb_retention_timer;
  import part_pkg::*;
  localparam int unsigned CPU = 8, CB = 2;
  logic clk = 1'b0, rst_n = 1'b0, restart = 1'b0, tick;
  rt_e  rt = RT_25US;
  int   checks = 0, failures = 0;

  retention_timer #(.CYCLES_PER_US(CPU), .CNT_BITS(CB)) dut (.*);

  always #5 clk = ~clk;

  task automatic measure(rt_e r);
    int expp, t0, n;
    expp = int'(rt_us(r)) * CPU / (1 << CB);
    @(negedge clk);
    rt = r; restart = 1'b1;
    @(negedge clk);
    restart = 1'b0;
    // the first tick comes one full period after the restart cycle
    n = 1;
    while (!tick) begin @(negedge clk); n++; end
    checks++;
    if (n != expp + 1) begin failures++; $display("FAIL rt=%s first tick after %0d, expected %0d", r.name(), n, expp); end
    for (int k = 0; k < 3; k++) begin
      t0 = 0;
      @(negedge clk);
      t0 = 1;
      while (!tick) begin @(negedge clk); t0++; end
      checks++;
      if (t0 != expp) begin failures++; $display("FAIL rt=%s period %0d, expected %0d", r.name(), t0, expp); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    measure(RT_25US);
    measure(RT_50US);
    measure(RT_75US);
    measure(RT_100US);
    measure(RT_1MS);
    measure(RT_25US);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
