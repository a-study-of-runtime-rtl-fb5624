// tb_ratio_divider: checks floor(num * 1e6 / den) on corner and random operands,
// including a zero denominator and saturation, and that `done` arrives exactly 65
// cycles after `start`.
module tb_ratio_divider;
  logic        clk = 1'b0, rst_n = 1'b0;
  logic        start = 1'b0;
  logic [31:0] num = '0, den = '0;
  logic        busy, done;
  logic [31:0] quot;
  int          checks = 0, failures = 0;

  ratio_divider dut (.*);

  always #5 clk = ~clk;

  task automatic run(logic [31:0] n, logic [31:0] d);
    longint unsigned expq;
    int cyc;
    logic [127:0] wide;
    wide = 128'(n) * 128'd1_000_000;
    if (d == 0) expq = 0;
    else begin
      wide = wide / 128'(d);
      expq = (wide > 128'hFFFF_FFFF) ? 64'hFFFF_FFFF : 64'(wide);
    end
    @(negedge clk);
    num = n; den = d; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks += 2;
    if (quot != 32'(expq)) begin
      failures++;
      $display("FAIL %0d/%0d: got %0d expected %0d", n, d, quot, expq);
    end
    if (cyc != 65) begin
      failures++;
      $display("FAIL latency %0d cycles", cyc);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(0, 5);
    run(5, 0);
    run(1, 1000);          // 1000 ppm = 0.1 %
    run(2, 10000);         // 200 ppm
    run(7, 3);
    run(32'hFFFF_FFFF, 1); // saturates
    run(32'hFFFF_FFFF, 32'hFFFF_FFFF);
    run(123456, 7654321);
    repeat (60) run($urandom(), $urandom_range(1, 32'h7FFF_FFFF));
    repeat (40) run($urandom_range(0, 1000), $urandom_range(1, 100000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
