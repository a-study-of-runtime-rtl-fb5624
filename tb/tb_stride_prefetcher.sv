// tb_stride_prefetcher: trains the prefetcher with strided, irregular and interleaved
// access streams and compares the queued prefetch addresses with values computed by hand
// from the rule  line(addr + (distance + d) * step), d = 0..3 : confident streams at
// distances 1, 16 and 4, a sub-line stride, a negative stride, non-trigger accesses,
// irregular strides, and a full queue drained later.
module tb_stride_prefetcher;
  import part_pkg::*;
  logic              clk = 1'b0, rst_n = 1'b0;
  logic              train_valid = 1'b0, train_trigger = 1'b0;
  logic [ADDR_W-1:0] train_pc = '0, train_addr = '0;
  pf_dist_t          distance = 6'd1;
  logic              pf_valid, pf_ready = 1'b1;
  logic [ADDR_W-1:0] pf_addr;
  int                checks = 0, failures = 0;
  logic [ADDR_W-1:0] got[$];

  stride_prefetcher dut (.*);

  always #5 clk = ~clk;

  // collect everything popped from the queue
  always @(posedge clk) if (rst_n && pf_valid && pf_ready) got.push_back(pf_addr);

  task automatic train(logic [31:0] pc, logic [31:0] a, logic trig);
    @(negedge clk);
    train_valid = 1'b1; train_pc = pc; train_addr = a; train_trigger = trig;
    @(negedge clk);
    train_valid = 1'b0; train_trigger = 1'b0;
  endtask

  task automatic settle(int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic expect_list(string what, logic [31:0] exp[$]);
    checks++;
    if (got.size() != exp.size()) begin
      failures++;
      $display("FAIL %s: %0d prefetches, expected %0d", what, got.size(), exp.size());
    end else begin
      foreach (exp[i]) if (got[i] != exp[i]) begin
        failures++;
        $display("FAIL %s: #%0d = %h, expected %h", what, i, got[i], exp[i]);
        break;
      end
    end
    got.delete();
  endtask

  initial begin
    logic [31:0] A, B, C;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1: line stride, distance 1 -> fires on the 4th access
    A = 32'h0001_0000;
    train(32'h400, A, 1'b1);
    train(32'h400, A + 64, 1'b1);
    train(32'h400, A + 128, 1'b1);
    settle(8);
    expect_list("not yet confident", '{});
    train(32'h400, A + 192, 1'b1);
    settle(8);
    expect_list("distance 1", '{A + 256, A + 320, A + 384, A + 448});

    // 2: same stream at distance 16
    distance = 6'd16;
    train(32'h400, A + 256, 1'b1);
    settle(8);
    expect_list("distance 16", '{A + 256 + 16*64, A + 256 + 17*64, A + 256 + 18*64, A + 256 + 19*64});

    // 3: confident stream but no trigger (demand hit on a non-prefetched block)
    train(32'h400, A + 320, 1'b0);
    settle(8);
    expect_list("no trigger", '{});

    // 4: sub-line stride of 8 bytes -> one-line step, distance 1
    distance = 6'd1;
    B = 32'h0002_0010;
    for (int i = 0; i < 4; i++) train(32'h804, B + 8*i, 1'b1);
    settle(8);
    expect_list("sub-line stride", '{32'h0002_0040, 32'h0002_0080, 32'h0002_00C0, 32'h0002_0100});

    // 5: negative stride of two lines, distance 4
    distance = 6'd4;
    C = 32'h0003_0000;
    for (int i = 0; i < 4; i++) train(32'hC08, C - 128*i, 1'b1);
    // last access C-384; addresses C-384 - (4+d)*128
    settle(8);
    expect_list("negative stride", '{C - 384 - 512, C - 384 - 640, C - 384 - 768, C - 384 - 896});

    // 6: irregular strides never become confident
    for (int i = 0; i < 8; i++) train(32'h1010, 32'h0004_0000 + 64 * i * i, 1'b1);
    settle(8);
    expect_list("irregular", '{});

    // 7: queue of 8 fills with two streams while the cache does not pop, then drains
    pf_ready = 1'b0;
    distance = 6'd1;
    for (int i = 0; i < 4; i++) train(32'h2000, 32'h0005_0000 + 64*i, 1'b1);
    settle(6);
    for (int i = 0; i < 4; i++) train(32'h3000, 32'h0006_0000 + 64*i, 1'b1);
    settle(6);
    checks++;
    if (!pf_valid || got.size() != 0) begin failures++; $display("FAIL queue not holding"); end
    pf_ready = 1'b1;
    settle(12);
    expect_list("queue drain", '{32'h0005_0100, 32'h0005_0140, 32'h0005_0180, 32'h0005_01C0,
                                 32'h0006_0100, 32'h0006_0140, 32'h0006_0180, 32'h0006_01C0});

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
