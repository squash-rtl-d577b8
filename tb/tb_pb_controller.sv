// Testbench for pb_controller: drives progress comparisons on SwitchingUnit
// ticks and checks Pb against a reference model (+1 / -5 / hold, saturating
// at 0 and 100), that the coin never says "swap" at Pb = 0 and always does at
// Pb = 100, and that at Pb = 50 about half the draws swap.
module tb_pb_controller;
  logic clk = 0, rst_n = 0, tick = 0, gt = 0, lt = 0;
  logic [6:0] pb;
  logic swap;
  int checks = 0, failures = 0;
  int model = 0;
  int nswap;

  pb_controller dut (.clk(clk), .rst_n(rst_n), .tick(tick), .prog_gt(gt), .prog_lt(lt),
                     .pb(pb), .swap(swap));

  always #5 clk = ~clk;

  task automatic do_tick(input logic g, input logic l);
    @(negedge clk);
    gt = g; lt = l; tick = 1;
    @(negedge clk);
    tick = 0; gt = 0; lt = 0;
    if (g) model = (model + 1 > 100) ? 100 : model + 1;
    else if (l) model = (model < 5) ? 0 : model - 5;
    checks++;
    if (int'(pb) != model) begin
      failures++;
      $display("FAIL pb=%0d expected %0d", pb, model);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    checks++; if (pb != 0 || swap != 0) failures++;
    // Pb = 0: no swap.
    for (int k = 0; k < 20; k++) begin
      do_tick(0, 1);
      checks++; if (swap) failures++;
    end
    for (int k = 0; k < 7; k++) do_tick(1, 0);
    for (int k = 0; k < 3; k++) do_tick(0, 0);
    do_tick(0, 1);
    do_tick(0, 1);   // 7-5=2, 2-5 -> 0
    for (int k = 0; k < 120; k++) do_tick(1, 0);   // saturate at 100
    for (int k = 0; k < 20; k++) begin
      do_tick(1, 0);
      checks++; if (!swap) failures++;
    end
    for (int k = 0; k < 10; k++) do_tick(0, 1);     // 100 -> 50
    nswap = 0;
    for (int k = 0; k < 400; k++) begin
      do_tick(0, 0);
      repeat ($urandom_range(0, 7)) @(negedge clk);
      nswap += swap;
    end
    checks++;
    if (nswap < 140 || nswap > 260) begin
      failures++;
      $display("FAIL swap fraction %0d/400 at Pb=50", nswap);
    end
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
