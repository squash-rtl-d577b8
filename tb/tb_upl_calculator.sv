// Testbench for upl_calculator. Checks the paper's worked example (16
// requests, tRC = 50 ns, 2000 ns period: urgent from 2000 - 800 - alpha) and
// random sets of SDP/LDP accelerators against the extension formula
// UPL'(x) = UPL(x) + sum over shorter-period SDP i of ceil(UPL(x)/P(i)) * UPL(i),
// computed here in 64-bit integers.
module tb_upl_calculator;
  import squash_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic is_sdp [N];
  cnt_t period [N], nreq [N], prio [N];
  cnt_t trc, alpha;
  int checks = 0, failures = 0;

  upl_calculator #(.N_HWA(N)) dut (.clk(clk), .rst_n(rst_n), .start(start), .is_sdp(is_sdp),
    .period(period), .nreq(nreq), .trc(trc), .alpha(alpha), .busy(busy), .done(done),
    .priority_cyc(prio));

  always #5 clk = ~clk;

  function automatic longint expected(int x);
    longint upl, acc;
    if (!is_sdp[x]) return 0;
    upl = longint'(trc) * nreq[x];
    acc = upl + alpha;
    for (int i = 0; i < N; i++)
      if (is_sdp[i] && i != x && (period[i] < period[x] || (period[i] == period[x] && i < x)))
        acc += ((upl + period[i] - 1) / period[i]) * (longint'(trc) * nreq[i]);
    return (period[x] > acc) ? period[x] - acc : 0;
  endfunction

  task automatic go();
    int n;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    n = 0;
    while (!done && n < 5000) begin @(negedge clk); n++; end
    checks++;
    if (!done) begin failures++; $display("FAIL no done"); end
    for (int x = 0; x < N; x++) begin
      checks++;
      if (longint'(prio[x]) != expected(x)) begin
        failures++;
        $display("FAIL x=%0d prio=%0d expected %0d", x, prio[x], expected(x));
      end
    end
  endtask

  initial begin
    for (int k = 0; k < N; k++) begin is_sdp[k] = 0; period[k] = 0; nreq[k] = 0; end
    trc = 50; alpha = 30;
    repeat (2) @(negedge clk); rst_n = 1;
    // Paper example in ns: one SDP-HWA, 16 requests, 2000 ns period.
    is_sdp[1] = 1; period[1] = 2000; nreq[1] = 16;
    go();
    checks++; if (prio[1] != 2000 - 800 - 30) failures++;
    // Two SDP-HWAs: the longer-period one is extended by the shorter one.
    is_sdp[2] = 1; period[2] = 900; nreq[2] = 2;   // UPL 100
    go();
    // x=1: UPL 800, N = ceil(800/900) = 1, +100 -> 2000-900-30
    checks++; if (prio[1] != 2000 - 900 - 30) failures++;
    for (int r = 0; r < 40; r++) begin
      trc = cnt_t'($urandom_range(20, 200));
      alpha = cnt_t'($urandom_range(0, 100));
      for (int k = 0; k < N; k++) begin
        is_sdp[k] = $urandom_range(0, 1);
        period[k] = cnt_t'($urandom_range(1000, 60000));
        nreq[k]   = cnt_t'($urandom_range(1, 40));
      end
      if (r % 5 == 0) period[3] = period[0];
      go();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
