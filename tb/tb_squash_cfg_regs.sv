// Testbench for squash_cfg_regs: reset values, write/read-back of every
// register, clamping of the percentages, the one-cycle UPL start pulse, and
// loading of Priority-Cyc from the UPL result for SDP accelerators only.
module tb_squash_cfg_regs;
  import squash_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, we = 0, upl_done = 0, upl_start, is_sdp [N];
  logic [7:0] addr = 0;
  cnt_t wdata = 0, rdata, upl_p [N], treq [N], tcyc [N], pcyc [N], trc, alpha;
  logic [6:0] et, cf;
  int checks = 0, failures = 0, starts = 0;

  squash_cfg_regs #(.N_HWA(N)) dut (.clk(clk), .rst_n(rst_n), .cfg_we(we), .cfg_addr(addr),
    .cfg_wdata(wdata), .cfg_rdata(rdata), .upl_done(upl_done), .upl_priority_cyc(upl_p),
    .total_req(treq), .total_cyc(tcyc), .priority_cyc(pcyc), .is_sdp(is_sdp), .et_pct(et),
    .cf_pct(cf), .trc(trc), .alpha(alpha), .upl_start(upl_start));

  always #5 clk = ~clk;
  always @(posedge clk) if (upl_start) starts++;

  task automatic wr(input int a, input cnt_t d);
    @(negedge clk); we = 1; addr = 8'(a); wdata = d; @(negedge clk); we = 0;
  endtask
  task automatic rd(input int a, input cnt_t exp);
    @(negedge clk); addr = 8'(a); #1; checks++;
    if (rdata != exp) begin failures++; $display("FAIL read %0h = %0d exp %0d", a, rdata, exp); end
  endtask

  initial begin
    for (int h = 0; h < N; h++) upl_p[h] = cnt_t'(1000 + h);
    repeat (2) @(negedge clk); rst_n = 1;
    checks += 4;
    if (et != 80) failures++;
    if (cf != 20) failures++;
    if (trc != T_RC) failures++;
    if (alpha != 0) failures++;
    for (int h = 0; h < N; h++) begin
      wr(h * 8 + 0, cnt_t'(100 + h)); wr(h * 8 + 1, cnt_t'(5000 + h));
      wr(h * 8 + 2, cnt_t'(300 + h)); wr(h * 8 + 3, cnt_t'(h % 2));
    end
    for (int h = 0; h < N; h++) begin
      rd(h * 8 + 0, cnt_t'(100 + h)); rd(h * 8 + 1, cnt_t'(5000 + h));
      rd(h * 8 + 2, cnt_t'(300 + h)); rd(h * 8 + 3, cnt_t'(h % 2));
      checks += 4;
      if (treq[h] != cnt_t'(100 + h) || tcyc[h] != cnt_t'(5000 + h)) failures++;
      if (pcyc[h] != cnt_t'(300 + h)) failures++;
      if (is_sdp[h] != 1'(h % 2)) failures++;
      if (h == 0 && treq[1] != 101) failures++;
    end
    wr('h80, 90); rd('h80, 90);
    wr('h81, 250); rd('h81, 100);
    wr('h82, 77); rd('h82, 77);
    wr('h83, 12); rd('h83, 12);
    wr('h84, 1);
    @(negedge clk);
    checks++; if (starts != 1) failures++;
    @(negedge clk); upl_done = 1; @(negedge clk); upl_done = 0;
    for (int h = 0; h < N; h++) begin
      checks++;
      if (pcyc[h] != ((h % 2) ? cnt_t'(1000 + h) : cnt_t'(300 + h))) begin
        failures++; $display("FAIL UPL load h=%0d %0d", h, pcyc[h]);
      end
    end
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
