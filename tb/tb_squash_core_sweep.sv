// Workload testbench for the largest system of the paper's core-count
// sweep: squash_top with 24 cores and the 8-accelerator mix (N_CPU = 24,
// N_HWA = 8, 32 requestors; the other parameters at their defaults).
// Accelerators: two image-filter LDP accelerators (211 requests per 100000
// cycles, the 360 MB/s rate with a shortened period), MAT-HWA(10) (LDP,
// 47.2 us = 125552 cycles, 2043 requests = 2.77 GB/s), MAT-HWA(20) (LDP,
// 94164 cycles, 3070 requests), HES-HWA(32) (SDP, 5320 cycles, 15 requests),
// HES-HWA(128) (SDP, 8 us = 21280 cycles, 28 requests), RSZ-HWA at its
// shortest period (LDP, 123690 cycles, 1504 requests) and DET-HWA at its
// longest (SDP, 25536 cycles, 279 requests). The UPL calculator handles three
// SDP accelerators at once. Cores 0-3 are memory-intensive, the other 20
// rarely miss.
//
// Checks: every request completes once with its tag, the three Priority-Cyc
// results against Period - (UPL + sum ceil(UPL/Period_i) * UPL_i + alpha),
// the groups each requestor may use, the light cores' cluster after the first
// quantum; it counts each mechanism and fails any that never happened.
module tb_squash_core_sweep;
  import squash_pkg::*;
  localparam int NC = 24, NH = 8, NS = 32, CH = 2;
  localparam int RUN = 1_060_000;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, upl_busy;
  logic [7:0] cfg_addr = 0;
  cnt_t cfg_wdata = 0, cfg_rdata;
  logic src_valid [NS], src_ready [NS];
  mem_req_t src_req [NS];
  logic [1:0] instr [NC];
  logic cpl_valid [CH], cmd_valid [CH];
  cpl_t cpl [CH];
  dram_cmd_t cmd [CH];
  logic [SRC_W-1:0] cmd_src [CH];
  prio_key_t key [NS];
  logic urg [NH], pend [NH], met [NH], swp [NH], cint [NC], st, swt;
  logic [6:0] pb [NH];
  int checks = 0, failures = 0;

  squash_top #(.N_CPU(NC), .N_HWA(NH)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
    .cfg_rdata(cfg_rdata), .upl_busy(upl_busy), .src_valid(src_valid), .src_req(src_req),
    .src_ready(src_ready), .cpu_instr_ret(instr), .cpl_valid(cpl_valid), .cpl(cpl),
    .cmd_valid(cmd_valid), .cmd(cmd), .cmd_src(cmd_src), .key(key), .hwa_urgent(urg),
    .hwa_period_end(pend), .hwa_deadline_met(met), .hwa_pb(pb), .hwa_pb_swap(swp),
    .cpu_intensive(cint), .sched_tick(st), .switch_tick(swt));

  always #5 clk = ~clk;

  localparam int TREQ [NH] = '{211, 211, 2043, 3070, 15, 28, 1504, 279};
  localparam int TCYC [NH] = '{100000, 100000, 125552, 94164, 5320, 21280, 123690, 25536};
  localparam bit SDP [NH] = '{0, 0, 0, 0, 1, 1, 0, 1};
  localparam int TRC = 132, ALPHA = 200;

  // worst-case urgent window start of SDP accelerator x, extended by the
  // base UPL of every SDP accelerator with a shorter period
  function automatic longint exp_prio_cyc(int x);
    longint upl_x = longint'(TRC) * TREQ[x];
    longint ext = upl_x;
    longint p;
    for (int i = 0; i < NH; i++)
      if (SDP[i] && i != x && (TCYC[i] < TCYC[x] || (TCYC[i] == TCYC[x] && i < x)))
        ext += ((upl_x + TCYC[i] - 1) / TCYC[i]) * (longint'(TRC) * TREQ[i]);
    p = longint'(TCYC[x]) - ext - ALPHA;
    return (p < 0) ? 0 : p;
  endfunction

  // coverage
  typedef enum int {C_STICK, C_SWTICK, C_LDP_URG, C_LDP_G6, C_LDP_G4, C_PB_SWAP, C_SDP_URG,
                    C_CPU_INT, C_CPU_NONINT, C_HIT, C_CLOSED, C_CONFLICT, C_BACKPRESS,
                    C_TWO_CPL, C_MET, C_NUM} cov_e;
  int cov [C_NUM];
  string cov_name [C_NUM] = '{"sched_tick", "switch_tick", "ldp_urgent", "ldp_group6_first_spell",
    "ldp_group4", "pb_switch", "sdp_urgent", "cpu_intensive", "cpu_nonintensive", "row_hit",
    "row_closed", "row_conflict", "buffer_backpressure", "two_completions", "deadline_met"};

  int outstanding [NS];
  bit tag_live [NS][256];
  int tag_ctr [NS];
  int hwa_left [NH], hwa_line [NH];
  int periods [NH], met_cnt [NH];
  int n_req = 0, n_cpl = 0;
  bit acc [NS];
  bit running = 0;
  int cyc = 0;

  task automatic wr(input int a, input int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 8'(a); cfg_wdata = cnt_t'(d); @(negedge clk); cfg_we = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int s = 0; s < NS; s++) begin
      acc[s] = src_valid[s] && src_ready[s];
      if (acc[s]) begin
        n_req++; outstanding[s]++;
        tag_live[s][src_req[s].tag] = 1;
      end
      if (src_valid[s] && !src_ready[s]) cov[C_BACKPRESS]++;
    end
    for (int c = 0; c < CH; c++) if (cpl_valid[c]) begin
      checks++;
      if (!tag_live[cpl[c].src][cpl[c].tag]) begin
        failures++; if (failures < 10) $display("FAIL completion src %0d tag %0d not outstanding", cpl[c].src, cpl[c].tag);
      end
      tag_live[cpl[c].src][cpl[c].tag] = 0;
      outstanding[cpl[c].src]--;
      n_cpl++;
    end
    if (cpl_valid[0] && cpl_valid[1]) cov[C_TWO_CPL]++;
    for (int c = 0; c < CH; c++) if (cmd_valid[c])
      case (cmd[c].kind) ROW_HIT: cov[C_HIT]++; ROW_CLOSED: cov[C_CLOSED]++; default: cov[C_CONFLICT]++; endcase
    if (st) cov[C_STICK]++;
    if (swt) cov[C_SWTICK]++;
    for (int h = 0; h < NH; h++) begin
      checks++;
      case (key[NC + h].grp)
        GRP_SDP_URGENT:    begin cov[C_SDP_URG]++; if (!SDP[h]) begin failures++; $display("FAIL sdp grp on %0d", h); end end
        GRP_LDP_URGENT:    begin cov[C_LDP_URG]++; if (SDP[h]) begin failures++; $display("FAIL ldp grp on sdp %0d", h); end end
        GRP_LDP_NONURGENT: begin cov[C_LDP_G4]++;  if (SDP[h]) failures++; end
        GRP_HWA_LOW:       if (!SDP[h] && !swp[h]) cov[C_LDP_G6]++;
        default:           begin failures++; $display("FAIL hwa %0d group %0d", h, key[NC + h].grp); end
      endcase
      if (swp[h]) cov[C_PB_SWAP]++;
      if (pend[h]) begin
        periods[h]++;
        if (met[h]) begin met_cnt[h]++; cov[C_MET]++; end
        else $display("hwa %0d missed the deadline of period %0d at cycle %0d", h, periods[h], cyc);
        hwa_left[h] = TREQ[h];   // next period's prefetch
      end
    end
    if (cyc > 1_002_000) begin
      checks++;
      if (!(cint[0] || cint[1] || cint[2] || cint[3])) begin failures++; $display("FAIL no heavy core intensive at %0d", cyc); end
    end
    for (int i = 0; i < NC; i++) begin
      checks++;
      if (key[i].grp != GRP_CPU_INT && key[i].grp != GRP_CPU_NONINT) begin failures++; $display("FAIL cpu %0d grp %0d at %0d", i, key[i].grp, cyc); end
      if (key[i].grp == GRP_CPU_INT) cov[C_CPU_INT]++; else cov[C_CPU_NONINT]++;
      // once the first quantum's classification is out (24 sequential
      // MPKI divisions, about 1250 cycles), the light cores 4-23 are in the
      // non-intensive cluster
      if (cyc > 1_002_000 && i >= 4) begin
        checks++;
        if (cint[i]) begin failures++; $display("FAIL cpu %0d intensive at %0d", i, cyc); end
      end
    end
  end

  // requestors: drive at the falling edge, hold a request until accepted
  always @(negedge clk) if (running) begin
    for (int s = 0; s < NS; s++) begin
      if (acc[s]) begin
        src_valid[s] = 0; acc[s] = 0;
        if (s >= NC) hwa_left[s - NC]--;
      end
      if (!src_valid[s] && outstanding[s] < 16) begin
        bit go;
        logic [31:0] a;
        if (s < NC) begin
          go = (s < 4) ? ($urandom_range(0, 99) < 30) : ($urandom_range(0, 9999) < 5);
          a  = {4'(s + 1), 22'($urandom()), 6'd0};
        end else begin
          go = hwa_left[s - NC] > 0;
          a  = {4'(s + 1), 22'(hwa_line[s - NC]), 6'd0};
        end
        if (go) begin
          if (s >= NC) hwa_line[s - NC]++;
          src_valid[s] = 1;
          src_req[s] = '{we: (s < NC) && ($urandom_range(0, 3) == 0), addr: a, tag: TAG_W'(tag_ctr[s]++)};
        end
      end
    end
  end

  initial begin
    for (int s = 0; s < NS; s++) begin
      src_valid[s] = 0; src_req[s] = '0; outstanding[s] = 0; tag_ctr[s] = 0; acc[s] = 0;
      for (int t = 0; t < 256; t++) tag_live[s][t] = 0;
    end
    for (int i = 0; i < NC; i++) instr[i] = 2'd2;
    for (int h = 0; h < NH; h++) begin hwa_left[h] = 0; hwa_line[h] = 0; periods[h] = 0; met_cnt[h] = 0; end
    for (int k = 0; k < C_NUM; k++) cov[k] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    wr('h82, TRC); wr('h83, ALPHA);
    for (int h = 0; h < NH; h++) begin
      wr(h * 8 + 0, TREQ[h]); wr(h * 8 + 3, int'(SDP[h]));
    end
    // the deadline periods start when Total-Cyc is written
    for (int h = 0; h < NH; h++) begin
      wr(h * 8 + 1, TCYC[h]);
      hwa_left[h] = TREQ[h];
    end
    running = 1;
    wr('h84, 1);
    @(negedge clk);
    while (upl_busy) @(negedge clk);
    @(negedge clk);  // the result is loaded the cycle after done
    for (int h = 0; h < NH; h++) if (SDP[h]) begin
      cfg_addr = 8'(h * 8 + 2); #1;
      checks++;
      $display("hwa %0d Priority-Cyc %0d", h, cfg_rdata);
      if (longint'(cfg_rdata) != exp_prio_cyc(h)) begin failures++; $display("FAIL UPL Priority-Cyc of %0d: %0d exp %0d", h, cfg_rdata, exp_prio_cyc(h)); end
    end
    repeat (RUN) @(negedge clk);
    running = 0;
    for (int s = 0; s < NS; s++) src_valid[s] = 0;
    repeat (20000) @(negedge clk);
    checks++;
    if (n_cpl != n_req) begin failures++; $display("FAIL %0d requests, %0d completions", n_req, n_cpl); end
    for (int k = 0; k < C_NUM; k++) begin
      checks++;
      $display("mechanism %-24s %0d", cov_name[k], cov[k]);
      if (cov[k] == 0) begin failures++; $display("FAIL mechanism %s never happened", cov_name[k]); end
    end
    for (int h = 0; h < NH; h++) $display("hwa %0d deadlines met %0d of %0d", h, met_cnt[h], periods[h]);
    $display("requests %0d", n_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (RUN + 40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

