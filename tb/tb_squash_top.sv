// End-to-end testbench of squash_top at its default parameters (8 cores,
// 4 accelerators, 2 channels, 300 buffer entries, SchedulingUnit 1000,
// SwitchingUnit 500, quantum 1M cycles).
//
// Software setup: the accelerator mix resembles the paper's Config-A: two
// image-filter LDP accelerators (periods shortened to 100k cycles, 211
// requests each, the 360 MB/s rate of the paper), a matching LDP accelerator
// (MAT-HWA(30): 23.6 us = 62776 cycles, 3068 requests = 8.32 GB/s) and a
// Hessian SDP accelerator (HES-HWA(32): 2 us = 5320 cycles, 15 requests),
// whose Priority-Cyc the UPL calculator computes (tRC = 132, alpha = 200).
// Cycles are 2.66 GHz CPU cycles. Accelerators prefetch their period's
// requests with at most 16 outstanding; cores 0-3 are memory-intensive
// (random lines, up to 16 misses outstanding), cores 4-7 rarely miss.
//
// Checks: every request completes once, to its requestor, with its tag; the
// UPL result; every key is in a group its requestor may use. It counts each
// mechanism (SchedulingUnit and SwitchingUnit ticks, urgent LDP, first
// non-urgent spell in group 6, group 4, Pb switching, urgent SDP window,
// intensive and non-intensive CPUs, row hit / closed / conflict, buffer
// back-pressure, two completions in one cycle, deadlines met) and fails any
// that never happened.
module tb_squash_top;
  import squash_pkg::*;
  localparam int NC = 8, NH = 4, NS = 12, CH = 2;
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

  squash_top dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
    .cfg_rdata(cfg_rdata), .upl_busy(upl_busy), .src_valid(src_valid), .src_req(src_req),
    .src_ready(src_ready), .cpu_instr_ret(instr), .cpl_valid(cpl_valid), .cpl(cpl),
    .cmd_valid(cmd_valid), .cmd(cmd), .cmd_src(cmd_src), .key(key), .hwa_urgent(urg),
    .hwa_period_end(pend), .hwa_deadline_met(met), .hwa_pb(pb), .hwa_pb_swap(swp),
    .cpu_intensive(cint), .sched_tick(st), .switch_tick(swt));

  always #5 clk = ~clk;

  localparam int TREQ [NH] = '{211, 211, 3068, 15};
  localparam int TCYC [NH] = '{100000, 100000, 62776, 5320};
  localparam int PRIO_HES = 5320 - 132 * 15 - 200;

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
        GRP_SDP_URGENT:    begin cov[C_SDP_URG]++; if (h != 3) begin failures++; $display("FAIL sdp grp on %0d", h); end end
        GRP_LDP_URGENT:    begin cov[C_LDP_URG]++; if (h == 3) begin failures++; $display("FAIL ldp grp on sdp"); end end
        GRP_LDP_NONURGENT: begin cov[C_LDP_G4]++;  if (h == 3) failures++; end
        GRP_HWA_LOW:       if (h != 3 && !swp[h]) cov[C_LDP_G6]++;
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
    if (cyc > 1_000_500) begin
      checks++;
      if (!(cint[0] || cint[1] || cint[2] || cint[3])) begin failures++; $display("FAIL no heavy core intensive at %0d", cyc); end
    end
    for (int i = 0; i < NC; i++) begin
      checks++;
      if (key[i].grp != GRP_CPU_INT && key[i].grp != GRP_CPU_NONINT) begin failures++; $display("FAIL cpu %0d grp %0d at %0d", i, key[i].grp, cyc); end
      if (key[i].grp == GRP_CPU_INT) cov[C_CPU_INT]++; else cov[C_CPU_NONINT]++;
      // once the first quantum's classification is out (eight sequential
      // MPKI divisions, under 500 cycles), the light cores 4-7 are in the
      // non-intensive cluster
      if (cyc > 1_000_500 && i >= 4) begin
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
          go = (s < 4) ? ($urandom_range(0, 99) < 30) : ($urandom_range(0, 999) < 2);
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
    wr('h82, 132); wr('h83, 200);
    for (int h = 0; h < NH; h++) begin
      wr(h * 8 + 0, TREQ[h]); wr(h * 8 + 3, h == 3);
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
    cfg_addr = 8'(3 * 8 + 2); #1;
    checks++;
    if (cfg_rdata != cnt_t'(PRIO_HES)) begin failures++; $display("FAIL UPL Priority-Cyc %0d exp %0d", cfg_rdata, PRIO_HES); end
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

