// Workload testbench of squash_top at its default parameters with an
// accelerator mix like the paper's Config-B: a matching accelerator
// MAT-HWA(20) (LDP, 35.4 us = 94164 cycles, 3070 requests = 5.55 GB/s), a
// Hessian detector HES-HWA(32) (SDP, 2 us = 5320 cycles, 15 requests), a
// resize accelerator RSZ-HWA (LDP, variable period) and a face detector
// DET-HWA (SDP, variable period). Cycles are 2.66 GHz CPU cycles and a
// request is 64 bytes.
//
// The variable accelerators alternate between two settings:
//   RSZ: 46.5 us at 2.07 GB/s (123690 cycles, 1504 requests), the shortest
//        period the paper lists, and 93 us at 3.33 GB/s (247380 cycles,
//        4839 requests), a shortened long phase at the paper's top rate;
//   DET: 0.8 us at 1.60 GB/s (2128 cycles, 20 requests) and 9.6 us at
//        1.86 GB/s (25536 cycles, 279 requests), the two ends of its range.
// As the paper's system software does, the testbench rewrites Total-Req and
// Total-Cyc of a variable accelerator when its period ends, and after a DET
// change reruns the UPL calculation, because the order of the two SDP
// accelerators flips: at 2128 cycles DET has the shorter period and HES's
// urgent window is extended by one DET window; at 25536 cycles HES comes
// first and DET's window is extended by seven HES windows.
//
// Checks: every request completes once with its tag; each Priority-Cyc the
// calculator produces equals the value worked out here from
// Period - (UPL + sum ceil(UPL/Period_i) * UPL_i + alpha); while both SDP
// accelerators are urgent the one with the shorter current period has the
// smaller key; accelerators only use their own groups. It counts both SDP
// accelerators urgent together, period rewrites, UPL reruns, LDP urgent /
// group 6 / group 4, Pb switching and deadlines met, and fails any that
// never happened. Deadline results per accelerator are printed.
module tb_squash_config_b;
  import squash_pkg::*;
  localparam int NC = 8, NH = 4, NS = 12, CH = 2;
  localparam int RUN = 800_000;
  localparam int TRC = 132, ALPHA = 200;
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

  // accelerator 0 MAT(20), 1 HES(32), 2 RSZ, 3 DET; settings [phase]
  localparam int TREQ [NH][2] = '{'{3070, 3070}, '{15, 15}, '{1504, 4839}, '{20, 279}};
  localparam int TCYC [NH][2] = '{'{94164, 94164}, '{5320, 5320}, '{123690, 247380}, '{2128, 25536}};
  localparam bit SDP [NH] = '{0, 1, 0, 1};

  int phase [NH];                    // setting the accelerator's current period uses
  int cur_req [NH], cur_cyc [NH];    // settings of the current period

  typedef enum int {C_BOTH_SDP, C_REWRITE, C_UPL, C_SDP_URG, C_LDP_URG, C_LDP_G6, C_LDP_G4,
                    C_PB_SWAP, C_MET, C_NUM} cov_e;
  int cov [C_NUM];
  string cov_name [C_NUM] = '{"both_sdp_urgent", "period_rewrite", "upl_rerun", "sdp_urgent",
    "ldp_urgent", "ldp_group6_first_spell", "ldp_group4", "pb_switch", "deadline_met"};

  int outstanding [NS];
  bit tag_live [NS][256];
  int tag_ctr [NS];
  int hwa_left [NH], hwa_line [NH];
  int periods [NH], met_cnt [NH];
  int n_req = 0, n_cpl = 0;
  bit acc [NS];
  bit running = 0;
  bit rewrite_req [NH];
  int cyc = 0;

  // worst-case urgent window start of SDP accelerator x among the SDP set,
  // using the base UPL of the higher-priority (shorter-period) accelerators
  function automatic longint exp_prio_cyc(int x);
    longint upl_x = longint'(TRC) * cur_req[x];
    longint ext = upl_x;
    longint p;
    for (int i = 0; i < NH; i++)
      if (SDP[i] && i != x && (cur_cyc[i] < cur_cyc[x] || (cur_cyc[i] == cur_cyc[x] && i < x)))
        ext += ((upl_x + cur_cyc[i] - 1) / cur_cyc[i]) * (longint'(TRC) * cur_req[i]);
    p = longint'(cur_cyc[x]) - ext - ALPHA;
    return (p < 0) ? 0 : p;
  endfunction

  task automatic wr(input int a, input int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 8'(a); cfg_wdata = cnt_t'(d); @(negedge clk); cfg_we = 0;
  endtask

  task automatic run_upl_and_check();
    wr('h84, 1);
    @(negedge clk);
    while (upl_busy) @(negedge clk);
    @(negedge clk);  // results are loaded the cycle after the calculator finishes
    for (int h = 0; h < NH; h++) if (SDP[h]) begin
      cfg_addr = 8'(h * 8 + 2); #1;
      checks++;
      if (longint'(cfg_rdata) != exp_prio_cyc(h)) begin
        failures++;
        $display("FAIL Priority-Cyc of hwa %0d = %0d, expected %0d (cycle %0d)", h, cfg_rdata, exp_prio_cyc(h), cyc);
      end
    end
    cov[C_UPL]++;
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int s = 0; s < NS; s++) begin
      acc[s] = src_valid[s] && src_ready[s];
      if (acc[s]) begin
        n_req++; outstanding[s]++;
        tag_live[s][src_req[s].tag] = 1;
      end
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
    for (int h = 0; h < NH; h++) begin
      checks++;
      case (key[NC + h].grp)
        GRP_SDP_URGENT:    begin cov[C_SDP_URG]++; if (!SDP[h]) begin failures++; $display("FAIL sdp group on hwa %0d", h); end end
        GRP_LDP_URGENT:    begin cov[C_LDP_URG]++; if (SDP[h]) begin failures++; $display("FAIL ldp group on hwa %0d", h); end end
        GRP_LDP_NONURGENT: begin cov[C_LDP_G4]++;  if (SDP[h]) begin failures++; $display("FAIL group 4 on hwa %0d", h); end end
        GRP_HWA_LOW:       if (!SDP[h] && !swp[h]) cov[C_LDP_G6]++;
        default:           begin failures++; $display("FAIL hwa %0d group %0d", h, key[NC + h].grp); end
      endcase
      if (swp[h]) cov[C_PB_SWAP]++;
      if (pend[h]) begin
        periods[h]++;
        if (met[h]) begin met_cnt[h]++; cov[C_MET]++; end
        else $display("hwa %0d missed the deadline of period %0d at cycle %0d", h, periods[h], cyc);
        if (h >= 2) begin
          // next period: the other setting, rewritten by software
          phase[h] = 1 - phase[h];
          cur_req[h] = TREQ[h][phase[h]]; cur_cyc[h] = TCYC[h][phase[h]];
          rewrite_req[h] = 1;
        end
        hwa_left[h] = cur_req[h];   // the period's requests, prefetched
      end
    end
    // shorter current period first inside group 1 (the key is one cycle
    // behind a period rewrite, so only settled cycles are compared)
    if (key[NC + 1].grp == GRP_SDP_URGENT && key[NC + 3].grp == GRP_SDP_URGENT && !rewrite_req[3]) begin
      cov[C_BOTH_SDP]++;
      checks++;
      if ((cur_cyc[3] < cur_cyc[1]) != (key[NC + 3] < key[NC + 1])) begin
        failures++; if (failures < 10) $display("FAIL SDP order at cycle %0d", cyc);
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
          go = (s < 4) ? ($urandom_range(0, 99) < 20) : ($urandom_range(0, 999) < 2);
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

  // system software: initial setup, then the per-period rewrites
  initial begin
    for (int s = 0; s < NS; s++) begin
      src_valid[s] = 0; src_req[s] = '0; outstanding[s] = 0; tag_ctr[s] = 0; acc[s] = 0;
      for (int t = 0; t < 256; t++) tag_live[s][t] = 0;
    end
    for (int i = 0; i < NC; i++) instr[i] = 2'd2;
    for (int h = 0; h < NH; h++) begin
      hwa_left[h] = 0; hwa_line[h] = 0; periods[h] = 0; met_cnt[h] = 0; phase[h] = 0; rewrite_req[h] = 0;
      cur_req[h] = TREQ[h][0]; cur_cyc[h] = TCYC[h][0];
    end
    for (int k = 0; k < C_NUM; k++) cov[k] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    wr('h82, TRC); wr('h83, ALPHA);
    for (int h = 0; h < NH; h++) begin
      wr(h * 8 + 0, cur_req[h]); wr(h * 8 + 3, int'(SDP[h]));
    end
    for (int h = 0; h < NH; h++) begin
      wr(h * 8 + 1, cur_cyc[h]);
      hwa_left[h] = cur_req[h];
    end
    running = 1;
    run_upl_and_check();
    while (cyc < RUN) begin
      @(negedge clk);
      for (int h = 2; h < NH; h++) if (rewrite_req[h]) begin
        wr(h * 8 + 0, cur_req[h]);
        wr(h * 8 + 1, cur_cyc[h]);
        @(negedge clk);  // the registered keys follow one cycle later
        rewrite_req[h] = 0;
        cov[C_REWRITE]++;
        if (SDP[h]) run_upl_and_check();
      end
    end
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
    repeat (RUN + 60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
