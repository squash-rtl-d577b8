// Testbench for squash_meta_controller (8 CPUs, 4 accelerators, 2 channels,
// short SchedulingUnit/SwitchingUnit/quantum). Accelerator 0 is an LDP-HWA that
// receives no completions (must stay urgent, group 2), 1 an LDP-HWA served
// fast (must leave urgency for group 6), 2 an SDP-HWA (group 1 exactly from
// Priority-Cyc to the period end), 3 disabled (lowest key). Completions for
// one accelerator on both channels in one cycle must count twice (checked
// through deadline_met). CPUs 0-3 send many requests and must be classified
// intensive (group 5) after a quantum, the rest non-intensive (group 3).
// Keys are checked against these expectations one cycle after the state they
// follow; tick spacing is checked against the unit lengths.
module tb_squash_meta_controller;
  import squash_pkg::*;
  localparam int NC = 8, NH = 4, NS = 12, CH = 2, SU = 100, SW = 50, Q = 2000;
  logic clk = 0, rst_n = 0;
  cnt_t treq [NH], tcyc [NH], pcyc [NH];
  logic sdp [NH];
  logic cv [CH];
  logic [SRC_W-1:0] cs [CH];
  logic sent [NC];
  logic [1:0] ins [NC];
  prio_key_t key [NS];
  logic urg [NH], pend [NH], met [NH], cint [NC], st, swt;
  logic [6:0] pb [NH];
  int checks = 0, failures = 0;
  int n_st = 0, n_swt = 0, cyc = 0, last_st = -1, last_swt = -1;
  bit starve = 0;
  int n_met2 = 0, n_miss2 = 0, g6_seen = 0, sdp_urg = 0;

  squash_meta_controller #(.N_CPU(NC), .N_HWA(NH), .N_CH(CH), .SCHED_UNIT(SU), .SWITCH_UNIT(SW),
                           .QUANTUM(Q), .SHUFFLE(80)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_total_req(treq), .cfg_total_cyc(tcyc), .cfg_priority_cyc(pcyc),
    .cfg_is_sdp(sdp), .cfg_et_pct(7'd80), .cfg_cf_pct(7'd20), .cpl_valid(cv), .cpl_src(cs),
    .cpu_req_sent(sent), .cpu_instr_ret(ins), .key(key), .hwa_urgent(urg), .hwa_period_end(pend),
    .hwa_deadline_met(met), .hwa_pb(pb), .hwa_pb_swap(), .cpu_intensive(cint), .sched_tick(st), .switch_tick(swt));

  always #5 clk = ~clk;

  // state one cycle ago, to compare against the registered keys
  logic p_urg [NH];
  logic p_cint [NC];
  int   p_cyc;

  always @(posedge clk) if (rst_n) begin
    // ticks
    if (st) begin
      if (last_st >= 0) begin checks++; if (cyc - last_st != SU) failures++; end
      last_st = cyc; n_st++;
    end
    if (swt) begin
      if (last_swt >= 0) begin checks++; if (cyc - last_swt != SW) failures++; end
      last_swt = cyc; n_swt++;
    end
    if (cyc > 2) begin
      checks += 4;
      if (key[NC + 0].grp != GRP_LDP_URGENT) begin failures++; $display("FAIL hwa0 grp %0d", key[NC].grp); end
      if (key[NC + 3] != KEY_LOWEST) failures++;
      // HWA2 (SDP): period 400, Priority-Cyc 300
      if ((key[NC + 2].grp == GRP_SDP_URGENT) != ((p_cyc % 400) >= 300)) begin
        failures++; $display("FAIL sdp window cyc=%0d grp=%0d", p_cyc, key[NC + 2].grp);
      end
      if (key[NC + 2].grp == GRP_SDP_URGENT && key[NC + 2].sub != 400) failures++;
      if (key[NC + 2].grp == GRP_SDP_URGENT) sdp_urg++;
      checks++;
      if (p_urg[1] ? key[NC + 1].grp != GRP_LDP_URGENT
                   : !(key[NC + 1].grp inside {GRP_HWA_LOW, GRP_LDP_NONURGENT})) failures++;
      if (key[NC + 1].grp == GRP_HWA_LOW) g6_seen++;
      for (int i = 0; i < NC; i++) begin
        checks++;
        if (key[i].grp != (p_cint[i] ? GRP_CPU_INT : GRP_CPU_NONINT)) failures++;
      end
    end
    // HWA0 gets no completions: its deadline is never met
    if (pend[0]) begin checks++; if (met[0]) failures++; end
    for (int h = 0; h < NH; h++) p_urg[h] = urg[h];
    for (int i = 0; i < NC; i++) p_cint[i] = cint[i];
    p_cyc = cyc;
    cyc++;
  end

  initial begin
    treq[0] = 50;  tcyc[0] = 1000; pcyc[0] = 0; sdp[0] = 0;
    treq[1] = 100; tcyc[1] = 1000; pcyc[1] = 0; sdp[1] = 0;
    treq[2] = 10;  tcyc[2] = 400;  pcyc[2] = 300; sdp[2] = 1;
    treq[3] = 0;   tcyc[3] = 0;    pcyc[3] = 0; sdp[3] = 0;
    for (int c = 0; c < CH; c++) begin cv[c] = 0; cs[c] = 0; end
    for (int i = 0; i < NC; i++) begin sent[i] = 0; ins[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    fork
      // HWA1: served on both channels at once every 8 cycles -> 2 per event
      forever begin
        @(negedge clk);
        cv[0] = 0; cv[1] = 0;
        if (cyc % 8 == 0) begin cv[0] = 1; cs[0] = SRC_W'(NC + 1); cv[1] = 1; cs[1] = SRC_W'(NC + 1); end
        else if (cyc % 8 == 4 && $urandom_range(0, 1)) begin cv[0] = 1; cs[0] = SRC_W'(($urandom_range(0, 19) == 0) ? $urandom_range(4, 7) : $urandom_range(0, 3)); end
        for (int i = 0; i < NC; i++) begin
          sent[i] = (i < 4) ? ($urandom_range(0, 9) < 5) : ($urandom_range(0, 99) < 2);
          ins[i] = 2'd2;
        end
      end
      // deadline of HWA1: 1000 cycles, 2 completions every 8 cycles = 250 per period >= 100
      forever begin
        @(posedge clk);
        if (pend[1]) begin checks++; if (met[1] == starve) failures++; if (met[1]) n_met2++; else n_miss2++; end
      end
    join_none
    repeat (8000) @(negedge clk);
    // now starve HWA1: fewer completions than needed in a period
    @(negedge clk); while (!pend[1]) @(negedge clk);
    treq[1] = 300; starve = 1;
    repeat (3000) @(negedge clk);
    disable fork;
    checks++;
    if (n_st < 100 || n_swt < 200 || n_met2 == 0 || n_miss2 == 0 || g6_seen == 0 || sdp_urg == 0) begin
      failures++; $display("FAIL coverage st=%0d sw=%0d met=%0d g6=%0d sdp=%0d", n_st, n_swt, n_met2, g6_seen, sdp_urg);
    end
    checks++;
    for (int i = 0; i < NC; i++) if (cint[i] != (i < 4)) begin failures++; $display("FAIL cluster cpu %0d", i); end
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
