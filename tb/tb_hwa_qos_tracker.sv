// Testbench for hwa_qos_tracker. A cycle-by-cycle reference model of the
// paper's rules (Dist-Prio urgency with EmergentThreshold, group 6 for the
// first non-urgent spell of a period and group 4 after, the SDP urgent window
// from Priority-Cyc) is compared with the tracker's key every cycle, with
// random completions. It also replays the paper's two-CPU scheduling example (Figure 4)
// (period 16T, 8 requests, one SchedulingUnit = 4T) and checks that Pb = 100
// moves a group-4 accelerator below the memory-intensive CPUs (group 6).
module tb_hwa_qos_tracker;
  import squash_pkg::*;
  logic clk = 0, rst_n = 0;
  cnt_t total_req = 0, total_cyc = 0, prio_cyc = 0;
  logic is_sdp = 0;
  logic [6:0] et = 7'd80;
  logic sched_tick = 0, switch_tick = 0;
  logic [1:0] cpl = 0;
  prio_key_t key;
  logic urgent, period_end, met;
  cnt_t curr_req, curr_cyc;
  logic [6:0] pb;
  int checks = 0, failures = 0;
  int unsigned sched_unit = 10;
  int cyc_in_unit = 0;
  logic check_pb_swapped = 0;

  // reference model state
  longint m_req = 0, m_cyc = 0;
  bit m_urg = 1, m_seen = 0, m_g6 = 0;
  int n_g4 = 0, n_g6 = 0, n_urg = 0, n_sdp_urg = 0, n_met = 0, n_periods = 0;

  hwa_qos_tracker dut (
    .clk(clk), .rst_n(rst_n), .cfg_total_req(total_req), .cfg_total_cyc(total_cyc),
    .cfg_priority_cyc(prio_cyc), .cfg_is_sdp(is_sdp), .cfg_et_pct(et), .sched_tick(sched_tick),
    .switch_tick(switch_tick), .cpl_cnt(cpl), .key(key), .urgent(urgent), .period_end(period_end),
    .deadline_met(met), .curr_req(curr_req), .curr_cyc(curr_cyc), .pb(pb), .pb_swap()
  );

  always #5 clk = ~clk;

  function automatic prio_key_t model_key();
    longint rem;
    rem = longint'(total_cyc) - m_cyc;
    if (is_sdp) begin
      if (m_cyc >= longint'(prio_cyc)) return '{grp: GRP_SDP_URGENT, sub: total_cyc};
      return '{grp: GRP_HWA_LOW, sub: cnt_t'(rem)};
    end
    if (m_urg) return '{grp: GRP_LDP_URGENT, sub: cnt_t'(rem)};
    if (m_g6 || check_pb_swapped) return '{grp: GRP_HWA_LOW, sub: cnt_t'(rem)};
    return '{grp: GRP_LDP_NONURGENT, sub: cnt_t'(rem)};
  endfunction

  // compare, then advance the model, on every falling edge after inputs settle
  task automatic step();
    prio_key_t mk;
    bit nu, last;
    longint req_next;
    @(posedge clk);
    #1;
    mk = model_key();
    checks++;
    if (key !== mk) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0t cyc=%0d key=%0d/%0d expected %0d/%0d", $time, m_cyc,
                                   key.grp, key.sub, mk.grp, mk.sub);
    end
    if (key.grp == GRP_LDP_NONURGENT) n_g4++;
    if (key.grp == GRP_HWA_LOW && !is_sdp) n_g6++;
    if (key.grp == GRP_LDP_URGENT) n_urg++;
    if (key.grp == GRP_SDP_URGENT) n_sdp_urg++;
  endtask

  // model update for the edge that just happened, given inputs held during that cycle
  task automatic model_edge(input bit st, input int c);
    bit nu;
    longint req_next;
    req_next = m_req + c;
    if (m_cyc == longint'(total_cyc) - 1) begin
      checks++;
      if (met !== (req_next >= longint'(total_req))) failures++;
      n_periods++;
      if (req_next >= longint'(total_req)) n_met++;
      m_req = 0; m_cyc = 0; m_urg = 1; m_seen = 0; m_g6 = 0;
    end else begin
      if (st) begin
        // CurrentProgress <= ExpectedProgress, or ExpectedProgress > EmergentThreshold
        nu = (m_req * longint'(total_cyc) <= m_cyc * longint'(total_req)) ||
             (m_cyc * 100 > longint'(et) * longint'(total_cyc));
        if (m_urg && !nu) begin m_g6 = !m_seen; m_seen = 1; end
        m_urg = nu;
      end
      m_req = req_next; m_cyc++;
    end
  endtask

  task automatic run(input int n, input int cpl_pct);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      cyc_in_unit = (cyc_in_unit + 1) % sched_unit;
      sched_tick = (cyc_in_unit == 0);
      cpl = ($urandom_range(0, 99) < cpl_pct) ? 2'($urandom_range(1, 2)) : 2'd0;
      @(posedge clk);
      #1;
      begin
        prio_key_t mk;
        mk = model_key();
        checks++;
        if (key !== mk) begin
          failures++;
          if (failures < 10) $display("FAIL cyc=%0d key=%0d/%0d expected %0d/%0d", m_cyc,
                                       key.grp, key.sub, mk.grp, mk.sub);
        end
        if (key.grp == GRP_LDP_NONURGENT) n_g4++;
        if (key.grp == GRP_HWA_LOW && !is_sdp) n_g6++;
        if (key.grp == GRP_LDP_URGENT) n_urg++;
        if (key.grp == GRP_SDP_URGENT) n_sdp_urg++;
      end
    end
  endtask

  // the model must see the edge with the inputs of that cycle: sample at posedge
  always @(posedge clk) if (rst_n) model_edge(sched_tick, int'(cpl));

  initial begin
    repeat (2) @(negedge clk);
    // Figure 4 example: period 16T, 8 requests, T = 4 cycles, SchedulingUnit = 4T = 16 cycles.
    total_req = 8; total_cyc = 64; is_sdp = 0; sched_unit = 16;
    rst_n = 1;
    // one request completes per T for the first 4T (HWA urgent), then
    // the HWA keeps being served between CPU-A's requests.
    for (int t = 0; t < 64; t++) begin
      @(negedge clk);
      cyc_in_unit = (cyc_in_unit + 1) % sched_unit;
      sched_tick = (cyc_in_unit == 0);
      cpl = ((t % 4 == 3) && (t < 16 || (t >= 20 && t < 32) || t == 36)) ? 2'd1 : 2'd0;
      @(posedge clk); #1;
      if (t == 17) begin  // after 4T: CurrentProgress 0.5 > 0.25, first non-urgent spell
        checks++; if (key.grp != GRP_HWA_LOW) begin failures++; $display("FAIL Fig7 4T grp=%0d", key.grp); end
      end
      if (t == 33) begin  // after 8T: 0.875 > 0.5, still not urgent
        checks++; if (urgent) begin failures++; $display("FAIL Fig7 8T urgent"); end
      end
    end
    // Random LDP traffic, several periods.
    total_req = 40; total_cyc = 300; sched_unit = 10;
    run(3000, 14);
    run(3000, 10);
    et = 7'd50;
    run(3000, 12);
    et = 7'd80;
    // Pb: progress always ahead -> Pb climbs to 100 -> group 4 becomes group 6.
    total_req = 1; total_cyc = 100000;
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    m_req = 0; m_cyc = 0; m_urg = 1; m_seen = 0; m_g6 = 0;
    run(1, 100);
    for (int k = 0; k < 120; k++) begin
      @(negedge clk); switch_tick = 1; cpl = 0;
      @(negedge clk); switch_tick = 0;
    end
    checks++; if (pb != 100) begin failures++; $display("FAIL pb=%0d", pb); end
    check_pb_swapped = 1;
    run(200, 0);
    check_pb_swapped = 0;
    // SDP mode.
    is_sdp = 1; total_req = 10; total_cyc = 50; prio_cyc = 30;
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    m_req = 0; m_cyc = 0; m_urg = 1; m_seen = 0; m_g6 = 0;
    run(1000, 20);
    checks++; if (n_g4 == 0 || n_g6 == 0 || n_urg == 0 || n_sdp_urg == 0 || n_met == 0 || n_met == n_periods) begin
      failures++;
      $display("FAIL coverage g4=%0d g6=%0d urg=%0d sdp=%0d met=%0d/%0d", n_g4, n_g6, n_urg, n_sdp_urg, n_met, n_periods);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
