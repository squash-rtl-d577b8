// squash_meta_controller: the centralized SQUASH meta-controller.
//
// It turns per-requestor state into one priority key per requestor and
// broadcasts the keys to every channel's scheduler. Requestors 0..N_CPU-1 are
// CPU cores and N_CPU..N_CPU+N_HWA-1 are accelerators.
//   * A SchedulingUnit timer (1000 cycles in the paper) ticks the LDP-HWA
//     urgency evaluation; a SwitchingUnit timer (500 cycles) ticks Pb.
//   * One hwa_qos_tracker per accelerator counts its completed requests and
//     elapsed cycles and yields its key (groups 1, 2, 4 or 6).
//   * tcm_classifier splits the CPUs into the non-intensive group 3, keyed by
//     intensity rank, and the intensive group 5, keyed by a shuffled rank.
// Completions are reported to it straight from the channels, one per channel
// per cycle, rather than as counter values sent every SchedulingUnit as the
// paper describes for several controllers; at the SchedulingUnit boundary the
// counts are the same. The keys are registered: a change in state reaches the
// channels one cycle later.
module squash_meta_controller
  import squash_pkg::*;
#(
  parameter int unsigned N_CPU       = 8,
  parameter int unsigned N_HWA       = 4,
  parameter int unsigned N_CH        = 2,
  parameter int unsigned SCHED_UNIT  = 1000,
  parameter int unsigned SWITCH_UNIT = 500,
  parameter int unsigned QUANTUM     = 1000000,
  parameter int unsigned SHUFFLE     = 800,
  parameter int unsigned INSTR_W     = 2,
  localparam int unsigned N_SRC      = N_CPU + N_HWA
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  cnt_t               cfg_total_req    [N_HWA],
  input  cnt_t               cfg_total_cyc    [N_HWA],
  input  cnt_t               cfg_priority_cyc [N_HWA],
  input  logic               cfg_is_sdp       [N_HWA],
  input  logic [6:0]         cfg_et_pct,
  input  logic [6:0]         cfg_cf_pct,
  // activity
  input  logic               cpl_valid [N_CH],
  input  logic [SRC_W-1:0]   cpl_src   [N_CH],
  input  logic               cpu_req_sent  [N_CPU],
  input  logic [INSTR_W-1:0] cpu_instr_ret [N_CPU],
  // broadcast priority
  output prio_key_t          key [N_SRC],
  // status
  output logic               hwa_urgent       [N_HWA],
  output logic               hwa_period_end   [N_HWA],
  output logic               hwa_deadline_met [N_HWA],
  output logic [6:0]         hwa_pb           [N_HWA],
  output logic               hwa_pb_swap      [N_HWA],
  output logic               cpu_intensive    [N_CPU],
  output logic               sched_tick,
  output logic               switch_tick
);

  localparam int unsigned CPL_W = $clog2(N_CH + 1);

  cnt_t sched_cnt, switch_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sched_cnt  <= '0;
      switch_cnt <= '0;
    end else begin
      sched_cnt  <= (sched_cnt  == cnt_t'(SCHED_UNIT  - 1)) ? '0 : sched_cnt  + 1;
      switch_cnt <= (switch_cnt == cnt_t'(SWITCH_UNIT - 1)) ? '0 : switch_cnt + 1;
    end
  end
  assign sched_tick  = (sched_cnt  == cnt_t'(SCHED_UNIT  - 1));
  assign switch_tick = (switch_cnt == cnt_t'(SWITCH_UNIT - 1));

  // Completions per requestor this cycle.
  logic [CPL_W-1:0] src_cpl [N_SRC];
  always_comb begin
    for (int s = 0; s < N_SRC; s++) begin
      src_cpl[s] = '0;
      for (int c = 0; c < N_CH; c++)
        if (cpl_valid[c] && (32'(cpl_src[c]) == s)) src_cpl[s] = src_cpl[s] + 1;
    end
  end

  prio_key_t hwa_key [N_HWA];
  cnt_t      unused_req [N_HWA];
  cnt_t      unused_cyc [N_HWA];

  for (genvar h = 0; h < N_HWA; h++) begin : g_hwa
    hwa_qos_tracker #(
      .CPL_W   (CPL_W),
      .PB_SEED (16'hACE1 ^ 16'(h * 16'h1F35))
    ) u_trk (
      .clk              (clk),
      .rst_n            (rst_n),
      .cfg_total_req    (cfg_total_req[h]),
      .cfg_total_cyc    (cfg_total_cyc[h]),
      .cfg_priority_cyc (cfg_priority_cyc[h]),
      .cfg_is_sdp       (cfg_is_sdp[h]),
      .cfg_et_pct       (cfg_et_pct),
      .sched_tick       (sched_tick),
      .switch_tick      (switch_tick),
      .cpl_cnt          (src_cpl[N_CPU + h]),
      .key              (hwa_key[h]),
      .urgent           (hwa_urgent[h]),
      .period_end       (hwa_period_end[h]),
      .deadline_met     (hwa_deadline_met[h]),
      .curr_req         (unused_req[h]),
      .curr_cyc         (unused_cyc[h]),
      .pb               (hwa_pb[h]),
      .pb_swap          (hwa_pb_swap[h])
    );
  end

  logic [CPL_W-1:0] cpu_cpl [N_CPU];
  logic [SRC_W-1:0] cpu_rank [N_CPU];
  logic [SRC_W-1:0] cpu_shuf [N_CPU];
  logic             class_done;
  always_comb for (int i = 0; i < N_CPU; i++) cpu_cpl[i] = src_cpl[i];

  tcm_classifier #(
    .N_CPU   (N_CPU),
    .QUANTUM (QUANTUM),
    .SHUFFLE (SHUFFLE),
    .INSTR_W (INSTR_W),
    .CPL_W   (CPL_W)
  ) u_tcm (
    .clk           (clk),
    .rst_n         (rst_n),
    .cfg_cf_pct    (cfg_cf_pct),
    .req_sent      (cpu_req_sent),
    .instr_ret     (cpu_instr_ret),
    .cpl_cnt       (cpu_cpl),
    .intensive     (cpu_intensive),
    .rank          (cpu_rank),
    .shuffle_rank  (cpu_shuf),
    .classify_done (class_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CPU; i++) key[i] <= '{grp: GRP_CPU_NONINT, sub: cnt_t'(i)};
      for (int h = 0; h < N_HWA; h++) key[N_CPU + h] <= KEY_LOWEST;
    end else begin
      for (int i = 0; i < N_CPU; i++)
        key[i] <= cpu_intensive[i] ? '{grp: GRP_CPU_INT,    sub: cnt_t'(cpu_shuf[i])}
                                   : '{grp: GRP_CPU_NONINT, sub: cnt_t'(cpu_rank[i])};
      for (int h = 0; h < N_HWA; h++) key[N_CPU + h] <= hwa_key[h];
    end
  end

endmodule
