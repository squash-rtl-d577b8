// squash_top: SQUASH memory-controller subsystem for a CPU + accelerator SoC.
//
// Requestors (N_CPU cores, then N_HWA accelerators) send 64-byte requests over
// valid/ready ports. request_router sends each to its channel's
// channel_scheduler, which holds it in the CPU or accelerator half of its
// request buffer and issues it by the priority keys that
// squash_meta_controller broadcasts. Completions come back per channel (one
// per channel per cycle) and are also counted by the meta-controller as the
// accelerators' progress. Software programs the per-accelerator Total-Req,
// Total-Cyc, Priority-Cyc and SDP/LDP class through a register port
// (squash_cfg_regs) and can have upl_calculator compute Priority-Cyc for the
// short-deadline-period accelerators.
//
// Defaults follow the paper's main configuration: 8 cores, 4 accelerators,
// 2 channels of 8 banks, 300 request-buffer entries (half for CPUs, half for
// accelerators), SchedulingUnit 1000, SwitchingUnit 500, quantum 1M and
// shuffle interval 800 cycles. The DRAM devices and PHY are outside: each
// channel reports the request it issues with its command times on `cmd_*`.
// `cpu_instr_ret` is the per-cycle retired-instruction count of each core,
// used for the intensity classification.
module squash_top
  import squash_pkg::*;
#(
  parameter int unsigned N_CPU       = 8,
  parameter int unsigned N_HWA       = 4,
  parameter int unsigned N_CH        = 2,
  parameter int unsigned BUF_ENTRIES = 300,
  parameter int unsigned N_BANK      = 8,
  parameter int unsigned SCHED_UNIT  = 1000,
  parameter int unsigned SWITCH_UNIT = 500,
  parameter int unsigned QUANTUM     = 1000000,
  parameter int unsigned SHUFFLE     = 800,
  parameter int unsigned INSTR_W     = 2,
  localparam int unsigned N_SRC      = N_CPU + N_HWA
) (
  input  logic               clk,
  input  logic               rst_n,
  // software configuration port
  input  logic               cfg_we,
  input  logic [7:0]         cfg_addr,
  input  cnt_t               cfg_wdata,
  output cnt_t               cfg_rdata,
  output logic               upl_busy,
  // requestors
  input  logic               src_valid [N_SRC],
  input  mem_req_t           src_req   [N_SRC],
  output logic               src_ready [N_SRC],
  input  logic [INSTR_W-1:0] cpu_instr_ret [N_CPU],
  // completions, one port per channel
  output logic               cpl_valid [N_CH],
  output cpl_t               cpl       [N_CH],
  // requests issued to the DRAM, one port per channel
  output logic               cmd_valid [N_CH],
  output dram_cmd_t          cmd       [N_CH],
  output logic [SRC_W-1:0]   cmd_src   [N_CH],
  // status
  output prio_key_t          key              [N_SRC],
  output logic               hwa_urgent       [N_HWA],
  output logic               hwa_period_end   [N_HWA],
  output logic               hwa_deadline_met [N_HWA],
  output logic [6:0]         hwa_pb           [N_HWA],
  output logic               hwa_pb_swap      [N_HWA],
  output logic               cpu_intensive    [N_CPU],
  output logic               sched_tick,
  output logic               switch_tick
);

  localparam int unsigned PART = BUF_ENTRIES / (2 * N_CH);

  cnt_t       total_req [N_HWA];
  cnt_t       total_cyc [N_HWA];
  cnt_t       prio_cyc  [N_HWA];
  logic       is_sdp    [N_HWA];
  logic [6:0] et_pct, cf_pct;
  cnt_t       trc, alpha;
  logic       upl_start, upl_done;
  cnt_t       upl_prio  [N_HWA];

  squash_cfg_regs #(.N_HWA(N_HWA)) u_cfg (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
    .cfg_rdata(cfg_rdata), .upl_done(upl_done), .upl_priority_cyc(upl_prio),
    .total_req(total_req), .total_cyc(total_cyc), .priority_cyc(prio_cyc), .is_sdp(is_sdp),
    .et_pct(et_pct), .cf_pct(cf_pct), .trc(trc), .alpha(alpha), .upl_start(upl_start)
  );

  upl_calculator #(.N_HWA(N_HWA)) u_upl (
    .clk(clk), .rst_n(rst_n), .start(upl_start), .is_sdp(is_sdp), .period(total_cyc),
    .nreq(total_req), .trc(trc), .alpha(alpha), .busy(upl_busy), .done(upl_done),
    .priority_cyc(upl_prio)
  );

  logic      cpu_enq_valid [N_CH];
  chan_req_t cpu_enq_req   [N_CH];
  logic      cpu_enq_ready [N_CH];
  logic      hwa_enq_valid [N_CH];
  chan_req_t hwa_enq_req   [N_CH];
  logic      hwa_enq_ready [N_CH];

  request_router #(.N_CPU(N_CPU), .N_HWA(N_HWA), .N_CH(N_CH)) u_router (
    .clk(clk), .rst_n(rst_n), .src_valid(src_valid), .src_req(src_req), .src_ready(src_ready),
    .cpu_enq_valid(cpu_enq_valid), .cpu_enq_req(cpu_enq_req), .cpu_enq_ready(cpu_enq_ready),
    .hwa_enq_valid(hwa_enq_valid), .hwa_enq_req(hwa_enq_req), .hwa_enq_ready(hwa_enq_ready)
  );

  logic             ch_cpl_valid [N_CH];
  logic [SRC_W-1:0] ch_cpl_src   [N_CH];
  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    channel_scheduler #(
      .N_SRC(N_SRC), .CPU_ENTRIES(PART), .HWA_ENTRIES(PART), .N_BANK(N_BANK)
    ) u_sched (
      .clk(clk), .rst_n(rst_n),
      .cpu_enq_valid(cpu_enq_valid[c]), .cpu_enq_req(cpu_enq_req[c]), .cpu_enq_ready(cpu_enq_ready[c]),
      .hwa_enq_valid(hwa_enq_valid[c]), .hwa_enq_req(hwa_enq_req[c]), .hwa_enq_ready(hwa_enq_ready[c]),
      .key(key), .cmd_valid(cmd_valid[c]), .cmd(cmd[c]), .cmd_src(cmd_src[c]),
      .cpl_valid(cpl_valid[c]), .cpl(cpl[c])
    );
    assign ch_cpl_valid[c] = cpl_valid[c];
    assign ch_cpl_src[c]   = cpl[c].src;
  end

  logic cpu_req_sent [N_CPU];
  always_comb for (int i = 0; i < N_CPU; i++) cpu_req_sent[i] = src_valid[i] && src_ready[i];

  squash_meta_controller #(
    .N_CPU(N_CPU), .N_HWA(N_HWA), .N_CH(N_CH), .SCHED_UNIT(SCHED_UNIT),
    .SWITCH_UNIT(SWITCH_UNIT), .QUANTUM(QUANTUM), .SHUFFLE(SHUFFLE), .INSTR_W(INSTR_W)
  ) u_meta (
    .clk(clk), .rst_n(rst_n),
    .cfg_total_req(total_req), .cfg_total_cyc(total_cyc), .cfg_priority_cyc(prio_cyc),
    .cfg_is_sdp(is_sdp), .cfg_et_pct(et_pct), .cfg_cf_pct(cf_pct),
    .cpl_valid(ch_cpl_valid), .cpl_src(ch_cpl_src),
    .cpu_req_sent(cpu_req_sent), .cpu_instr_ret(cpu_instr_ret),
    .key(key), .hwa_urgent(hwa_urgent), .hwa_period_end(hwa_period_end),
    .hwa_deadline_met(hwa_deadline_met), .hwa_pb(hwa_pb), .hwa_pb_swap(hwa_pb_swap), .cpu_intensive(cpu_intensive),
    .sched_tick(sched_tick), .switch_tick(switch_tick)
  );

endmodule
