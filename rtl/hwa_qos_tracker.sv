// hwa_qos_tracker: progress and urgency state of one hardware accelerator (HWA).
//
// It holds the counters the paper lists for each accelerator: Curr-Req
// (requests completed in the current deadline period), Curr-Cyc (cycles
// elapsed in it), and uses the software-set Total-Req, Total-Cyc and
// Priority-Cyc. Curr-Cyc counts every cycle and wraps at Total-Cyc, which
// starts a new deadline period; both counters restart at zero there and the
// accelerator starts the period urgent, as the paper's Dist-Prio does.
//
// Long-deadline-period mode (cfg_is_sdp = 0):
//   CurrentProgress  = Curr-Req / Total-Req, ExpectedProgress = Curr-Cyc / Total-Cyc.
//   On each SchedulingUnit tick the accelerator becomes urgent when
//   CurrentProgress <= ExpectedProgress or ExpectedProgress > EmergentThreshold,
//   and non-urgent otherwise. Fractions are compared by cross multiplication
//   (Curr-Req*Total-Cyc against Curr-Cyc*Total-Req), a choice of this design;
//   the threshold is a percentage (80 in the paper's evaluation).
//   A non-urgent LDP-HWA sits in group 6 after its first urgent->non-urgent
//   transition of a period and in group 4 after any later one. In group 4 it
//   drops to group 6 while pb_controller's coin says memory-intensive CPUs
//   win (Algorithm 1 of the paper).
// Short-deadline-period mode (cfg_is_sdp = 1):
//   The accelerator is urgent (group 1) from Curr-Cyc >= Priority-Cyc to the
//   end of the period, and in group 6 otherwise.
//
// The key's tie-break is Total-Cyc for group 1 (shorter period first) and the
// cycles left in the period (earlier deadline first) for the other HWA groups.
// A tracker with Total-Cyc = 0 is disabled and reports the lowest key.
// Timing: every output is a register or a function of registers; `cpl_cnt`
// completions are counted in the cycle they are presented.
module hwa_qos_tracker
  import squash_pkg::*;
#(
  parameter int unsigned CPL_W   = 2,        // width of the per-cycle completion count
  parameter logic [15:0] PB_SEED = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cnt_t             cfg_total_req,
  input  cnt_t             cfg_total_cyc,
  input  cnt_t             cfg_priority_cyc,
  input  logic             cfg_is_sdp,
  input  logic [6:0]       cfg_et_pct,      // EmergentThreshold in percent
  input  logic             sched_tick,      // end of a SchedulingUnit
  input  logic             switch_tick,     // end of a SwitchingUnit
  input  logic [CPL_W-1:0] cpl_cnt,         // requests of this HWA completed this cycle
  output prio_key_t        key,
  output logic             urgent,
  output logic             period_end,      // last cycle of a deadline period
  output logic             deadline_met,    // with period_end: all Total-Req requests done
  output cnt_t             curr_req,
  output cnt_t             curr_cyc,
  output logic [6:0]       pb,
  output logic             pb_swap          // Pb coin currently ranks intensive CPUs above this HWA
);

  logic        ldp_urgent;
  logic        seen_nonurgent;   // an urgent->non-urgent transition happened this period
  logic        in_group6;        // the current non-urgent spell is the period's first
  logic        enabled;
  logic [63:0] cur_scaled, exp_scaled, cyc_pct, thr_scaled;
  logic        prog_le, prog_lt, prog_gt, emergent, ldp_urgent_next;
  logic        sdp_urgent, swap;

  assign pb_swap = swap && enabled && !cfg_is_sdp;
  cnt_t        remaining;
  cnt_t        curr_req_next;

  assign enabled    = (cfg_total_cyc != '0);
  assign period_end = enabled && (curr_cyc == cfg_total_cyc - 1);
  assign remaining  = cfg_total_cyc - curr_cyc;

  always_comb begin
    cur_scaled      = 64'(curr_req) * 64'(cfg_total_cyc);
    exp_scaled      = 64'(curr_cyc) * 64'(cfg_total_req);
    prog_le         = (cur_scaled <= exp_scaled);
    prog_lt         = (cur_scaled <  exp_scaled);
    prog_gt         = !prog_le;
    cyc_pct         = 64'(curr_cyc) * 64'd100;
    thr_scaled      = 64'(cfg_et_pct) * 64'(cfg_total_cyc);
    emergent        = (cyc_pct > thr_scaled);
    ldp_urgent_next = prog_le || emergent;
    curr_req_next   = curr_req + cnt_t'(cpl_cnt);
    sdp_urgent      = enabled && (curr_cyc >= cfg_priority_cyc);
  end

  assign deadline_met = (curr_req_next >= cfg_total_req);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      curr_req       <= '0;
      curr_cyc       <= '0;
      ldp_urgent     <= 1'b1;
      seen_nonurgent <= 1'b0;
      in_group6      <= 1'b0;
    end else if (!enabled) begin
      curr_req       <= '0;
      curr_cyc       <= '0;
      ldp_urgent     <= 1'b1;
      seen_nonurgent <= 1'b0;
      in_group6      <= 1'b0;
    end else if (period_end) begin
      curr_req       <= '0;
      curr_cyc       <= '0;
      ldp_urgent     <= 1'b1;
      seen_nonurgent <= 1'b0;
      in_group6      <= 1'b0;
    end else begin
      curr_req <= curr_req_next;
      curr_cyc <= curr_cyc + 1;
      if (sched_tick) begin
        ldp_urgent <= ldp_urgent_next;
        if (ldp_urgent && !ldp_urgent_next) begin
          in_group6      <= !seen_nonurgent;
          seen_nonurgent <= 1'b1;
        end
      end
    end
  end

  pb_controller #(.SEED(PB_SEED)) u_pb (
    .clk     (clk),
    .rst_n   (rst_n),
    .tick    (switch_tick && enabled && !cfg_is_sdp),
    .prog_gt (prog_gt),
    .prog_lt (prog_lt),
    .pb      (pb),
    .swap    (swap)
  );

  always_comb begin
    if (!enabled) begin
      key    = KEY_LOWEST;
      urgent = 1'b0;
    end else if (cfg_is_sdp) begin
      urgent = sdp_urgent;
      key    = sdp_urgent ? '{grp: GRP_SDP_URGENT, sub: cfg_total_cyc}
                          : '{grp: GRP_HWA_LOW,    sub: remaining};
    end else begin
      urgent = ldp_urgent;
      if (ldp_urgent)             key = '{grp: GRP_LDP_URGENT,    sub: remaining};
      else if (in_group6 || swap) key = '{grp: GRP_HWA_LOW,       sub: remaining};
      else                        key = '{grp: GRP_LDP_NONURGENT, sub: remaining};
    end
  end

endmodule
