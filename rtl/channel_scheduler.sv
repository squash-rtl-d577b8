// channel_scheduler: the memory controller of one DRAM channel.
//
// Request buffer. CPU_ENTRIES + HWA_ENTRIES entries; the first part only
// takes CPU requests and the second only accelerator requests, so neither
// kind can fill the buffer (the paper gives half of its 300 entries to each,
// over two channels: 75 + 75 per channel). An enqueue port is ready while its
// part has a free entry; the new request is stored in the lowest free entry.
//
// Scheduling. Every cycle the controller may issue one buffered request whose
// bank can take a new command. It picks, in this order, the request whose
// requestor has the smallest priority key (the keys the meta-controller
// broadcasts), then a row-buffer hit over a miss, then the oldest request.
// The order "priority, then row hit, then age" is how application-aware
// schedulers in the paper's line of work apply a ranking; the paper only says
// the controllers schedule by the broadcast priority.
//
// DRAM timing. The controller does not drive a DDR3 bus; it keeps each bank's
// open row and command times and computes, when it issues a request, when its
// ACTIVATE (after tRP of a precharge for a row conflict), READ/WRITE and data
// burst happen under tRCD, tRP, tCL, tRAS, tRC, tRTP and the burst length
// (open-page policy, writes timed like reads, no refresh). The issued
// request and its command times appear on `cmd`. The data bus carries one
// burst at a time, so bursts and completions are in issue order; a request
// completes (`cpl_valid`, one per cycle) at the end of its burst, through a
// CPL_DEPTH-deep queue. A bank takes its next request one burst after the
// previous column command.
module channel_scheduler
  import squash_pkg::*;
#(
  parameter int unsigned N_SRC       = 12,
  parameter int unsigned CPU_ENTRIES = 75,
  parameter int unsigned HWA_ENTRIES = 75,
  parameter int unsigned N_BANK      = 8,
  parameter int unsigned CPL_DEPTH   = 16,
  parameter int unsigned TRCD        = T_RCD,
  parameter int unsigned TRP         = T_RP,
  parameter int unsigned TCL         = T_CL,
  parameter int unsigned TBL         = T_BL,
  parameter int unsigned TRAS        = T_RAS,
  parameter int unsigned TRC         = T_RC,
  parameter int unsigned TRTP        = T_RTP,
  localparam int unsigned E          = CPU_ENTRIES + HWA_ENTRIES
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cpu_enq_valid,
  input  chan_req_t cpu_enq_req,
  output logic      cpu_enq_ready,
  input  logic      hwa_enq_valid,
  input  chan_req_t hwa_enq_req,
  output logic      hwa_enq_ready,
  input  prio_key_t key [N_SRC],
  output logic      cmd_valid,
  output dram_cmd_t cmd,
  output logic [SRC_W-1:0] cmd_src,
  output logic      cpl_valid,
  output cpl_t      cpl
);

  localparam int unsigned EW = $clog2(E);
  localparam int unsigned QW = $clog2(CPL_DEPTH);
  localparam int unsigned KW = $bits(prio_key_t);

  typedef struct packed {
    cnt_t done;
    cpl_t c;
  } cq_t;

  cnt_t      now;
  logic      ent_v   [E];
  chan_req_t ent     [E];
  cnt_t      ent_seq [E];

  logic              b_open  [N_BANK];
  logic [ROW_W-1:0]  b_row   [N_BANK];
  cnt_t              b_ready [N_BANK];
  cnt_t              b_act   [N_BANK];
  cnt_t              b_col   [N_BANK];
  cnt_t              bus_next;

  cq_t               cq [CPL_DEPTH];
  logic [QW-1:0]     cq_head, cq_tail;
  logic [QW:0]       cq_count;
  logic              cq_full, cq_push, cq_pop;

  // Free entries.
  logic          cpu_free_v, hwa_free_v;
  logic [EW-1:0] cpu_free, hwa_free;
  always_comb begin
    cpu_free_v = 1'b0;
    cpu_free   = '0;
    hwa_free_v = 1'b0;
    hwa_free   = '0;
    for (int e = CPU_ENTRIES - 1; e >= 0; e--)
      if (!ent_v[e]) begin
        cpu_free_v = 1'b1;
        cpu_free   = EW'(e);
      end
    for (int e = E - 1; e >= CPU_ENTRIES; e--)
      if (!ent_v[e]) begin
        hwa_free_v = 1'b1;
        hwa_free   = EW'(e);
      end
  end
  assign cpu_enq_ready = cpu_free_v;
  assign hwa_enq_ready = hwa_free_v;

  // Pick the request to issue.
  logic          sel_v;
  logic [EW-1:0] sel;
  always_comb begin
    logic [KW-1:0] best_key, k;
    logic          best_hit, hit, better;
    cnt_t          best_seq;
    int unsigned   b;
    sel_v    = 1'b0;
    sel      = '0;
    best_key = '1;
    best_hit = 1'b0;
    best_seq = '0;
    for (int e = 0; e < E; e++) begin
      b   = 32'(ent[e].bank);
      k   = key[ent[e].src];
      hit = b_open[b] && (b_row[b] == ent[e].row);
      better = !sel_v || (k < best_key)
            || ((k == best_key) && hit && !best_hit)
            || ((k == best_key) && (hit == best_hit) && !time_reached(ent_seq[e], best_seq));
      if (ent_v[e] && time_reached(now, b_ready[b]) && !cq_full && better) begin
        sel_v    = 1'b1;
        sel      = EW'(e);
        best_key = k;
        best_hit = hit;
        best_seq = ent_seq[e];
      end
    end
  end

  // Command times of the chosen request.
  dram_cmd_t nc;
  always_comb begin
    chan_req_t r;
    int unsigned b;
    cnt_t pre_t, data_t;
    r        = ent[sel];
    b        = 32'(r.bank);
    nc.bank  = r.bank;
    nc.row   = r.row;
    nc.col   = r.col;
    nc.we    = r.we;
    pre_t    = now;
    if (b_open[b] && (b_row[b] == r.row)) begin
      nc.kind     = ROW_HIT;
      nc.act_time = b_act[b];
      nc.col_time = now;
    end else if (!b_open[b]) begin
      nc.kind     = ROW_CLOSED;
      nc.act_time = time_max(now, b_act[b] + cnt_t'(TRC));
      nc.col_time = nc.act_time + cnt_t'(TRCD);
    end else begin
      nc.kind     = ROW_CONFLICT;
      pre_t       = time_max(time_max(now, b_act[b] + cnt_t'(TRAS)), b_col[b] + cnt_t'(TRTP));
      nc.act_time = time_max(pre_t + cnt_t'(TRP), b_act[b] + cnt_t'(TRC));
      nc.col_time = nc.act_time + cnt_t'(TRCD);
    end
    data_t       = time_max(nc.col_time + cnt_t'(TCL), bus_next);
    nc.done_time = data_t + cnt_t'(TBL);
  end

  assign cq_full  = (cq_count == (QW+1)'(CPL_DEPTH));
  assign cq_push  = sel_v;
  assign cq_pop   = (cq_count != '0) && time_reached(now, cq[cq_head].done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now      <= '0;
      bus_next <= '0;
      cq_head  <= '0;
      cq_tail  <= '0;
      cq_count <= '0;
      for (int e = 0; e < E; e++) begin
        ent_v[e]   <= 1'b0;
        ent[e]     <= '0;
        ent_seq[e] <= '0;
      end
      for (int b = 0; b < N_BANK; b++) begin
        b_open[b]  <= 1'b0;
        b_row[b]   <= '0;
        b_ready[b] <= '0;
        b_act[b]   <= '0 - cnt_t'(TRC);
        b_col[b]   <= '0 - cnt_t'(TRTP);
      end
      for (int q = 0; q < CPL_DEPTH; q++) cq[q] <= '0;
    end else begin
      now <= now + 1;
      if (cpu_enq_valid && cpu_free_v) begin
        ent_v[cpu_free]   <= 1'b1;
        ent[cpu_free]     <= cpu_enq_req;
        ent_seq[cpu_free] <= now;
      end
      if (hwa_enq_valid && hwa_free_v) begin
        ent_v[hwa_free]   <= 1'b1;
        ent[hwa_free]     <= hwa_enq_req;
        ent_seq[hwa_free] <= now;
      end
      if (sel_v) begin
        ent_v[sel]          <= 1'b0;
        b_open[nc.bank]     <= 1'b1;
        b_row[nc.bank]      <= nc.row;
        b_act[nc.bank]      <= nc.act_time;
        b_col[nc.bank]      <= nc.col_time;
        b_ready[nc.bank]    <= nc.col_time + cnt_t'(TBL);
        bus_next            <= nc.done_time;
        cq[cq_tail]         <= '{done: nc.done_time, c: '{src: ent[sel].src, tag: ent[sel].tag}};
        cq_tail             <= (32'(cq_tail) == CPL_DEPTH - 1) ? '0 : cq_tail + 1;
      end
      if (cq_pop) cq_head <= (32'(cq_head) == CPL_DEPTH - 1) ? '0 : cq_head + 1;
      cq_count <= cq_count + (QW+1)'(cq_push) - (QW+1)'(cq_pop);
    end
  end

  assign cmd_valid = sel_v;
  assign cmd       = nc;
  assign cmd_src   = ent[sel].src;
  assign cpl_valid = cq_pop;
  assign cpl       = cq[cq_head].c;

  // The data bus is never double-booked and the completion queue never overflows.
  assert property (@(posedge clk) disable iff (!rst_n)
                   sel_v |-> time_reached(nc.done_time - cnt_t'(TBL), bus_next));
  assert property (@(posedge clk) disable iff (!rst_n) cq_push |-> !cq_full);
  assert property (@(posedge clk) disable iff (!rst_n) cpu_enq_valid |-> (32'(cpu_enq_req.src) < N_SRC));

endmodule
