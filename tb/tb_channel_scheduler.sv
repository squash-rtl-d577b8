// Testbench for channel_scheduler (8 + 8 buffer entries to reach back-pressure
// quickly). Random requests from 12 requestors with changing priority keys.
// An independent model rebuilds the bank state from the issued commands and
// checks at every issue that
//   * no waiting request to a ready bank ranks higher (key, then row hit, then age),
//   * the command times obey tRCD, tRP, tRAS, tRC, tRTP, tCL and burst spacing,
//   * the row-hit/closed/conflict kind is right,
// and that every request completes exactly at its done time, with its tag,
// and that the CPU half of the buffer fills without blocking accelerators.
// The first request's latency is checked against tRCD + tCL + burst.
module tb_channel_scheduler;
  import squash_pkg::*;
  localparam int NS = 12, CE = 8, HE = 8, NB = 8;
  logic clk = 0, rst_n = 0;
  logic cpu_v = 0, hwa_v = 0, cpu_rdy, hwa_rdy;
  chan_req_t cpu_r, hwa_r;
  prio_key_t key [NS];
  logic cmd_valid, cpl_valid;
  dram_cmd_t cmd;
  logic [SRC_W-1:0] cmd_src;
  cpl_t cpl;
  int checks = 0, failures = 0;

  channel_scheduler #(.N_SRC(NS), .CPU_ENTRIES(CE), .HWA_ENTRIES(HE), .N_BANK(NB)) dut (
    .clk(clk), .rst_n(rst_n), .cpu_enq_valid(cpu_v), .cpu_enq_req(cpu_r), .cpu_enq_ready(cpu_rdy),
    .hwa_enq_valid(hwa_v), .hwa_enq_req(hwa_r), .hwa_enq_ready(hwa_rdy), .key(key),
    .cmd_valid(cmd_valid), .cmd(cmd), .cmd_src(cmd_src), .cpl_valid(cpl_valid), .cpl(cpl));

  always #5 clk = ~clk;

  typedef struct { chan_req_t r; longint seq; } ent_t;
  ent_t buffer[$];
  typedef struct { cpl_t c; longint done; } fl_t;
  fl_t flight[$];
  longint tnow = 0;
  bit     m_open [NB];
  int     m_row  [NB];
  longint m_ready[NB], m_act[NB], m_col[NB], m_bus = 0;
  int n_issued = 0, n_cpl = 0, n_hit = 0, n_closed = 0, n_conf = 0, n_cpu_full = 0, n_enq = 0;
  int first_lat = -1;
  int tag_ctr = 0;

  function automatic bit better(ent_t a, ent_t b);
    logic [$bits(prio_key_t)-1:0] ka, kb;
    bit ha, hb;
    ka = key[a.r.src]; kb = key[b.r.src];
    ha = m_open[a.r.bank] && m_row[a.r.bank] == int'(a.r.row);
    hb = m_open[b.r.bank] && m_row[b.r.bank] == int'(b.r.row);
    if (ka != kb) return ka < kb;
    if (ha != hb) return ha;
    return a.seq < b.seq;
  endfunction

  always @(posedge clk) if (rst_n) begin
    // completions
    if (cpl_valid) begin
      checks++;
      if (flight.size() == 0 || flight[0].done != tnow || flight[0].c != cpl) begin
        failures++;
        if (failures < 10) $display("FAIL completion at %0d", tnow);
      end
      if (flight.size() != 0) void'(flight.pop_front());
      n_cpl++;
    end else if (flight.size() != 0 && flight[0].done == tnow) begin
      failures++; checks++; $display("FAIL missing completion at %0d", tnow);
    end
    // issue
    if (cmd_valid) begin
      int idx, b;
      bit hit;
      idx = -1;
      for (int i = 0; i < buffer.size(); i++)
        if (buffer[i].r.src == cmd_src && buffer[i].r.bank == cmd.bank && buffer[i].r.row == cmd.row &&
            buffer[i].r.col == cmd.col && (idx < 0 || buffer[i].seq < buffer[idx].seq)) idx = i;
      checks++;
      if (idx < 0) begin failures++; $display("FAIL issued unknown request"); end
      else begin
        b = cmd.bank;
        for (int i = 0; i < buffer.size(); i++)
          if (i != idx && tnow >= m_ready[buffer[i].r.bank] && better(buffer[i], buffer[idx])) begin
            failures++;
            if (failures < 10) $display("FAIL order at %0d: src %0d issued before src %0d", tnow, cmd_src, buffer[i].r.src);
            break;
          end
        hit = m_open[b] && m_row[b] == int'(cmd.row);
        checks += 4;
        if (tnow < m_ready[b]) failures++;
        if (cmd.kind != (hit ? ROW_HIT : (m_open[b] ? ROW_CONFLICT : ROW_CLOSED))) begin failures++; $display("FAIL kind"); end
        if (hit) begin
          n_hit++;
          if (longint'(cmd.col_time) != tnow) failures++;
        end else begin
          if (m_open[b]) n_conf++; else n_closed++;
          if (longint'(cmd.act_time) < m_act[b] + T_RC || longint'(cmd.act_time) < tnow) failures++;
          if (m_open[b] && (longint'(cmd.act_time) < m_act[b] + T_RAS + T_RP ||
                            longint'(cmd.act_time) < m_col[b] + T_RTP + T_RP)) failures++;
          if (longint'(cmd.col_time) != longint'(cmd.act_time) + T_RCD) failures++;
        end
        checks += 2;
        if (longint'(cmd.done_time) - T_BL < m_bus) failures++;
        if (longint'(cmd.done_time) - T_BL < longint'(cmd.col_time) + T_CL) failures++;
        if (first_lat < 0) first_lat = int'(longint'(cmd.done_time) - tnow);
        m_open[b] = 1; m_row[b] = cmd.row; m_act[b] = cmd.act_time; m_col[b] = cmd.col_time;
        m_ready[b] = longint'(cmd.col_time) + T_BL; m_bus = cmd.done_time;
        flight.push_back('{c: '{src: buffer[idx].r.src, tag: buffer[idx].r.tag}, done: cmd.done_time});
        buffer.delete(idx);
        n_issued++;
      end
    end
    // enqueue
    if (cpu_v && cpu_rdy) begin buffer.push_back('{r: cpu_r, seq: tnow}); n_enq++; end
    if (hwa_v && hwa_rdy) begin buffer.push_back('{r: hwa_r, seq: tnow}); n_enq++; end
    if (!cpu_rdy && hwa_rdy) n_cpu_full++;
    tnow++;
  end

  function automatic chan_req_t rand_req(bit hwa_side);
    chan_req_t r;
    r.src  = SRC_W'(hwa_side ? $urandom_range(8, 11) : $urandom_range(0, 7));
    r.we   = $urandom_range(0, 3) == 0;
    r.bank = BANK_W'($urandom_range(0, NB - 1));
    r.row  = ROW_W'($urandom_range(0, 3));
    r.col  = COL_W'($urandom_range(0, 127));
    r.tag  = TAG_W'(tag_ctr++);
    return r;
  endfunction

  initial begin
    for (int s = 0; s < NS; s++) key[s] = '{grp: group_e'(s % 6), sub: cnt_t'(s)};
    for (int b = 0; b < NB; b++) begin m_open[b] = 0; m_row[b] = 0; m_ready[b] = 0; m_act[b] = -T_RC; m_col[b] = -T_RTP; end
    repeat (2) @(negedge clk); rst_n = 1;
    // one lone request: closed row
    @(negedge clk); cpu_v = 1; cpu_r = rand_req(0);
    @(negedge clk); cpu_v = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (first_lat != T_RCD + T_CL + T_BL) begin failures++; $display("FAIL first latency %0d", first_lat); end
    // heavy random traffic with changing keys
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      cpu_v = ($urandom_range(0, 99) < 40); cpu_r = rand_req(0);
      hwa_v = ($urandom_range(0, 99) < ((k / 2000) % 2 == 0 ? 10 : 30)); hwa_r = rand_req(1);
      if (k % 500 == 0)
        for (int s = 0; s < NS; s++) key[s] = '{grp: group_e'($urandom_range(0, 5)), sub: cnt_t'($urandom_range(0, 3))};
    end
    @(negedge clk); cpu_v = 0; hwa_v = 0;
    repeat (3000) @(negedge clk);
    checks++;
    if (buffer.size() != 0 || flight.size() != 0 || n_cpl != n_enq) begin
      failures++; $display("FAIL leftover buffer=%0d flight=%0d cpl=%0d enq=%0d", buffer.size(), flight.size(), n_cpl, n_enq);
    end
    checks++;
    if (n_hit == 0 || n_closed == 0 || n_conf == 0 || n_cpu_full == 0) begin
      failures++; $display("FAIL coverage hit=%0d closed=%0d conf=%0d cpufull=%0d", n_hit, n_closed, n_conf, n_cpu_full);
    end
    $display("issued=%0d hit=%0d closed=%0d conflict=%0d", n_issued, n_hit, n_closed, n_conf);
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
