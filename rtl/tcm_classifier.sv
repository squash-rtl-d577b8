// tcm_classifier: splits CPU applications into a memory-non-intensive and a
// memory-intensive cluster, the classification SQUASH borrows from the
// thread-cluster memory scheduler (TCM).
//
// Per core it counts, over a quantum (QUANTUM cycles, 1M in the paper's
// evaluation), the memory requests the core sent (its last-level-cache
// misses), its retired instructions and its completed requests (bandwidth
// used). At the end of a quantum it computes each core's intensity,
// MPKI = misses * 1000 / instructions (one sequential division per core),
// orders the cores from lowest to highest MPKI and puts cores into the
// non-intensive cluster in that order while their summed bandwidth stays
// within ClusterFactor (percent of the total bandwidth, 20 in the paper).
//
// Outputs per core: `intensive`, `rank` (position in the MPKI order, used as
// the tie-break inside the non-intensive group: lower intensity first) and
// `shuffle_rank` (tie-break inside the intensive group). The paper says the
// intensive cluster is "shuffled as in TCM" every 800 cycles; this design uses
// a rotation of the MPKI order by one place per shuffle interval instead of
// TCM's insertion shuffle. Before the first quantum ends every core counts as
// non-intensive with rank = core index. Equal MPKI is broken by core index.
module tcm_classifier
  import squash_pkg::*;
#(
  parameter int unsigned N_CPU     = 8,
  parameter int unsigned QUANTUM   = 1000000,
  parameter int unsigned SHUFFLE   = 800,
  parameter int unsigned INSTR_W   = 2,   // instructions retired per cycle (3-wide cores)
  parameter int unsigned CPL_W     = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [6:0]         cfg_cf_pct,               // ClusterFactor in percent
  input  logic               req_sent   [N_CPU],       // a request of the core entered the controller
  input  logic [INSTR_W-1:0] instr_ret  [N_CPU],
  input  logic [CPL_W-1:0]   cpl_cnt    [N_CPU],
  output logic               intensive  [N_CPU],
  output logic [SRC_W-1:0]   rank       [N_CPU],
  output logic [SRC_W-1:0]   shuffle_rank [N_CPU],
  output logic               classify_done             // pulse: new classification
);

  localparam int unsigned DW = 48;
  localparam int unsigned CI = (N_CPU > 1) ? $clog2(N_CPU) : 1;

  cnt_t         miss_cnt [N_CPU];
  cnt_t         ins_cnt  [N_CPU];
  cnt_t         bw_cnt   [N_CPU];
  cnt_t         miss_q   [N_CPU];
  cnt_t         ins_q    [N_CPU];
  cnt_t         bw_q     [N_CPU];
  logic [DW-1:0] mpki    [N_CPU];
  cnt_t         qcnt, scnt;
  logic [SRC_W-1:0] shuf_off;

  typedef enum logic [1:0] {C_IDLE, C_DIV, C_WAIT, C_CLASS} cstate_e;
  cstate_e      cstate;
  logic [CI:0]  core;
  logic         quantum_end;
  logic         div_start, div_busy, div_done;
  logic [DW-1:0] div_q;

  assign quantum_end = (qcnt == cnt_t'(QUANTUM - 1));

  seq_divider #(.W(DW)) u_div (
    .clk(clk), .rst_n(rst_n), .start(div_start),
    .dividend(DW'(miss_q[core[CI-1:0]]) * DW'(1000)),
    .divisor(DW'(ins_q[core[CI-1:0]])),
    .busy(div_busy), .done(div_done), .quotient(div_q)
  );

  // Rank by MPKI and cluster by cumulative bandwidth.
  logic [SRC_W-1:0] rank_c [N_CPU];
  logic             int_c  [N_CPU];
  logic [CW+7:0]    cum, total;
  always_comb begin
    total = '0;
    for (int j = 0; j < N_CPU; j++) total += (CW+8)'(bw_q[j]);
    for (int i = 0; i < N_CPU; i++) begin
      rank_c[i] = '0;
      cum       = '0;
      for (int j = 0; j < N_CPU; j++) begin
        if ((mpki[j] < mpki[i]) || ((mpki[j] == mpki[i]) && (j < i))) begin
          rank_c[i] = rank_c[i] + 1;
          cum       = cum + (CW+8)'(bw_q[j]);
        end
      end
      cum      = cum + (CW+8)'(bw_q[i]);
      int_c[i] = ((CW+8+7)'(cum) * 100) > ((CW+8+7)'(total) * (CW+8+7)'(cfg_cf_pct));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qcnt          <= '0;
      scnt          <= '0;
      shuf_off      <= '0;
      cstate        <= C_IDLE;
      core          <= '0;
      div_start     <= 1'b0;
      classify_done <= 1'b0;
      for (int i = 0; i < N_CPU; i++) begin
        miss_cnt[i]  <= '0;
        ins_cnt[i]   <= '0;
        bw_cnt[i]    <= '0;
        miss_q[i]    <= '0;
        ins_q[i]     <= '0;
        bw_q[i]      <= '0;
        mpki[i]      <= '0;
        intensive[i] <= 1'b0;
        rank[i]      <= SRC_W'(i);
      end
    end else begin
      div_start     <= 1'b0;
      classify_done <= 1'b0;
      qcnt <= quantum_end ? '0 : qcnt + 1;
      if (scnt == cnt_t'(SHUFFLE - 1)) begin
        scnt     <= '0;
        shuf_off <= shuf_off + 1;
      end else begin
        scnt <= scnt + 1;
      end
      for (int i = 0; i < N_CPU; i++) begin
        if (quantum_end) begin
          miss_q[i]   <= miss_cnt[i] + cnt_t'(req_sent[i]);
          ins_q[i]    <= ins_cnt[i]  + cnt_t'(instr_ret[i]);
          bw_q[i]     <= bw_cnt[i]   + cnt_t'(cpl_cnt[i]);
          miss_cnt[i] <= '0;
          ins_cnt[i]  <= '0;
          bw_cnt[i]   <= '0;
        end else begin
          miss_cnt[i] <= miss_cnt[i] + cnt_t'(req_sent[i]);
          ins_cnt[i]  <= ins_cnt[i]  + cnt_t'(instr_ret[i]);
          bw_cnt[i]   <= bw_cnt[i]   + cnt_t'(cpl_cnt[i]);
        end
      end
      unique case (cstate)
        C_IDLE: if (quantum_end) begin
          core   <= '0;
          cstate <= C_DIV;
        end
        C_DIV: begin
          div_start <= 1'b1;
          cstate    <= C_WAIT;
        end
        C_WAIT: if (div_done) begin
          // A core that retired nothing counts as intensity 0.
          mpki[core[CI-1:0]] <= (ins_q[core[CI-1:0]] == '0) ? '0 : div_q;
          if (32'(core) == N_CPU - 1) cstate <= C_CLASS;
          else begin
            core   <= core + 1;
            cstate <= C_DIV;
          end
        end
        C_CLASS: begin
          for (int i = 0; i < N_CPU; i++) begin
            rank[i]      <= rank_c[i];
            intensive[i] <= int_c[i];
          end
          classify_done <= 1'b1;
          cstate        <= C_IDLE;
        end
        default: cstate <= C_IDLE;
      endcase
    end
  end

  always_comb begin
    for (int i = 0; i < N_CPU; i++)
      shuffle_rank[i] = SRC_W'((32'(rank[i]) + 32'(shuf_off)) % N_CPU);
  end

endmodule
