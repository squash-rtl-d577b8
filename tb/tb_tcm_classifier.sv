// Testbench for tcm_classifier. Eight cores send requests at different random
// rates; the testbench counts misses, instructions and bandwidth per quantum
// itself, computes MPKI, the intensity order and the ClusterFactor split, and
// compares them with the classifier's output after each quantum. It also
// checks that the shuffle ranks form a permutation that rotates by one place
// every shuffle interval.
module tb_tcm_classifier;
  import squash_pkg::*;
  localparam int N = 8, Q = 3000, SH = 100;
  logic clk = 0, rst_n = 0;
  logic [6:0] cf = 7'd20;
  logic sent [N];
  logic [1:0] ins [N];
  logic [1:0] cpl [N];
  logic intensive [N];
  logic [SRC_W-1:0] rank [N], shuf [N];
  logic cdone;
  int checks = 0, failures = 0;
  longint miss [N], icnt [N], bw [N], mpki [N];
  longint mq [N], iq [N], bq [N];
  int rate [N];
  int cyc = 0, n_int = 0, n_non = 0, quanta = 0;

  tcm_classifier #(.N_CPU(N), .QUANTUM(Q), .SHUFFLE(SH)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_cf_pct(cf), .req_sent(sent), .instr_ret(ins), .cpl_cnt(cpl),
    .intensive(intensive), .rank(rank), .shuffle_rank(shuf), .classify_done(cdone));

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      miss[i] += sent[i]; icnt[i] += ins[i]; bw[i] += cpl[i];
    end
    cyc++;
    if (cyc % Q == 0) begin
      for (int i = 0; i < N; i++) begin
        mq[i] = miss[i]; iq[i] = icnt[i]; bq[i] = bw[i];
        miss[i] = 0; icnt[i] = 0; bw[i] = 0;
      end
    end
  end

  task automatic check_class();
    longint tot, cum;
    int r;
    bit exp_int;
    tot = 0;
    for (int i = 0; i < N; i++) begin
      mpki[i] = (iq[i] == 0) ? 0 : (mq[i] * 1000) / iq[i];
      tot += bq[i];
    end
    for (int i = 0; i < N; i++) begin
      r = 0; cum = bq[i];
      for (int j = 0; j < N; j++)
        if (mpki[j] < mpki[i] || (mpki[j] == mpki[i] && j < i)) begin r++; cum += bq[j]; end
      exp_int = (cum * 100 > tot * cf);
      checks += 2;
      if (int'(rank[i]) != r) begin failures++; $display("FAIL rank core %0d = %0d exp %0d", i, rank[i], r); end
      if (intensive[i] != exp_int) begin failures++; $display("FAIL cluster core %0d", i); end
      if (intensive[i]) n_int++; else n_non++;
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      sent[i] = 0; ins[i] = 0; cpl[i] = 0; miss[i] = 0; icnt[i] = 0; bw[i] = 0;
      rate[i] = (i * 37 + 5) % 60;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    // prev_s the first quantum: all non-intensive, rank = index
    checks++;
    for (int i = 0; i < N; i++) if (intensive[i] || rank[i] != SRC_W'(i)) begin failures++; break; end
    fork
      forever begin
        @(negedge clk);
        for (int i = 0; i < N; i++) begin
          sent[i] = ($urandom_range(0, 99) < rate[i]);
          ins[i]  = 2'($urandom_range(1, 3));
          cpl[i]  = 2'(sent[i]);
        end
      end
      forever begin
        @(posedge clk);
        if (cdone) begin
          #1; check_class(); quanta++;
          if (quanta == 2) cf = 7'd50;
          if (quanta == 4) for (int i = 0; i < N; i++) rate[i] = 60 - rate[i];
        end
      end
      begin
        // shuffle: permutation, rotating by one per interval
        logic [SRC_W-1:0] prev_s [N];
        bit seen [N];
        repeat (7 * Q) @(negedge clk);
        repeat (SH * 3 + 17) begin
          @(negedge clk);
        end
        for (int k = 0; k < 5; k++) begin
          for (int i = 0; i < N; i++) prev_s[i] = shuf[i];
          repeat (SH) @(negedge clk);
          for (int i = 0; i < N; i++) seen[i] = 0;
          for (int i = 0; i < N; i++) begin
            seen[shuf[i]] = 1;
            checks++;
            if (int'(shuf[i]) != (int'(prev_s[i]) + 1) % N) begin failures++; $display("FAIL shuffle"); end
          end
          for (int i = 0; i < N; i++) begin checks++; if (!seen[i]) failures++; end
        end
      end
    join_any
    disable fork;
    checks++;
    if (quanta < 6 || n_int == 0 || n_non == 0) begin
      failures++; $display("FAIL coverage quanta=%0d int=%0d non=%0d", quanta, n_int, n_non);
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
