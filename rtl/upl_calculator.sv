// upl_calculator: urgent-period lengths of the short-deadline-period HWAs.
//
// For each accelerator x marked SDP the paper assumes the worst case, every
// request a row miss in one bank, so x needs UPL(x) = tRC * Total-Req(x)
// cycles of top priority per period. Among SDP-HWAs a shorter period has
// higher priority, so UPL(x) is extended by every higher-priority SDP-HWA i:
//   N_i = ceil(UPL(x) / Period(i)),   UPL'(x) = UPL(x) + sum_i N_i * UPL(i).
// The urgent window is placed at the end of the period, after a margin alpha
// for in-flight requests, giving
//   Priority-Cyc(x) = Period(x) - (UPL'(x) + alpha), floored at 0.
// The paper gives these formulas; it leaves open whether N_i and HP-UPL(i) use
// the base or the extended UPL: this design uses the base UPL for both. Equal
// periods are broken by index (lower index = higher priority), also a choice
// of this design.
//
// Operation: a `start` pulse latches nothing; inputs must stay stable until
// `done`. The calculation is sequential, one ceiling division (W+2 cycles)
// per (x, i) pair of SDP-HWAs. `done` pulses once with all `priority_cyc`
// valid; entries of non-SDP slots are 0.
module upl_calculator
  import squash_pkg::*;
#(
  parameter int unsigned N_HWA = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       is_sdp [N_HWA],
  input  cnt_t       period [N_HWA],   // Total-Cyc
  input  cnt_t       nreq   [N_HWA],   // Total-Req
  input  cnt_t       trc,
  input  cnt_t       alpha,
  output logic       busy,
  output logic       done,
  output cnt_t       priority_cyc [N_HWA]
);

  localparam int unsigned IW = (N_HWA > 1) ? $clog2(N_HWA) : 1;

  typedef enum logic [2:0] {S_IDLE, S_X, S_I, S_DIV, S_ACC, S_WR} state_e;
  state_e  state;
  logic [IW:0] x, i;
  cnt_t    upl_x, acc;
  logic    div_start, div_busy, div_done;
  cnt_t    div_q, div_a, div_b;

  function automatic logic higher(int unsigned a, int unsigned b);
    return (period[a] < period[b]) || ((period[a] == period[b]) && (a < b));
  endfunction

  assign div_a = upl_x + period[i[IW-1:0]] - 1;
  assign div_b = period[i[IW-1:0]];

  seq_divider #(.W(CW)) u_div (
    .clk(clk), .rst_n(rst_n), .start(div_start), .dividend(div_a), .divisor(div_b),
    .busy(div_busy), .done(div_done), .quotient(div_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      x         <= '0;
      i         <= '0;
      upl_x     <= '0;
      acc       <= '0;
      div_start <= 1'b0;
      done      <= 1'b0;
      for (int k = 0; k < N_HWA; k++) priority_cyc[k] <= '0;
    end else begin
      div_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          x     <= '0;
          state <= S_X;
        end
        S_X: begin
          if (32'(x) == N_HWA) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (!is_sdp[x[IW-1:0]]) begin
            priority_cyc[x[IW-1:0]] <= '0;
            x <= x + 1;
          end else begin
            upl_x <= trc * nreq[x[IW-1:0]];
            acc   <= trc * nreq[x[IW-1:0]] + alpha;
            i     <= '0;
            state <= S_I;
          end
        end
        S_I: begin
          if (32'(i) == N_HWA) begin
            state <= S_WR;
          end else if (is_sdp[i[IW-1:0]] && (i != x) && higher(32'(i), 32'(x))) begin
            div_start <= 1'b1;
            state     <= S_DIV;
          end else begin
            i <= i + 1;
          end
        end
        S_DIV: if (div_done) state <= S_ACC;
        S_ACC: begin
          acc   <= acc + div_q * (trc * nreq[i[IW-1:0]]);
          i     <= i + 1;
          state <= S_I;
        end
        S_WR: begin
          priority_cyc[x[IW-1:0]] <= (period[x[IW-1:0]] > acc) ? period[x[IW-1:0]] - acc : '0;
          x     <= x + 1;
          state <= S_X;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
