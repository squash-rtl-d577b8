// pb_controller: the switching probability Pb(x) of one long-deadline-period
// accelerator (LDP-HWA).
//
// Pb(x) is the probability that memory-intensive CPU applications are ranked
// above this accelerator while it is non-urgent. It starts at 0 after reset.
// On every SwitchingUnit tick it moves by the progress comparison the paper
// gives: +PB_INC when CurrentProgress > ExpectedProgress, -PB_DEC when
// CurrentProgress < ExpectedProgress, unchanged when equal (PB_INC = 1 %,
// PB_DEC = 5 % as in the paper). This design holds Pb in whole percent,
// saturating at 0 and 100.
//
// The coin is thrown on the same tick: a 16-bit Fibonacci LFSR (x^16+x^14+x^13+x^11+1)
// steps every cycle; (lfsr * 100) >> 16 gives a number in 0..99, and `swap`
// is set for the next SwitchingUnit when that number is below the new Pb.
// When to throw the coin and how to make the random number are choices of
// this design; the paper only states the probability.
//
// Interface: `tick` is a one-cycle pulse; `prog_gt`/`prog_lt` are the progress
// comparison sampled at that tick. `pb` and `swap` change the cycle after.
module pb_controller #(
  parameter int unsigned PB_INC = 1,
  parameter int unsigned PB_DEC = 5,
  parameter int unsigned PB_MAX = 100,
  parameter logic [15:0] SEED   = 16'hACE1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tick,
  input  logic       prog_gt,
  input  logic       prog_lt,
  output logic [6:0] pb,
  output logic       swap
);

  logic [15:0] lfsr;
  logic [6:0]  pb_next;
  logic [22:0] scaled;
  logic [6:0]  rand_pct;

  always_comb begin
    pb_next = pb;
    if (prog_gt)      pb_next = (32'(pb) + PB_INC >= PB_MAX) ? 7'(PB_MAX) : 7'(32'(pb) + PB_INC);
    else if (prog_lt) pb_next = (32'(pb) >= PB_DEC) ? 7'(32'(pb) - PB_DEC) : 7'd0;
    scaled   = 23'(lfsr) * 23'd100;
    rand_pct = scaled[22:16];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= (SEED == 16'h0) ? 16'h1 : SEED;
      pb   <= '0;
      swap <= 1'b0;
    end else begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      if (tick) begin
        pb   <= pb_next;
        swap <= (rand_pct < pb_next);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) pb <= 7'(PB_MAX));
  assert property (@(posedge clk) disable iff (!rst_n) !(prog_gt && prog_lt));

endmodule
