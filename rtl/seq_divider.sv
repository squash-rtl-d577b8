// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// A `start` pulse (while not busy) latches dividend and divisor; `done` pulses
// W+1 cycles later with `quotient` valid until the next start. Division by zero
// gives an all-ones quotient. Used by the UPL calculator (ceiling division) and
// the CPU intensity classifier (misses per kilo-instruction).
module seq_divider #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);

  logic [W-1:0]         den;
  logic [W:0]           rem;
  logic [$clog2(W+1):0] count;
  logic [W:0]           trial;

  assign trial = {rem[W-1:0], quotient[W-1]} - {1'b0, den};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      den      <= '0;
      rem      <= '0;
      count    <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        den      <= divisor;
        rem      <= '0;
        quotient <= dividend;
        count    <= ($clog2(W+1)+1)'(W);
        busy     <= 1'b1;
      end else if (busy) begin
        if (count == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (den == '0) quotient <= '1;
        end else begin
          count <= count - 1;
          if (!trial[W]) begin
            rem      <= trial;
            quotient <= {quotient[W-2:0], 1'b1};
          end else begin
            rem      <= {rem[W-1:0], quotient[W-1]};
            quotient <= {quotient[W-2:0], 1'b0};
          end
        end
      end
    end
  end

endmodule
