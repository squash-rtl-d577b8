// rr_arbiter: round-robin arbiter over N requesters.
//
// `gnt_idx` names the first requester at or after the pointer that has `req`
// set; `gnt_valid` says one exists. When `ack` is high the pointer moves past
// the granted requester, so a requester that was served goes last.
// Combinational grant, pointer updated at the clock edge.
module rr_arbiter #(
  parameter int unsigned N = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  input  logic          ack,
  output logic          gnt_valid,
  output logic [IW-1:0] gnt_idx
);

  logic [IW-1:0] ptr;

  always_comb begin
    gnt_valid = 1'b0;
    gnt_idx   = '0;
    for (int k = 0; k < N; k++) begin
      int unsigned j;
      j = (32'(ptr) + k) % N;
      if (!gnt_valid && req[j]) begin
        gnt_valid = 1'b1;
        gnt_idx   = IW'(j);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 ptr <= '0;
    else if (ack && gnt_valid)  ptr <= (32'(gnt_idx) == N - 1) ? '0 : gnt_idx + 1;
  end

endmodule
