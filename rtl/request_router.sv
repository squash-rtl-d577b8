// request_router: front end of the memory controllers.
//
// Each requestor (CPU cores first, then accelerators) presents one request at
// a time with a valid/ready handshake. The router decodes the address,
// 64-byte line | channel | bank | column | row from the least significant
// bit up (a mapping chosen for this design), and offers the request to its
// channel. Every channel has two enqueue ports, one into the half of its
// request buffer reserved for CPUs and one into the half for accelerators, as
// the paper splits the buffer; each port takes one request per cycle, chosen
// round-robin among the requestors of that kind that target the channel.
// `src_ready` is combinational on `src_valid` and the channel's ready.
module request_router
  import squash_pkg::*;
#(
  parameter int unsigned N_CPU = 8,
  parameter int unsigned N_HWA = 4,
  parameter int unsigned N_CH  = 2,
  localparam int unsigned N_SRC = N_CPU + N_HWA
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      src_valid [N_SRC],
  input  mem_req_t  src_req   [N_SRC],
  output logic      src_ready [N_SRC],
  output logic      cpu_enq_valid [N_CH],
  output chan_req_t cpu_enq_req   [N_CH],
  input  logic      cpu_enq_ready [N_CH],
  output logic      hwa_enq_valid [N_CH],
  output chan_req_t hwa_enq_req   [N_CH],
  input  logic      hwa_enq_ready [N_CH]
);

  localparam int unsigned CHB = (N_CH > 1) ? $clog2(N_CH) : 0;
  localparam int unsigned CIW = (N_CPU > 1) ? $clog2(N_CPU) : 1;
  localparam int unsigned HIW = (N_HWA > 1) ? $clog2(N_HWA) : 1;

  function automatic int unsigned chan_of(logic [ADDR_W-1:0] a);
    if (CHB == 0) return 0;
    return 32'((a >> LINE_B) & ADDR_W'((1 << CHB) - 1));
  endfunction

  function automatic chan_req_t decode(logic [ADDR_W-1:0] a, logic we, logic [TAG_W-1:0] tag,
                                       int unsigned src);
    chan_req_t r;
    logic [ADDR_W-1:0] rest;
    rest   = a >> (LINE_B + CHB);
    r.src  = SRC_W'(src);
    r.we   = we;
    r.bank = rest[BANK_W-1:0];
    r.col  = COL_W'(rest >> BANK_W);
    r.row  = ROW_W'(rest >> (BANK_W + COL_W));
    r.tag  = tag;
    return r;
  endfunction

  logic [N_CPU-1:0] cpu_want [N_CH];
  logic [N_HWA-1:0] hwa_want [N_CH];
  logic             cpu_gv [N_CH];
  logic             hwa_gv [N_CH];
  logic [CIW-1:0]   cpu_gi [N_CH];
  logic [HIW-1:0]   hwa_gi [N_CH];

  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      for (int i = 0; i < N_CPU; i++)
        cpu_want[c][i] = src_valid[i] && (chan_of(src_req[i].addr) == c);
      for (int h = 0; h < N_HWA; h++)
        hwa_want[c][h] = src_valid[N_CPU + h] && (chan_of(src_req[N_CPU + h].addr) == c);
    end
  end

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    rr_arbiter #(.N(N_CPU)) u_cpu_arb (
      .clk(clk), .rst_n(rst_n), .req(cpu_want[c]), .ack(cpu_enq_ready[c]),
      .gnt_valid(cpu_gv[c]), .gnt_idx(cpu_gi[c])
    );
    rr_arbiter #(.N(N_HWA)) u_hwa_arb (
      .clk(clk), .rst_n(rst_n), .req(hwa_want[c]), .ack(hwa_enq_ready[c]),
      .gnt_valid(hwa_gv[c]), .gnt_idx(hwa_gi[c])
    );
  end

  always_comb begin
    for (int s = 0; s < N_SRC; s++) src_ready[s] = 1'b0;
    for (int c = 0; c < N_CH; c++) begin
      cpu_enq_valid[c] = cpu_gv[c];
      cpu_enq_req[c]   = decode(src_req[cpu_gi[c]].addr, src_req[cpu_gi[c]].we,
                                src_req[cpu_gi[c]].tag, 32'(cpu_gi[c]));
      hwa_enq_valid[c] = hwa_gv[c];
      hwa_enq_req[c]   = decode(src_req[N_CPU + 32'(hwa_gi[c])].addr, src_req[N_CPU + 32'(hwa_gi[c])].we,
                                src_req[N_CPU + 32'(hwa_gi[c])].tag, N_CPU + 32'(hwa_gi[c]));
      if (cpu_gv[c] && cpu_enq_ready[c]) src_ready[cpu_gi[c]] = 1'b1;
      if (hwa_gv[c] && hwa_enq_ready[c]) src_ready[N_CPU + 32'(hwa_gi[c])] = 1'b1;
    end
  end

endmodule
