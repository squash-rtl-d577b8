// Testbench for request_router: 8 CPU and 4 accelerator requestors, 2
// channels, random requests held until accepted and random channel back-
// pressure. Checks that every enqueued request is a waiting request of the
// right kind for that channel with the expected address fields, that
// src_ready matches the grants, that every request is accepted exactly once,
// and that round-robin keeps any waiting requestor's wait within N-1 grants.
module tb_request_router;
  import squash_pkg::*;
  localparam int NC = 8, NH = 4, NS = 12, CH = 2;
  logic clk = 0, rst_n = 0;
  logic src_valid [NS], src_ready [NS];
  mem_req_t src_req [NS];
  logic cv [CH], cr [CH], hv [CH], hr [CH];
  chan_req_t creq [CH], hreq [CH];
  int checks = 0, failures = 0;
  int sent = 0, accepted = 0, waitc [NS], maxwait = 0;
  bit acc [NS];

  request_router #(.N_CPU(NC), .N_HWA(NH), .N_CH(CH)) dut (
    .clk(clk), .rst_n(rst_n), .src_valid(src_valid), .src_req(src_req), .src_ready(src_ready),
    .cpu_enq_valid(cv), .cpu_enq_req(creq), .cpu_enq_ready(cr),
    .hwa_enq_valid(hv), .hwa_enq_req(hreq), .hwa_enq_ready(hr));

  always #5 clk = ~clk;

  function automatic bit match(chan_req_t e, int s, int c);
    logic [31:0] a;
    a = src_req[s].addr;
    return src_valid[s] && (int'(a[6]) == c) && e.src == SRC_W'(s) && e.bank == a[9:7] &&
           e.col == a[16:10] && e.row == a[31:17] && e.tag == src_req[s].tag && e.we == src_req[s].we;
  endfunction

  always @(posedge clk) if (rst_n) begin
    int nrdy;
    nrdy = 0;
    for (int c = 0; c < CH; c++) begin
      if (cv[c] && cr[c]) begin
        checks++;
        if (int'(creq[c].src) >= NC || !match(creq[c], creq[c].src, c) || !src_ready[creq[c].src]) failures++;
      end
      if (hv[c] && hr[c]) begin
        checks++;
        if (int'(hreq[c].src) < NC || !match(hreq[c], hreq[c].src, c) || !src_ready[hreq[c].src]) failures++;
      end
    end
    for (int s = 0; s < NS; s++) begin
      acc[s] = src_valid[s] && src_ready[s];
      if (src_ready[s]) begin
        nrdy++;
        checks++;
        if (!src_valid[s]) failures++;
        accepted++;
        waitc[s] = 0;
      end else if (src_valid[s]) begin
        // count grants given to others of the same kind and channel while waiting
        int c;
        c = int'(src_req[s].addr[6]);
        if (s < NC ? (cv[c] && cr[c]) : (hv[c] && hr[c])) waitc[s]++;
        if (waitc[s] > maxwait) maxwait = waitc[s];
      end
    end
    checks++;
    if (nrdy != ((cv[0] && cr[0]) + (cv[1] && cr[1]) + (hv[0] && hr[0]) + (hv[1] && hr[1]))) failures++;
  end

  initial begin
    for (int s = 0; s < NS; s++) begin src_valid[s] = 0; src_req[s] = '0; waitc[s] = 0; acc[s] = 0; end
    for (int c = 0; c < CH; c++) begin cr[c] = 0; hr[c] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++) if (acc[s]) begin src_valid[s] = 0; acc[s] = 0; end
      for (int s = 0; s < NS; s++)
        if (!src_valid[s] && $urandom_range(0, 99) < 30) begin
          src_valid[s] = 1;
          src_req[s] = '{we: 1'($urandom_range(0, 1)), addr: $urandom(), tag: TAG_W'($urandom_range(0, 255))};
          sent++;
        end
      for (int c = 0; c < CH; c++) begin
        cr[c] = $urandom_range(0, 99) < 70;
        hr[c] = $urandom_range(0, 99) < 70;
      end
    end
    @(negedge clk);
    for (int s = 0; s < NS; s++) if (acc[s]) begin src_valid[s] = 0; acc[s] = 0; end
    for (int c = 0; c < CH; c++) begin cr[c] = 1; hr[c] = 1; end
    repeat (40) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++) if (acc[s]) begin src_valid[s] = 0; acc[s] = 0; end
    end
    checks++;
    if (accepted != sent) begin failures++; $display("FAIL accepted %0d of %0d", accepted, sent); end
    checks++;
    if (maxwait > NC - 1) begin failures++; $display("FAIL max wait %0d grants", maxwait); end
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
