// squash_cfg_regs: registers the system software writes to configure SQUASH.
//
// The paper has software set Total-Req, Total-Cyc and Priority-Cyc from each
// accelerator's specification, and fix which accelerators belong to the
// short-deadline-period group. The register map, reset values and the extra
// global registers are this design's:
//   HWA h, base h*8:  +0 Total-Req  +1 Total-Cyc  +2 Priority-Cyc  +3 bit0 = SDP
//   0x80 EmergentThreshold (percent, reset 80)   0x81 ClusterFactor (percent, reset 20)
//   0x82 tRC for the UPL calculation (reset T_RC) 0x83 alpha margin (reset 0)
//   0x84 write: start the UPL calculation (any data)
// Writes take effect the next cycle; reads are combinational. When the UPL
// calculator finishes (`upl_done`), Priority-Cyc of every SDP accelerator is
// loaded from its result; a software write in the same cycle loses.
module squash_cfg_regs
  import squash_pkg::*;
#(
  parameter int unsigned N_HWA = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cfg_we,
  input  logic [7:0] cfg_addr,
  input  cnt_t       cfg_wdata,
  output cnt_t       cfg_rdata,
  input  logic       upl_done,
  input  cnt_t       upl_priority_cyc [N_HWA],
  output cnt_t       total_req    [N_HWA],
  output cnt_t       total_cyc    [N_HWA],
  output cnt_t       priority_cyc [N_HWA],
  output logic       is_sdp       [N_HWA],
  output logic [6:0] et_pct,
  output logic [6:0] cf_pct,
  output cnt_t       trc,
  output cnt_t       alpha,
  output logic       upl_start
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < N_HWA; h++) begin
        total_req[h]    <= '0;
        total_cyc[h]    <= '0;
        priority_cyc[h] <= '0;
        is_sdp[h]       <= 1'b0;
      end
      et_pct    <= 7'd80;
      cf_pct    <= 7'd20;
      trc       <= cnt_t'(T_RC);
      alpha     <= '0;
      upl_start <= 1'b0;
    end else begin
      upl_start <= 1'b0;
      if (cfg_we) begin
        for (int h = 0; h < N_HWA; h++) begin
          if (cfg_addr == 8'(h * 8 + 0)) total_req[h]    <= cfg_wdata;
          if (cfg_addr == 8'(h * 8 + 1)) total_cyc[h]    <= cfg_wdata;
          if (cfg_addr == 8'(h * 8 + 2)) priority_cyc[h] <= cfg_wdata;
          if (cfg_addr == 8'(h * 8 + 3)) is_sdp[h]       <= cfg_wdata[0];
        end
        unique case (cfg_addr)
          8'h80:   et_pct    <= (cfg_wdata > 32'd100) ? 7'd100 : cfg_wdata[6:0];
          8'h81:   cf_pct    <= (cfg_wdata > 32'd100) ? 7'd100 : cfg_wdata[6:0];
          8'h82:   trc       <= cfg_wdata;
          8'h83:   alpha     <= cfg_wdata;
          8'h84:   upl_start <= 1'b1;
          default: ;
        endcase
      end
      if (upl_done)
        for (int h = 0; h < N_HWA; h++)
          if (is_sdp[h]) priority_cyc[h] <= upl_priority_cyc[h];
    end
  end

  always_comb begin
    cfg_rdata = '0;
    for (int h = 0; h < N_HWA; h++) begin
      if (cfg_addr == 8'(h * 8 + 0)) cfg_rdata = total_req[h];
      if (cfg_addr == 8'(h * 8 + 1)) cfg_rdata = total_cyc[h];
      if (cfg_addr == 8'(h * 8 + 2)) cfg_rdata = priority_cyc[h];
      if (cfg_addr == 8'(h * 8 + 3)) cfg_rdata = cnt_t'(is_sdp[h]);
    end
    if (cfg_addr == 8'h80) cfg_rdata = cnt_t'(et_pct);
    if (cfg_addr == 8'h81) cfg_rdata = cnt_t'(cf_pct);
    if (cfg_addr == 8'h82) cfg_rdata = trc;
    if (cfg_addr == 8'h83) cfg_rdata = alpha;
  end

endmodule
