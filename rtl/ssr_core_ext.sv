// ssr_core_ext: everything the SSR extension adds to one RI5CY core.
//
// It groups the ssrcfg CSR (ssr_csr), the register file with its SSR wrapper
// (ssr_regfile around regfile), the added stall conditions
// (ssr_hazard_ctrl) and the data mover (ssr_data_mover). The pipeline itself
// is not part of this design; it connects through core_i/core_o
// (ssr_pkg::core_in_t/core_out_t): register file port addresses, valids and
// data, CSR accesses, LSU requests and three hazard hints. In return it gets
// read data, per-port ready (back-pressure), the CSR read value, LSU
// responses and the stall signals. The two memory ports go to the TCDM
// interconnect.
//
// Read-port valids are gated with id_issue_ok so that an instruction naming
// a stream register is never allowed to pop a stream while an ssrcfg write
// or a branch is still unresolved (the paper's pipeline rules); the pipeline
// must hold such an instruction in decode while stall_id is high, and must
// drop the valid of each port whose handshake has already completed, so
// each access happens exactly once.
module ssr_core_ext
  import ssr_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4,
  parameter word_t       CFG_BASE   = 32'h0001_0000
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  core_in_t  core_i,
  output core_out_t core_o,
  output mem_req_t  mem_req_o [2],
  input  mem_rsp_t  mem_rsp_i [2]
);

  logic     ssr_en;
  logic     issue_ok;
  regaddr_t raddr  [NR];
  logic     rvalid [NR];
  logic     rready [NR];
  word_t    rdata  [NR];
  regaddr_t waddr  [NW];
  word_t    wdata  [NW];
  logic     wvalid [NW];
  logic     wready [NW];
  regaddr_t s_raddr  [NR];
  logic     s_rvalid [NR];
  word_t    s_rdata  [NR];
  logic     s_rready [NR];
  regaddr_t s_waddr  [NW];
  word_t    s_wdata  [NW];
  logic     s_wvalid [NW];
  logic     s_wready [NW];
  logic     lane_done [NUM_LANES];
  logic [NR-1:0] rv_vec, rr_vec;
  logic [NW-1:0] wv_vec, wr_vec;

  ssr_csr i_csr (
    .clk_i,
    .rst_ni,
    .csr_i      (core_i.csr),
    .csr_hit_o  (core_o.csr_hit),
    .csr_rdata_o(core_o.csr_rdata),
    .ssr_en_o   (ssr_en)
  );

  always_comb begin
    for (int p = 0; p < NR; p++) begin
      raddr[p]  = core_i.raddr[p];
      rvalid[p] = core_i.rvalid[p] && issue_ok;
      rv_vec[p] = rvalid[p];
      rr_vec[p] = rready[p];
    end
    for (int p = 0; p < NW; p++) begin
      waddr[p]  = core_i.waddr[p];
      wdata[p]  = core_i.wdata[p];
      wvalid[p] = core_i.wvalid[p];
      wv_vec[p] = wvalid[p];
      wr_vec[p] = wready[p];
    end
  end

  ssr_regfile #(
    .NUM_READ (NR),
    .NUM_WRITE(NW)
  ) i_regfile (
    .clk_i,
    .rst_ni,
    .ssr_en_i    (ssr_en),
    .raddr_i     (raddr),
    .rvalid_i    (rvalid),
    .rready_o    (rready),
    .rdata_o     (rdata),
    .waddr_i     (waddr),
    .wdata_i     (wdata),
    .wvalid_i    (wvalid),
    .wready_o    (wready),
    .ssr_raddr_o (s_raddr),
    .ssr_rvalid_o(s_rvalid),
    .ssr_rdata_i (s_rdata),
    .ssr_rready_i(s_rready),
    .ssr_waddr_o (s_waddr),
    .ssr_wdata_o (s_wdata),
    .ssr_wvalid_o(s_wvalid),
    .ssr_wready_i(s_wready)
  );

  ssr_hazard_ctrl #(
    .NUM_READ (NR),
    .NUM_WRITE(NW)
  ) i_hazard (
    .id_uses_ssr_reg_i   (core_i.id_uses_ssr_reg),
    .csr_ssrcfg_pending_i(core_i.csr_ssrcfg_pending),
    .branch_pending_i    (core_i.branch_pending),
    .rd_valid_i          (rv_vec),
    .rd_ready_i          (rr_vec),
    .wr_valid_i          (wv_vec),
    .wr_ready_i          (wr_vec),
    .id_issue_ok_o       (issue_ok),
    .stall_id_o          (core_o.stall_id),
    .stall_wb_o          (core_o.stall_wb)
  );

  ssr_data_mover #(
    .NUM_READ  (NR),
    .NUM_WRITE (NW),
    .FIFO_DEPTH(FIFO_DEPTH),
    .CFG_BASE  (CFG_BASE)
  ) i_data_mover (
    .clk_i,
    .rst_ni,
    .ssr_raddr_i (s_raddr),
    .ssr_rvalid_i(s_rvalid),
    .ssr_rready_o(s_rready),
    .ssr_rdata_o (s_rdata),
    .ssr_waddr_i (s_waddr),
    .ssr_wdata_i (s_wdata),
    .ssr_wvalid_i(s_wvalid),
    .ssr_wready_o(s_wready),
    .lsu_req_i   (core_i.lsu_req),
    .lsu_rsp_o   (core_o.lsu_rsp),
    .mem_req_o   (mem_req_o),
    .mem_rsp_i   (mem_rsp_i),
    .lane_done_o (lane_done)
  );

  always_comb begin
    for (int p = 0; p < NR; p++) begin
      core_o.rdata[p]  = rdata[p];
      core_o.rready[p] = rready[p];
    end
    for (int p = 0; p < NW; p++) core_o.wready[p] = wready[p];
    for (int l = 0; l < NUM_LANES; l++) core_o.lane_done[l] = lane_done[l];
  end
  assign core_o.ssr_en      = ssr_en;
  assign core_o.id_issue_ok = issue_ok;

endmodule
