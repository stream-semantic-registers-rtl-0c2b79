// ssr_cluster: a PULP-style cluster of SSR-extended cores sharing a banked
// tightly coupled data memory (TCDM). Top level of this design.
//
// NUM_CORES copies of ssr_core_ext (the SSR additions of one core: ssrcfg
// CSR, register file wrapper, stall logic, data mover) each own two memory
// ports: port 0 shared by the core's LSU and lane 0, port 1 used by lane 1.
// All 2*NUM_CORES ports reach NUM_BANKS word-interleaved banks (tcdm_bank)
// through the logarithmic interconnect (tcdm_xbar), for TCDM_BYTES in total.
// The core pipelines, the instruction cache, DMA and peripherals are not
// part of this design; each core's pipeline-side signals are the ports
// core_i/core_o (see ssr_pkg::core_in_t/core_out_t).
//
// Following the paper: two cores with SSRs (its main configuration), a 64 kB
// TCDM with single-cycle access, two memory ports per core with the LSU and
// one data mover multiplexed onto one of them. Own choices: 8 banks (twice
// the 4 words/cycle the two cores can request), round-robin bank
// arbitration, TCDM at address 0 and the data mover configuration window at
// CFG_BASE (identical for every core; each core reaches its own data mover).
module ssr_cluster
  import ssr_pkg::*;
#(
  parameter int unsigned NUM_CORES  = 2,
  parameter int unsigned TCDM_BYTES = 65536,
  parameter int unsigned NUM_BANKS  = 8,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter word_t       CFG_BASE   = 32'h0001_0000
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  core_in_t  core_i [NUM_CORES],
  output core_out_t core_o [NUM_CORES]
);

  localparam int unsigned NUM_MASTERS = 2 * NUM_CORES;
  localparam int unsigned BANK_WORDS  = TCDM_BYTES / 4 / NUM_BANKS;
  localparam int unsigned RW          = $clog2(BANK_WORDS);

  mem_req_t      m_req [NUM_MASTERS];
  mem_rsp_t      m_rsp [NUM_MASTERS];
  logic          b_req   [NUM_BANKS];
  logic          b_we    [NUM_BANKS];
  logic [RW-1:0] b_addr  [NUM_BANKS];
  logic [3:0]    b_be    [NUM_BANKS];
  word_t         b_wdata [NUM_BANKS];
  word_t         b_rdata [NUM_BANKS];

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    mem_req_t req [2];
    mem_rsp_t rsp [2];

    ssr_core_ext #(
      .FIFO_DEPTH(FIFO_DEPTH),
      .CFG_BASE  (CFG_BASE)
    ) i_ssr (
      .clk_i,
      .rst_ni,
      .core_i   (core_i[c]),
      .core_o   (core_o[c]),
      .mem_req_o(req),
      .mem_rsp_i(rsp)
    );

    assign m_req[2*c]     = req[0];
    assign m_req[2*c + 1] = req[1];
    assign rsp[0]         = m_rsp[2*c];
    assign rsp[1]         = m_rsp[2*c + 1];
  end

  tcdm_xbar #(
    .NUM_MASTERS(NUM_MASTERS),
    .NUM_BANKS  (NUM_BANKS),
    .BANK_WORDS (BANK_WORDS)
  ) i_xbar (
    .clk_i,
    .rst_ni,
    .m_req_i  (m_req),
    .m_rsp_o  (m_rsp),
    .b_req_o  (b_req),
    .b_we_o   (b_we),
    .b_addr_o (b_addr),
    .b_be_o   (b_be),
    .b_wdata_o(b_wdata),
    .b_rdata_i(b_rdata)
  );

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    tcdm_bank #(
      .WORDS     (BANK_WORDS),
      .DATA_WIDTH(32)
    ) i_bank (
      .clk_i,
      .req_i  (b_req[b]),
      .we_i   (b_we[b]),
      .addr_i (b_addr[b]),
      .be_i   (b_be[b]),
      .wdata_i(b_wdata[b]),
      .rdata_o(b_rdata[b])
    );
  end

endmodule
