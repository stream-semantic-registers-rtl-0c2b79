// ssr_data_mover: turns the core's register stream accesses into memory
// accesses.
//
// It contains the switch (ssr_switch) that routes the register file's read
// and write streams to NUM_LANES lanes (ssr_lane), the lanes themselves, the
// memory-mapped configuration decoder on the LSU path, and the multiplexer
// (ssr_port_mux) that shares memory port 0 between the LSU and lane 0.
// Lane 1 owns memory port 1. This is the arrangement of the paper's data
// mover figure (LSU and lane 0 multiplexed onto "Port 1", lane 1 on
// "Port 2"; the LSU's loads/stores also reach the lanes' config inputs).
//
// Configuration: an LSU access to [CFG_BASE, CFG_BASE + NUM_LANES*128) goes
// to lane (offset / 128), register (offset / 4) % 32, instead of memory. It
// is granted at once and answered, like memory, one cycle later. CFG_BASE
// (just above the 64 kB TCDM) is this design's choice.
module ssr_data_mover
  import ssr_pkg::*;
#(
  parameter int unsigned NUM_READ   = 3,
  parameter int unsigned NUM_WRITE  = 2,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter word_t       CFG_BASE   = 32'h0001_0000
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // streams from the register file wrapper
  input  regaddr_t ssr_raddr_i  [NUM_READ],
  input  logic     ssr_rvalid_i [NUM_READ],
  output logic     ssr_rready_o [NUM_READ],
  output word_t    ssr_rdata_o  [NUM_READ],
  input  regaddr_t ssr_waddr_i  [NUM_WRITE],
  input  word_t    ssr_wdata_i  [NUM_WRITE],
  input  logic     ssr_wvalid_i [NUM_WRITE],
  output logic     ssr_wready_o [NUM_WRITE],
  // core LSU
  input  mem_req_t lsu_req_i,
  output mem_rsp_t lsu_rsp_o,
  // memory ports
  output mem_req_t mem_req_o [2],
  input  mem_rsp_t mem_rsp_i [2],
  // per-lane stream finished
  output logic     lane_done_o [NUM_LANES]
);

  logic     lane_rvalid [NUM_LANES];
  logic     lane_rready [NUM_LANES];
  word_t    lane_rdata  [NUM_LANES];
  logic     lane_wvalid [NUM_LANES];
  logic     lane_wready [NUM_LANES];
  word_t    lane_wdata  [NUM_LANES];
  mem_req_t lane_req    [NUM_LANES];
  mem_rsp_t lane_rsp    [NUM_LANES];
  cfg_req_t lane_cfg    [NUM_LANES];
  word_t    lane_cfg_rdata [NUM_LANES];

  ssr_switch #(
    .NUM_READ (NUM_READ),
    .NUM_WRITE(NUM_WRITE),
    .LANES    (NUM_LANES)
  ) i_switch (
    .raddr_i      (ssr_raddr_i),
    .rvalid_i     (ssr_rvalid_i),
    .rready_o     (ssr_rready_o),
    .rdata_o      (ssr_rdata_o),
    .waddr_i      (ssr_waddr_i),
    .wdata_i      (ssr_wdata_i),
    .wvalid_i     (ssr_wvalid_i),
    .wready_o     (ssr_wready_o),
    .lane_rvalid_o(lane_rvalid),
    .lane_rready_i(lane_rready),
    .lane_rdata_i (lane_rdata),
    .lane_wvalid_o(lane_wvalid),
    .lane_wready_i(lane_wready),
    .lane_wdata_o (lane_wdata)
  );

  // ------------------------------------------------------ config decode
  word_t cfg_off;
  logic  cfg_hit;
  logic  cfg_lane;
  logic  cfg_rvalid_q;
  word_t cfg_rdata_q;

  assign cfg_off  = lsu_req_i.addr - CFG_BASE;
  assign cfg_hit  = lsu_req_i.req && (lsu_req_i.addr >= CFG_BASE)
                 && (cfg_off < NUM_LANES * CFG_LANE_BYTES);
  assign cfg_lane = cfg_off[7];

  always_comb begin
    for (int l = 0; l < NUM_LANES; l++) begin
      lane_cfg[l].valid = cfg_hit && (cfg_lane == 1'(l));
      lane_cfg[l].write = lsu_req_i.we;
      lane_cfg[l].idx   = cfg_off[6:2];
      lane_cfg[l].wdata = lsu_req_i.wdata;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_rvalid_q <= 1'b0;
      cfg_rdata_q  <= '0;
    end else begin
      cfg_rvalid_q <= cfg_hit;
      cfg_rdata_q  <= lane_cfg_rdata[cfg_lane];
    end
  end

  // ------------------------------------------------------ lanes
  for (genvar l = 0; l < NUM_LANES; l++) begin : g_lane
    ssr_lane #(
      .FIFO_DEPTH(FIFO_DEPTH)
    ) i_lane (
      .clk_i,
      .rst_ni,
      .cfg_i      (lane_cfg[l]),
      .cfg_rdata_o(lane_cfg_rdata[l]),
      .rd_valid_i (lane_rvalid[l]),
      .rd_ready_o (lane_rready[l]),
      .rd_data_o  (lane_rdata[l]),
      .wr_valid_i (lane_wvalid[l]),
      .wr_ready_o (lane_wready[l]),
      .wr_data_i  (lane_wdata[l]),
      .mem_req_o  (lane_req[l]),
      .mem_rsp_i  (lane_rsp[l]),
      .done_o     (lane_done_o[l])
    );
  end

  // ------------------------------------------------------ memory ports
  mem_req_t lsu_mem_req;
  mem_rsp_t lsu_mem_rsp;

  always_comb begin
    lsu_mem_req     = lsu_req_i;
    lsu_mem_req.req = lsu_req_i.req && !cfg_hit;
  end

  ssr_port_mux i_port_mux (
    .clk_i,
    .rst_ni,
    .lsu_req_i (lsu_mem_req),
    .lsu_rsp_o (lsu_mem_rsp),
    .lane_req_i(lane_req[0]),
    .lane_rsp_o(lane_rsp[0]),
    .mem_req_o (mem_req_o[0]),
    .mem_rsp_i (mem_rsp_i[0])
  );

  assign mem_req_o[1] = lane_req[1];
  assign lane_rsp[1]  = mem_rsp_i[1];

  always_comb begin
    lsu_rsp_o        = lsu_mem_rsp;
    lsu_rsp_o.gnt    = cfg_hit ? 1'b1 : lsu_mem_rsp.gnt;
    lsu_rsp_o.rvalid = cfg_rvalid_q || lsu_mem_rsp.rvalid;
    lsu_rsp_o.rdata  = cfg_rvalid_q ? cfg_rdata_q : lsu_mem_rsp.rdata;
  end

endmodule
