// ssr_port_mux: shares one memory port between the core's load/store unit
// (LSU) and data mover lane 0.
//
// A single-issue instruction uses either the LSU or the stream registers,
// never both, so the two together need at most one word per cycle and can
// share a port. Arbitration is fixed priority, as in the paper; which side
// has priority is not stated there. Here the LSU wins: its requests come from
// the instruction being executed, whereas the lane's requests are prefetches
// that can wait a cycle. The loser sees gnt low and keeps its request.
// Responses (one cycle after the grant, TCDM protocol) are steered back to
// the side that was granted, remembered in one register.
//
// Read data is one bus from memory fanned out to both requesters; only the
// rvalid/gnt bits are steered.
module ssr_port_mux
  import ssr_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t lsu_req_i,
  output mem_rsp_t lsu_rsp_o,
  input  mem_req_t lane_req_i,
  output mem_rsp_t lane_rsp_o,
  output mem_req_t mem_req_o,
  input  mem_rsp_t mem_rsp_i
);

  logic sel_lane;     // lane owns the port this cycle
  logic rsp_lane_q;   // last granted request came from the lane

  assign sel_lane  = !lsu_req_i.req;
  assign mem_req_o = sel_lane ? lane_req_i : lsu_req_i;

  always_comb begin
    lsu_rsp_o         = '0;
    lane_rsp_o        = '0;
    lsu_rsp_o.gnt     = !sel_lane && mem_rsp_i.gnt;
    lane_rsp_o.gnt    = sel_lane && mem_rsp_i.gnt;
    lsu_rsp_o.rdata   = mem_rsp_i.rdata;
    lane_rsp_o.rdata  = mem_rsp_i.rdata;
    lsu_rsp_o.rvalid  = mem_rsp_i.rvalid && !rsp_lane_q;
    lane_rsp_o.rvalid = mem_rsp_i.rvalid && rsp_lane_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                                  rsp_lane_q <= 1'b0;
    else if (mem_req_o.req && mem_rsp_i.gnt)      rsp_lane_q <= sel_lane;
  end

endmodule
