// ssr_switch: connects the register file's stream ports to the data mover
// lanes.
//
// The core exposes one stream per register file port (NUM_READ read and
// NUM_WRITE write streams). The switch uses each stream's register address to
// pick the lane it targets (t0/ft0 -> lane 0, t1/ft1 -> lane 1) and forwards
// valid, data and ready between the two. A lane serves at most one read and
// one write per cycle; when several ports address the same lane in the same
// cycle, the lowest-numbered port goes first and the others see ready low
// and retry in a later cycle (own choice: the paper only says the switch maps
// accesses to lanes by register address). Purely combinational.
module ssr_switch
  import ssr_pkg::*;
#(
  parameter int unsigned NUM_READ  = 3,
  parameter int unsigned NUM_WRITE = 2,
  parameter int unsigned LANES = 2
) (
  // from the register file wrapper
  input  regaddr_t raddr_i  [NUM_READ],
  input  logic     rvalid_i [NUM_READ],
  output logic     rready_o [NUM_READ],
  output word_t    rdata_o  [NUM_READ],
  input  regaddr_t waddr_i  [NUM_WRITE],
  input  word_t    wdata_i  [NUM_WRITE],
  input  logic     wvalid_i [NUM_WRITE],
  output logic     wready_o [NUM_WRITE],
  // to the lanes
  output logic     lane_rvalid_o [LANES],
  input  logic     lane_rready_i [LANES],
  input  word_t    lane_rdata_i  [LANES],
  output logic     lane_wvalid_o [LANES],
  input  logic     lane_wready_i [LANES],
  output word_t    lane_wdata_o  [LANES]
);

  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1;

  function automatic logic [LW-1:0] lane_idx(regaddr_t a);
    return LW'(lane_of(a));
  endfunction

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      lane_rvalid_o[l] = 1'b0;
      lane_wvalid_o[l] = 1'b0;
      lane_wdata_o[l]  = '0;
    end
    // read streams: first valid port per lane wins
    for (int p = 0; p < NUM_READ; p++) begin
      rready_o[p] = 1'b0;
      rdata_o[p]  = lane_rdata_i[lane_idx(raddr_i[p])];
      if (rvalid_i[p] && !lane_rvalid_o[lane_idx(raddr_i[p])]) begin
        lane_rvalid_o[lane_idx(raddr_i[p])] = 1'b1;
        rready_o[p] = lane_rready_i[lane_idx(raddr_i[p])];
      end
    end
    // write streams
    for (int p = 0; p < NUM_WRITE; p++) begin
      wready_o[p] = 1'b0;
      if (wvalid_i[p] && !lane_wvalid_o[lane_idx(waddr_i[p])]) begin
        lane_wvalid_o[lane_idx(waddr_i[p])] = 1'b1;
        lane_wdata_o[lane_idx(waddr_i[p])]  = wdata_i[p];
        wready_o[p] = lane_wready_i[lane_idx(waddr_i[p])];
      end
    end
  end

endmodule
