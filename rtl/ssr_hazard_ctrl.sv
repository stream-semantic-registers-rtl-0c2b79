// ssr_hazard_ctrl: the stall conditions SSRs add to the core controller.
//
// With stream registers the register file is no longer idempotent: every
// access to t0/t1/ft0/ft1 pops or pushes a stream element, so each must
// happen exactly once and never speculatively. This block derives:
//  * id_issue_ok_o: the decode-stage instruction may access the register
//    file. It is held back while it names a stream-capable register and
//    either an ssrcfg write is still in flight in a later stage (the new
//    enable value has not taken effect yet) or a branch is being resolved
//    (the access could be speculative). The check uses the register names
//    only, not the enable bit, because the enable bit may be about to change.
//  * stall_id_o: decode stalls for the reason above or because a read port
//    that presents valid sees ready low (read back-pressure from the stream).
//  * stall_wb_o: write-back stalls because a write port that presents valid
//    sees ready low (write back-pressure).
// The conditions follow the paper's list of pipeline considerations; how the
// pipeline signals them (the inputs here) is this design's choice. Purely
// combinational.
module ssr_hazard_ctrl #(
  parameter int unsigned NUM_READ  = 3,
  parameter int unsigned NUM_WRITE = 2
) (
  input  logic                 id_uses_ssr_reg_i,
  input  logic                 csr_ssrcfg_pending_i,
  input  logic                 branch_pending_i,
  input  logic [NUM_READ-1:0]  rd_valid_i,
  input  logic [NUM_READ-1:0]  rd_ready_i,
  input  logic [NUM_WRITE-1:0] wr_valid_i,
  input  logic [NUM_WRITE-1:0] wr_ready_i,
  output logic                 id_issue_ok_o,
  output logic                 stall_id_o,
  output logic                 stall_wb_o
);

  logic hold;

  assign hold          = id_uses_ssr_reg_i && (csr_ssrcfg_pending_i || branch_pending_i);
  assign id_issue_ok_o = !hold;
  assign stall_id_o    = hold || |(rd_valid_i & ~rd_ready_i);
  assign stall_wb_o    = |(wr_valid_i & ~wr_ready_i);

endmodule
