// tb_ssr_port_mux: random LSU and lane requests against a memory that grants
// at random and answers one cycle after each grant. Checks the fixed LSU
// priority, that the loser is not granted, and that each response goes to
// the side whose request was granted, with that request's data.
module tb_ssr_port_mux;
  import ssr_pkg::*;
  logic clk = 0, rst_n = 0;
  mem_req_t lsu_req, lane_req, mreq;
  mem_rsp_t lsu_rsp, lane_rsp, mrsp;
  int checks = 0, failures = 0;
  int lsu_wins = 0, lane_waits = 0;
  logic exp_lane; logic exp_valid; word_t exp_data;

  ssr_port_mux dut (.clk_i(clk), .rst_ni(rst_n), .lsu_req_i(lsu_req), .lsu_rsp_o(lsu_rsp),
    .lane_req_i(lane_req), .lane_rsp_o(lane_rsp), .mem_req_o(mreq), .mem_rsp_i(mrsp));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lsu_req = '0; lane_req = '0; mrsp = '0; exp_valid = 0; exp_lane = 0; exp_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      // response for the previous cycle's grant
      mrsp.rvalid = exp_valid;
      mrsp.rdata  = exp_data;
      lsu_req.req  = 1'($urandom); lsu_req.addr = $urandom; lsu_req.we = 1'($urandom);
      lane_req.req = 1'($urandom); lane_req.addr = $urandom; lane_req.we = 1'($urandom);
      mrsp.gnt = ($urandom % 4 != 0);
      #1;
      checks++;
      if (exp_valid) begin
        if (exp_lane ? (lane_rsp.rvalid !== 1 || lsu_rsp.rvalid !== 0 || lane_rsp.rdata !== exp_data)
                     : (lsu_rsp.rvalid !== 1 || lane_rsp.rvalid !== 0 || lsu_rsp.rdata !== exp_data)) begin
          failures++; if (failures < 10) $display("response misrouted");
        end
      end else if (lsu_rsp.rvalid || lane_rsp.rvalid) begin failures++; if (failures < 10) $display("spurious rvalid"); end
      checks++;
      if (lsu_req.req) begin
        if (mreq !== lsu_req || lsu_rsp.gnt !== mrsp.gnt || lane_rsp.gnt !== 0) begin failures++; if (failures < 10) $display("LSU priority broken"); end
        if (lane_req.req) lane_waits++;
        lsu_wins++;
      end else begin
        if (mreq !== lane_req || lane_rsp.gnt !== mrsp.gnt || lsu_rsp.gnt !== 0) begin failures++; if (failures < 10) $display("lane path broken"); end
      end
      @(posedge clk);
      exp_valid = mreq.req && mrsp.gnt;
      exp_lane  = !lsu_req.req;
      exp_data  = mreq.addr ^ 32'h5A5A_0000;
    end
    checks++;
    if (lane_waits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
