// tb_ssr_data_mover: the data mover of one core with two behavioural
// single-cycle memories (random grants) on its two ports. Configures both
// lanes through LSU stores to the configuration window, reads two streams
// through read ports 0 and 1 (ft0 -> lane 0, ft1 -> lane 1), checks that
// lane 0 uses memory port 0 and lane 1 memory port 1, that ordinary LSU
// loads reach port 0 in between, and runs a write stream through write
// port 1 into t1 (lane 1), checking memory afterwards.
module tb_ssr_data_mover;
  import ssr_pkg::*;
  localparam word_t CFG = 32'h0001_0000;
  logic clk = 0, rst_n = 0;
  regaddr_t ra [3]; logic rv [3]; logic rr [3]; word_t rd [3];
  regaddr_t wa [2]; word_t wd [2]; logic wv [2]; logic wr [2];
  mem_req_t lsu_req; mem_rsp_t lsu_rsp;
  mem_req_t mreq [2]; mem_rsp_t mrsp [2];
  logic done [2];
  word_t mem [2][1024];   // port 0 and port 1 see distinct memories
  logic coin [2];
  int checks = 0, failures = 0;

  ssr_data_mover dut (.clk_i(clk), .rst_ni(rst_n),
    .ssr_raddr_i(ra), .ssr_rvalid_i(rv), .ssr_rready_o(rr), .ssr_rdata_o(rd),
    .ssr_waddr_i(wa), .ssr_wdata_i(wd), .ssr_wvalid_i(wv), .ssr_wready_o(wr),
    .lsu_req_i(lsu_req), .lsu_rsp_o(lsu_rsp), .mem_req_o(mreq), .mem_rsp_i(mrsp),
    .lane_done_o(done));

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar p = 0; p < 2; p++) begin : g_mem
    always @(negedge clk) coin[p] = ($urandom % 4 != 0);
    always_comb mrsp[p].gnt = mreq[p].req && coin[p];
    always_ff @(posedge clk) begin
      mrsp[p].rvalid <= mreq[p].req && mrsp[p].gnt;
      if (mreq[p].req && mrsp[p].gnt) begin
        if (mreq[p].we) mem[p][mreq[p].addr[11:2]] <= mreq[p].wdata;
        else mrsp[p].rdata <= mem[p][mreq[p].addr[11:2]];
      end
    end
  end

  task automatic lsu(bit we, word_t addr, word_t d, output word_t q);
    @(negedge clk);
    lsu_req = '{req: 1, we: we, be: 4'hF, addr: addr, wdata: d};
    #1;
    while (!lsu_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    lsu_req = '0;
    #1;
    q = lsu_rsp.rdata;
    checks++;
    if (!lsu_rsp.rvalid) begin failures++; $display("no LSU response"); end
  endtask

  task automatic cfg(int lane, cfg_reg_e r, word_t d);
    word_t q;
    lsu(1, CFG + word_t'(lane * 128 + int'(r) * 4), d, q);
  endtask

  initial begin
    word_t q;
    for (int p = 0; p < 3; p++) begin ra[p] = 0; rv[p] = 0; end
    for (int p = 0; p < 2; p++) begin wa[p] = 0; wd[p] = 0; wv[p] = 0; end
    lsu_req = '0;
    for (int p = 0; p < 2; p++) begin
      mrsp[p].rvalid = 0; mrsp[p].rdata = 0;
      for (int i = 0; i < 1024; i++) mem[p][i] = 32'((p + 1) * 32'h1000_0000 + i);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // lane 0: 40 words from word 10; lane 1: 40 words from word 100, stride 2 words
    cfg(0, CFG_BOUND0, 39); cfg(0, CFG_STRIDE0, 4); cfg(0, CFG_READ_1D, 40);
    cfg(1, CFG_BOUND0, 39); cfg(1, CFG_STRIDE0, 8); cfg(1, CFG_READ_1D, 400);
    lsu(0, CFG + 128 + 8, 0, q);
    checks++; if (q !== 39) begin failures++; $display("bound readback %0d", q); end
    for (int i = 0; i < 40; i++) begin
      automatic bit [1:0] pend = 2'b11;
      @(negedge clk);
      ra[0] = REG_FT0; ra[1] = REG_FT1;
      while (pend != 0) begin
        rv[0] = pend[0]; rv[1] = pend[1];
        #1;
        if (pend[0] && rr[0]) begin
          checks++; pend[0] = 0;
          if (rd[0] !== 32'h1000_0000 + 10 + i) begin failures++; if (failures < 10) $display("lane0 %0d: %h", i, rd[0]); end
        end
        if (pend[1] && rr[1]) begin
          checks++; pend[1] = 0;
          if (rd[1] !== 32'h2000_0000 + 100 + 2*i) begin failures++; if (failures < 10) $display("lane1 %0d: %h", i, rd[1]); end
        end
        @(negedge clk);
      end
      rv[0] = 0; rv[1] = 0;
      if (i % 10 == 5) begin
        lsu(0, 32'(4 * (500 + i)), 0, q);     // plain load goes to port 0
        checks++; if (q !== 32'h1000_0000 + 500 + i) begin failures++; $display("LSU load %h", q); end
      end
    end
    // write stream on lane 1 through write port 1 (t1)
    cfg(1, CFG_BOUND0, 15); cfg(1, CFG_STRIDE0, 4); cfg(1, CFG_WRITE_1D, 800 * 4);
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      wa[1] = REG_T1; wd[1] = 32'hBEEF_0000 + i; wv[1] = 1;
      #1;
      while (!wr[1]) begin @(negedge clk); #1; end
      @(negedge clk); wv[1] = 0;
    end
    repeat (30) @(negedge clk);
    checks++; if (!done[1] || !done[0]) begin failures++; $display("lanes not done"); end
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (mem[1][800 + i] !== 32'hBEEF_0000 + i) begin failures++; if (failures < 10) $display("write %0d: %h", i, mem[1][800 + i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
