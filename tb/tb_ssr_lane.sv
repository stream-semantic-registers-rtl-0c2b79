// tb_ssr_lane: one data mover lane against a behavioural single-cycle memory
// that grants at random. Runs (1) a 2-D read stream with repeat = 1 and a
// core that reads at random, checking every value against the affine
// pattern; (2) a 1-D read stream with the memory always granting and the
// core always reading, checking one datum per cycle once the FIFO is primed;
// (3) a 3-D write stream, checking memory afterwards; (4) an abort of a
// running read stream (status write with bit 31 set) followed by a fresh
// stream; and reads the status
// register (done flag, direction) and the bound/stride registers back.
module tb_ssr_lane;
  import ssr_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_req_t cfg; word_t cfg_rdata;
  logic rd_valid, rd_ready, wr_valid, wr_ready, done;
  word_t rd_data, wr_data;
  mem_req_t mreq; mem_rsp_t mrsp;
  word_t mem [1024];
  bit    rand_gnt;
  int checks = 0, failures = 0;

  ssr_lane dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .cfg_rdata_o(cfg_rdata),
    .rd_valid_i(rd_valid), .rd_ready_o(rd_ready), .rd_data_o(rd_data),
    .wr_valid_i(wr_valid), .wr_ready_o(wr_ready), .wr_data_i(wr_data),
    .mem_req_o(mreq), .mem_rsp_i(mrsp), .done_o(done));

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural memory: random grant, data one cycle after the grant
  always_comb mrsp.gnt = mreq.req && (!rand_gnt || gnt_coin);
  logic gnt_coin;
  always @(negedge clk) gnt_coin = 1'($urandom);
  always_ff @(posedge clk) begin
    mrsp.rvalid <= mreq.req && mrsp.gnt;
    if (mreq.req && mrsp.gnt) begin
      if (mreq.we) mem[mreq.addr[11:2]] <= mreq.wdata;
      else mrsp.rdata <= mem[mreq.addr[11:2]];
    end
  end

  task automatic cfg_wr(cfg_reg_e idx, word_t d);
    @(negedge clk);
    cfg = '{valid: 1, write: 1, idx: idx, wdata: d};
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic cfg_rd(cfg_reg_e idx, output word_t d);
    @(negedge clk);
    cfg = '{valid: 1, write: 0, idx: idx, wdata: 0};
    #1 d = cfg_rdata;
    @(negedge clk);
    cfg = '0;
  endtask

  initial begin
    word_t v;
    int exp [$];
    cfg = '0; rd_valid = 0; wr_valid = 0; wr_data = 0; rand_gnt = 1; mrsp.rvalid = 0; mrsp.rdata = 0;
    for (int i = 0; i < 1024; i++) mem[i] = 32'hA000_0000 + i;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- (1) 2-D read: 3 columns x 4 rows of a 16-word matrix, row stride 16 words
    cfg_wr(CFG_BOUND0, 2);           // 3 iterations
    cfg_wr(CFG_BOUND1, 3);           // 4 iterations
    cfg_wr(CFG_STRIDE0, 4);
    cfg_wr(CFG_STRIDE1, 64 - 2*4);
    cfg_wr(CFG_REPEAT, 1);
    cfg_rd(CFG_STRIDE1, v); checks++; if (v !== 56) begin failures++; $display("stride1 readback %0d", v); end
    cfg_rd(CFG_BOUND0, v);  checks++; if (v !== 2)  begin failures++; $display("bound0 readback %0d", v); end
    exp.delete();
    for (int r = 0; r < 4; r++) for (int c = 0; c < 3; c++) begin
      exp.push_back(32'hA000_0000 + 100 + r*16 + c); exp.push_back(32'hA000_0000 + 100 + r*16 + c);
    end
    cfg_wr(CFG_READ_2D, 400);
    foreach (exp[k]) begin
      @(negedge clk);
      rd_valid = 1'($urandom);
      while (!(rd_valid && rd_ready)) begin @(negedge clk); rd_valid = 1'($urandom); end
      checks++;
      if (rd_data !== 32'(exp[k])) begin failures++; if (failures < 10) $display("read %0d: %h exp %h", k, rd_data, exp[k]); end
      @(posedge clk); #1 rd_valid = 0;
    end
    repeat (3) @(negedge clk);
    cfg_rd(CFG_STATUS, v);
    checks++; if (!v[ST_DONE] || v[ST_WRITE] || v[ST_DIMS +: 2] != 1) begin failures++; $display("status after read %h", v); end

    // ---- (2) 1-D read at full rate
    rand_gnt = 0;
    cfg_wr(CFG_REPEAT, 0);
    cfg_wr(CFG_BOUND0, 63);
    cfg_wr(CFG_STRIDE0, 4);
    cfg_wr(CFG_READ_1D, 0);
    repeat (3) @(negedge clk);         // prefetch fills the FIFO
    checks++; if (!rd_ready) begin failures++; $display("no data prefetched"); end
    rd_valid = 1;
    for (int k = 0; k < 64; k++) begin
      checks++;
      if (!rd_ready || rd_data !== 32'hA000_0000 + k) begin failures++; if (failures < 10) $display("full-rate read %0d ready %b data %h", k, rd_ready, rd_data); end
      @(negedge clk);
    end
    rd_valid = 0;

    // ---- (3) 3-D write: 2 x 2 x 2 block, strides 4, 32, 256 bytes
    rand_gnt = 1;
    cfg_wr(CFG_BOUND0, 1); cfg_wr(CFG_BOUND1, 1); cfg_wr(CFG_BOUND2, 1);
    cfg_wr(CFG_STRIDE0, 4); cfg_wr(CFG_STRIDE1, 32 - 4); cfg_wr(CFG_STRIDE2, 256 - 32 - 4);
    cfg_wr(CFG_WRITE_3D, 2048);
    for (int k = 0; k < 8; k++) begin
      @(negedge clk);
      wr_valid = 1; wr_data = 32'hB000_0000 + k;
      while (!wr_ready) @(negedge clk);
      @(posedge clk); #1 wr_valid = 0;
    end
    repeat (20) @(negedge clk);
    cfg_rd(CFG_STATUS, v);
    checks++; if (!v[ST_DONE] || !v[ST_WRITE] || v[ST_DIMS +: 2] != 2) begin failures++; $display("status after write %h", v); end
    for (int k = 0; k < 8; k++) begin
      automatic int a = 512 + (k & 1) + ((k >> 1) & 1) * 8 + (k >> 2) * 64;
      checks++;
      if (mem[a] !== 32'hB000_0000 + k) begin failures++; $display("write %0d: mem[%0d]=%h", k, a, mem[a]); end
    end

    // ---- (4) abort: a long read stream is cut off after a few reads by a
    // status write with the done bit set; no request may follow and a new
    // stream must start clean
    cfg_wr(CFG_BOUND0, 255);
    cfg_wr(CFG_STRIDE0, 4);
    cfg_wr(CFG_READ_1D, 0);
    repeat (10) @(negedge clk);
    cfg_wr(CFG_STATUS, 32'h8000_0000);
    checks++; if (mreq.req) begin failures++; $display("request after abort"); end
    for (int k = 0; k < 5; k++) begin
      @(negedge clk);
      checks++; if (mreq.req || rd_ready) begin failures++; $display("lane still active after abort"); end
    end
    checks++; if (!done) begin failures++; $display("done not set after abort"); end
    cfg_wr(CFG_BOUND0, 3);
    cfg_wr(CFG_READ_1D, 40);
    for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      rd_valid = 1;
      while (!rd_ready) @(negedge clk);
      checks++;
      if (rd_data !== 32'hA000_0000 + 10 + k) begin failures++; $display("read after abort %0d: %h", k, rd_data); end
      @(posedge clk); #1 rd_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
