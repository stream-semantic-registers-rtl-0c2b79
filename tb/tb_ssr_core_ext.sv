// tb_ssr_core_ext: the SSR additions of one core with two behavioural
// single-cycle memories (one shared image). Checks that ssrcfg is off after
// reset so ft0 is an ordinary register, configures two read streams through
// LSU stores, enables ssrcfg with a CSR write (checking that decode is held
// while the write is pending), runs a 200-element dot product with ft0/ft1
// on read ports 0/1 at one instruction per cycle once primed, checks the
// result, disables ssrcfg and checks ft0 is an ordinary register again.
module tb_ssr_core_ext;
  import ssr_pkg::*;
  localparam word_t CFG = 32'h0001_0000;
  localparam int N = 200;
  logic clk = 0, rst_n = 0;
  core_in_t ci; core_out_t co;
  mem_req_t mreq [2]; mem_rsp_t mrsp [2];
  word_t mem [2048];
  int checks = 0, failures = 0;

  ssr_core_ext dut (.clk_i(clk), .rst_ni(rst_n), .core_i(ci), .core_o(co),
    .mem_req_o(mreq), .mem_rsp_i(mrsp));

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // two ports into one memory; a write and a read to the same word never collide here
  for (genvar p = 0; p < 2; p++) begin : g_mem
    always_comb mrsp[p].gnt = mreq[p].req;
    always_ff @(posedge clk) begin
      mrsp[p].rvalid <= mreq[p].req;
      if (mreq[p].req) begin
        if (mreq[p].we) mem[mreq[p].addr[12:2]] <= mreq[p].wdata;
        else mrsp[p].rdata <= mem[mreq[p].addr[12:2]];
      end
    end
  end

  task automatic store(word_t a, word_t d);
    @(negedge clk);
    ci.lsu_req = '{req: 1, we: 1, be: 4'hF, addr: a, wdata: d};
    @(negedge clk);
    ci.lsu_req = '0;
  endtask

  task automatic plain_rw(word_t d);
    @(negedge clk);
    ci.waddr[0] = REG_FT0; ci.wdata[0] = d; ci.wvalid = 2'b01;
    @(negedge clk);
    ci.wvalid = 0;
    ci.raddr[0] = REG_FT0; ci.rvalid = 3'b001;
    #1;
    checks++;
    if (co.rdata[0] !== d || !co.rready[0]) begin failures++; $display("ft0 not a plain register: %h", co.rdata[0]); end
    @(negedge clk);
    ci.rvalid = 0;
  endtask

  initial begin
    word_t sum, ref_sum;
    int t0;
    ci = '0;
    for (int p = 0; p < 2; p++) begin mrsp[p].rvalid = 0; mrsp[p].rdata = 0; end
    for (int i = 0; i < 2048; i++) mem[i] = $urandom % 1000;
    repeat (2) @(posedge clk);
    rst_n = 1;
    checks++; if (co.ssr_en) begin failures++; $display("ssrcfg set after reset"); end
    plain_rw(32'h1111_2222);
    store(CFG + 0*128 + 2*4, N - 1); store(CFG + 0*128 + 6*4, 4); store(CFG + 0*128 + 24*4, 0);
    store(CFG + 1*128 + 2*4, N - 1); store(CFG + 1*128 + 6*4, 4); store(CFG + 1*128 + 24*4, 1024 * 4);
    // csrwi ssrcfg, 1
    @(negedge clk);
    ci.csr = '{valid: 1, addr: 12'h7C0, op: CSR_OP_WRITE, wdata: 1};
    @(negedge clk);
    ci.csr = '0;
    ci.csr_ssrcfg_pending = 1;
    ci.raddr[0] = REG_FT0; ci.raddr[1] = REG_FT1; ci.id_uses_ssr_reg = 1;
    ci.rvalid = 3'b011;
    #1;
    checks++;
    if (co.id_issue_ok || !co.stall_id) begin failures++; $display("no decode hold during pending ssrcfg write"); end
    @(negedge clk);
    ci.csr_ssrcfg_pending = 0;
    checks++; if (!co.ssr_en) begin failures++; $display("ssrcfg not set"); end
    sum = 0;
    t0 = 0;
    for (int i = 0; i < N; i++) begin
      automatic bit [1:0] pend = 2'b11;
      automatic word_t a = 0, b = 0;
      while (pend != 0) begin
        ci.rvalid = {1'b0, pend};
        #1;
        if (pend[0] && co.rready[0]) begin a = co.rdata[0]; pend[0] = 0; end
        if (pend[1] && co.rready[1]) begin b = co.rdata[1]; pend[1] = 0; end
        @(negedge clk);
        t0++;
      end
      sum += a * b;
      checks++;
      if (a !== mem[i] || b !== mem[1024 + i]) begin failures++; if (failures < 10) $display("element %0d wrong", i); end
    end
    ci.rvalid = 0; ci.id_uses_ssr_reg = 0;
    ref_sum = 0;
    for (int i = 0; i < N; i++) ref_sum += mem[i] * mem[1024 + i];
    checks++; if (sum !== ref_sum) begin failures++; $display("dot %0d vs %0d", sum, ref_sum); end
    checks++; if (t0 > N + 3) begin failures++; $display("%0d cycles for %0d instructions", t0, N); end
    checks++; if (co.lane_done !== 2'b11) begin failures++; $display("lanes not done"); end
    // csrwi ssrcfg, 0
    @(negedge clk);
    ci.csr = '{valid: 1, addr: 12'h7C0, op: CSR_OP_CLEAR, wdata: 1};
    @(negedge clk);
    ci.csr = '0;
    checks++; if (co.ssr_en) begin failures++; $display("ssrcfg not cleared"); end
    plain_rw(32'h3333_4444);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
