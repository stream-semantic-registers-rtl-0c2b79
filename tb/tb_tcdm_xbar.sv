// tb_tcdm_xbar: four masters issue random reads and writes into eight
// banks (small banks, reference memory in the testbench). Checks that each
// bank grants at most one master per cycle, that a lone requester is always
// granted, that no master waits more than NUM_MASTERS-1 cycles (round
// robin), that reads return the right word one cycle after the grant, and
// counts bank conflicts.
module tb_tcdm_xbar;
  import ssr_pkg::*;
  localparam int NM = 4, NB = 8, BW = 16;
  logic clk = 0, rst_n = 0;
  mem_req_t req [NM];
  mem_rsp_t rsp [NM];
  logic b_req [NB]; logic b_we [NB]; logic [3:0] b_addr [NB]; logic [3:0] b_be [NB];
  word_t b_wdata [NB]; word_t b_rdata [NB];
  word_t model [NB*BW];
  int checks = 0, failures = 0, conflicts = 0;
  int wait_cnt [NM];
  bit exp_rd [NM]; word_t exp_data [NM];

  tcdm_xbar #(.NUM_MASTERS(NM), .NUM_BANKS(NB), .BANK_WORDS(BW)) dut (.clk_i(clk), .rst_ni(rst_n),
    .m_req_i(req), .m_rsp_o(rsp), .b_req_o(b_req), .b_we_o(b_we), .b_addr_o(b_addr),
    .b_be_o(b_be), .b_wdata_o(b_wdata), .b_rdata_i(b_rdata));

  for (genvar b = 0; b < NB; b++) begin : g_bank
    tcdm_bank #(.WORDS(BW)) i_bank (.clk_i(clk), .req_i(b_req[b]), .we_i(b_we[b]),
      .addr_i(b_addr[b]), .be_i(b_be[b]), .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end

  always #5 clk = ~clk;
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < NM; m++) begin req[m] = '0; wait_cnt[m] = 0; exp_rd[m] = 0; exp_data[m] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise memory through master 0
    for (int a = 0; a < NB*BW; a++) begin
      @(negedge clk);
      req[0] = '{req: 1, we: 1, be: 4'hF, addr: 32'(a*4), wdata: 32'(a * 32'h01010101)};
      model[a] = 32'(a * 32'h01010101);
    end
    @(negedge clk); req[0] = '0;
    for (int it = 0; it < 5000; it++) begin
      int nreq [NB];
      @(negedge clk);
      for (int m = 0; m < NM; m++) begin
        if (!req[m].req || rsp[m].gnt) begin   // previous request done: new one
          req[m].req   = ($urandom % 4 != 0);
          req[m].we    = 1'($urandom);
          req[m].be    = 4'hF;
          req[m].addr  = 32'(($urandom % (NB*BW)) * 4);
          req[m].wdata = $urandom;
        end
      end
      // crude but independent: hold requests; check after settle
      #1;
      for (int b = 0; b < NB; b++) nreq[b] = 0;
      for (int m = 0; m < NM; m++) if (req[m].req) nreq[(req[m].addr >> 2) % NB]++;
      for (int b = 0; b < NB; b++) if (nreq[b] > 1) conflicts++;
      for (int b = 0; b < NB; b++) begin
        automatic int g = 0;
        for (int m = 0; m < NM; m++) if (rsp[m].gnt && ((req[m].addr >> 2) % NB) == b) g++;
        checks++;
        if (g != (nreq[b] > 0 ? 1 : 0)) begin failures++; if (failures < 10) $display("bank %0d granted %0d of %0d", b, g, nreq[b]); end
      end
      for (int m = 0; m < NM; m++) begin
        if (exp_rd[m]) begin
          checks++;
          if (!rsp[m].rvalid || rsp[m].rdata !== exp_data[m]) begin failures++; if (failures < 10) $display("m%0d read %h exp %h", m, rsp[m].rdata, exp_data[m]); end
        end
        if (req[m].req && !rsp[m].gnt) wait_cnt[m]++; else wait_cnt[m] = 0;
        checks++;
        if (wait_cnt[m] >= NM) begin failures++; $display("m%0d starved", m); end
      end
      @(posedge clk);
      for (int m = 0; m < NM; m++) begin
        exp_rd[m] = req[m].req && rsp[m].gnt && !req[m].we;
        exp_data[m] = model[req[m].addr >> 2];
        if (req[m].req && rsp[m].gnt && req[m].we) model[req[m].addr >> 2] = req[m].wdata;
      end
    end
    checks++;
    if (conflicts == 0) failures++;
    $display("bank conflicts: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
