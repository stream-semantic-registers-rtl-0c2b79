// tb_tcdm_bank: random byte-masked writes and reads of one TCDM bank against
// a reference array; checks that read data arrives one cycle after the
// request.
module tb_tcdm_bank;
  logic clk = 0, req, we;
  logic [7:0] addr;
  logic [3:0] be;
  logic [31:0] wdata, rdata;
  logic [31:0] model [256];
  int checks = 0, failures = 0;

  tcdm_bank #(.WORDS(256)) dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr),
    .be_i(be), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; addr = 0; be = 0; wdata = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 8'(i); be = 4'hF; wdata = $urandom; model[i] = wdata;
    end
    for (int it = 0; it < 4000; it++) begin
      logic [31:0] exp_d;
      bit rd;
      @(negedge clk);
      req = 1'($urandom); we = 1'($urandom); addr = 8'($urandom); be = 4'($urandom); wdata = $urandom;
      rd = req && !we;
      exp_d = model[addr];
      @(posedge clk);
      if (req && we) for (int b = 0; b < 4; b++) if (be[b]) model[addr][8*b +: 8] = wdata[8*b +: 8];
      #1;
      if (rd) begin
        checks++;
        if (rdata !== exp_d) begin failures++; if (failures < 10) $display("addr %0d: %h vs %h", addr, rdata, exp_d); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
