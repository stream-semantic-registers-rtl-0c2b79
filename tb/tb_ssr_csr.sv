// tb_ssr_csr: exercises the ssrcfg CSR with random read/write/set/clear
// accesses to 0x7C0 and to other addresses; checks reset value, the hit
// flag, the returned old value and the enable bit against a one-bit model.
module tb_ssr_csr;
  import ssr_pkg::*;
  logic clk = 0, rst_n = 0;
  csr_req_t csr;
  logic hit, en;
  word_t rdata;
  logic model;
  int checks = 0, failures = 0;

  ssr_csr dut (.clk_i(clk), .rst_ni(rst_n), .csr_i(csr), .csr_hit_o(hit),
               .csr_rdata_o(rdata), .ssr_en_o(en));

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    csr = '0;
    model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (en !== 1'b0) begin failures++; $display("not disabled after reset"); end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      csr.valid = 1'($urandom);
      csr.addr  = ($urandom % 4 == 0) ? 12'($urandom) : 12'h7C0;
      csr.op    = csr_op_e'($urandom % 4);
      csr.wdata = $urandom;
      #1;
      checks++;
      if (hit !== (csr.valid && csr.addr == 12'h7C0)) begin failures++; $display("hit wrong"); end
      checks++;
      if (rdata !== {31'd0, model} || en !== model) begin failures++; $display("value wrong"); end
      @(posedge clk);
      if (csr.valid && csr.addr == 12'h7C0) begin
        case (csr.op)
          CSR_OP_WRITE: model = csr.wdata[0];
          CSR_OP_SET:   model = model | csr.wdata[0];
          CSR_OP_CLEAR: model = model & ~csr.wdata[0];
          default: ;
        endcase
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
