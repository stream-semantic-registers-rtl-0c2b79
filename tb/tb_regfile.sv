// tb_regfile: random writes on both write ports and reads on all three read
// ports of the 64 x 32 register file, compared with a reference array.
// Checks that x0 stays zero and that write port 1 wins over port 0 on the
// same address.
module tb_regfile;
  logic clk = 0, rst_n = 0;
  logic [5:0]  raddr [3];
  logic [31:0] rdata [3];
  logic [5:0]  waddr [2];
  logic [31:0] wdata [2];
  logic        we    [2];
  logic [31:0] model [64];
  int checks = 0, failures = 0;

  regfile dut (.clk_i(clk), .rst_ni(rst_n), .raddr_i(raddr), .rdata_o(rdata),
               .waddr_i(waddr), .wdata_i(wdata), .we_i(we));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) model[i] = 0;
    for (int p = 0; p < 2; p++) begin we[p] = 0; waddr[p] = 0; wdata[p] = 0; end
    for (int p = 0; p < 3; p++) raddr[p] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        we[p]    = 1'($urandom);
        waddr[p] = 6'($urandom);
        wdata[p] = $urandom;
      end
      if (it % 17 == 0) begin waddr[1] = waddr[0]; we[0] = 1; we[1] = 1; end
      if (it % 29 == 0) begin waddr[0] = 0; we[0] = 1; end
      for (int p = 0; p < 3; p++) raddr[p] = 6'($urandom);
      #1;
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (rdata[p] !== (raddr[p] == 0 ? 32'd0 : model[raddr[p]])) begin
          failures++;
          if (failures < 10) $display("read mismatch port %0d addr %0d: %h vs %h", p, raddr[p], rdata[p], model[raddr[p]]);
        end
      end
      @(posedge clk);
      for (int p = 0; p < 2; p++) if (we[p] && waddr[p] != 0) model[waddr[p]] = wdata[p];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
