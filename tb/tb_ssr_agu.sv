// tb_ssr_agu: random 1- to 4-dimensional patterns. Software-style strides
// are derived from absolute per-dimension steps S_i as
// stride_i = S_i - sum_{j<i} bound_j * S_j, and every generated address is
// compared with base + sum_i idx_i * S_i from a plain nested loop. Checks one
// address per cycle while enabled, done on exactly the last address and
// valid falling afterwards.
module tb_ssr_agu;
  logic clk = 0, rst_n = 0;
  logic start, en;
  logic [31:0] base;
  logic [1:0]  dims;
  logic [15:0] bound [4];
  logic [31:0] stride [4];
  logic [31:0] addr;
  logic valid, done;
  int checks = 0, failures = 0;

  ssr_agu dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .abort_i(1'b0), .base_i(base),
    .dims_i(dims), .bound_i(bound), .stride_i(stride), .en_i(en), .addr_o(addr),
    .valid_o(valid), .done_o(done));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int S [4];
    int exp_addr [$];
    int cycles;
    start = 0; en = 0; base = 0; dims = 0;
    for (int i = 0; i < 4; i++) begin bound[i] = 0; stride[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int nd;
      @(negedge clk);
      nd = 1 + ($urandom % 4);
      dims = 2'(nd - 1);
      base = $urandom & 32'h0000_FFFC;
      for (int i = 0; i < 4; i++) begin
        bound[i] = 16'($urandom % 4);
        S[i] = 4 * (int'($urandom % 64) - 20);
      end
      for (int i = 0; i < 4; i++) begin
        automatic int acc = S[i];
        for (int j = 0; j < i; j++) acc -= int'(bound[j]) * S[j];
        stride[i] = acc;
      end
      exp_addr.delete();
      for (int i3 = 0; i3 <= (nd > 3 ? int'(bound[3]) : 0); i3++)
        for (int i2 = 0; i2 <= (nd > 2 ? int'(bound[2]) : 0); i2++)
          for (int i1 = 0; i1 <= (nd > 1 ? int'(bound[1]) : 0); i1++)
            for (int i0 = 0; i0 <= int'(bound[0]); i0++)
              exp_addr.push_back(int'(base) + i0*S[0] + i1*S[1] + i2*S[2] + i3*S[3]);
      start = 1;
      @(negedge clk);
      start = 0;
      cycles = 0;
      for (int k = 0; k < exp_addr.size(); k++) begin
        // random idle cycles in the first half of the tests
        if (t < 30) while ($urandom % 3 == 0) begin en = 0; @(negedge clk); end
        en = 1;
        checks++;
        if (!valid || addr !== 32'(exp_addr[k])) begin
          failures++;
          if (failures < 10) $display("t%0d k%0d addr %h exp %h valid %b", t, k, addr, exp_addr[k], valid);
        end
        checks++;
        if (done !== (k == exp_addr.size() - 1)) begin failures++; if (failures < 10) $display("done wrong at %0d", k); end
        @(negedge clk);
        cycles++;
      end
      en = 0;
      checks++;
      if (valid) begin failures++; $display("still valid after pattern"); end
      if (t >= 30) begin
        checks++;
        if (cycles != exp_addr.size()) begin failures++; $display("rate wrong"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
