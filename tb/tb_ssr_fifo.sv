// tb_ssr_fifo: random pushes and pops (never into a full or out of an empty
// queue) compared with a SystemVerilog queue; checks head data, full, empty,
// fill level and flush.
module tb_ssr_fifo;
  logic clk = 0, rst_n = 0;
  logic flush, push, pop, full, empty;
  logic [31:0] din, dout;
  logic [2:0] usage;
  logic [31:0] q[$];
  int checks = 0, failures = 0;

  ssr_fifo #(.DEPTH(4), .WIDTH(32)) dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush),
    .push_i(push), .data_i(din), .full_o(full), .pop_i(pop), .data_o(dout),
    .empty_o(empty), .usage_o(usage));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flush = 0; push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      checks++;
      if (full !== (q.size() == 4) || empty !== (q.size() == 0) || usage !== 3'(q.size())) begin
        failures++;
        if (failures < 10) $display("flags wrong size=%0d full=%b empty=%b usage=%0d", q.size(), full, empty, usage);
      end
      if (q.size() > 0) begin
        checks++;
        if (dout !== q[0]) begin failures++; if (failures < 10) $display("data %h vs %h", dout, q[0]); end
      end
      flush = ($urandom % 97 == 0);
      push  = 1'($urandom) && !full;
      pop   = 1'($urandom) && !empty;
      din   = $urandom;
      @(posedge clk);
      if (flush) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
