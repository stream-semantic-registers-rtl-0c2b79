// tb_ssr_switch: random register addresses, valids and lane readiness on
// three read and two write streams. For every stream it works out which
// lane it targets and whether it is the lowest-numbered valid stream for
// that lane, and checks the routed valid, ready and data on both sides.
module tb_ssr_switch;
  import ssr_pkg::*;
  regaddr_t raddr [3]; logic rvalid [3]; logic rready [3]; word_t rdata [3];
  regaddr_t waddr [2]; word_t wdata [2]; logic wvalid [2]; logic wready [2];
  logic lrv [2]; logic lrr [2]; word_t lrd [2];
  logic lwv [2]; logic lwr [2]; word_t lwd [2];
  int checks = 0, failures = 0;
  regaddr_t regs [4] = '{REG_T0, REG_T1, REG_FT0, REG_FT1};

  ssr_switch dut (.raddr_i(raddr), .rvalid_i(rvalid), .rready_o(rready), .rdata_o(rdata),
    .waddr_i(waddr), .wdata_i(wdata), .wvalid_i(wvalid), .wready_o(wready),
    .lane_rvalid_o(lrv), .lane_rready_i(lrr), .lane_rdata_i(lrd),
    .lane_wvalid_o(lwv), .lane_wready_i(lwr), .lane_wdata_o(lwd));

  function automatic int tgt(regaddr_t a);
    return (a == 6'd6 || a == 6'd33) ? 1 : 0;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      bit taken_r [2]; bit taken_w [2];
      for (int p = 0; p < 3; p++) begin raddr[p] = regs[$urandom % 4]; rvalid[p] = 1'($urandom); end
      for (int p = 0; p < 2; p++) begin waddr[p] = regs[$urandom % 4]; wvalid[p] = 1'($urandom); wdata[p] = $urandom; end
      for (int l = 0; l < 2; l++) begin lrr[l] = 1'($urandom); lwr[l] = 1'($urandom); lrd[l] = $urandom; end
      #1;
      taken_r = '{0, 0}; taken_w = '{0, 0};
      for (int p = 0; p < 3; p++) begin
        automatic bit first = rvalid[p] && !taken_r[tgt(raddr[p])];
        if (first) taken_r[tgt(raddr[p])] = 1;
        checks++;
        if (rready[p] !== (first && lrr[tgt(raddr[p])])) begin failures++; if (failures < 10) $display("rready %0d", p); end
        checks++;
        if (rvalid[p] && rdata[p] !== lrd[tgt(raddr[p])]) begin failures++; if (failures < 10) $display("rdata %0d", p); end
      end
      for (int l = 0; l < 2; l++) begin
        checks++;
        if (lrv[l] !== taken_r[l]) begin failures++; if (failures < 10) $display("lane rvalid %0d", l); end
      end
      for (int p = 0; p < 2; p++) begin
        automatic bit first = wvalid[p] && !taken_w[tgt(waddr[p])];
        if (first) begin
          taken_w[tgt(waddr[p])] = 1;
          checks++;
          if (lwd[tgt(waddr[p])] !== wdata[p]) begin failures++; if (failures < 10) $display("wdata %0d", p); end
        end
        checks++;
        if (wready[p] !== (first && lwr[tgt(waddr[p])])) begin failures++; if (failures < 10) $display("wready %0d", p); end
      end
      for (int l = 0; l < 2; l++) begin
        checks++;
        if (lwv[l] !== taken_w[l]) begin failures++; if (failures < 10) $display("lane wvalid %0d", l); end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
