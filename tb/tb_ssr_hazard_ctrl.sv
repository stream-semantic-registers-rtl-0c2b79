// tb_ssr_hazard_ctrl: applies every combination of the hazard inputs and
// checks the three outputs against the stall rules written out case by case.
module tb_ssr_hazard_ctrl;
  logic uses, csrp, br;
  logic [2:0] rv, rr;
  logic [1:0] wv, wr;
  logic ok, sid, swb;
  int checks = 0, failures = 0;

  ssr_hazard_ctrl dut (.id_uses_ssr_reg_i(uses), .csr_ssrcfg_pending_i(csrp),
    .branch_pending_i(br), .rd_valid_i(rv), .rd_ready_i(rr), .wr_valid_i(wv),
    .wr_ready_i(wr), .id_issue_ok_o(ok), .stall_id_o(sid), .stall_wb_o(swb));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << 13); v++) begin
      logic exp_ok, exp_sid, exp_swb;
      {uses, csrp, br, rv, rr, wv, wr} = 13'(v);
      #1;
      exp_ok = 1;
      if (uses && csrp) exp_ok = 0;
      if (uses && br)   exp_ok = 0;
      exp_sid = !exp_ok;
      for (int p = 0; p < 3; p++) if (rv[p] && !rr[p]) exp_sid = 1;
      exp_swb = 0;
      for (int p = 0; p < 2; p++) if (wv[p] && !wr[p]) exp_swb = 1;
      checks++;
      if ({ok, sid, swb} !== {exp_ok, exp_sid, exp_swb}) begin
        failures++;
        if (failures < 10) $display("mismatch at %b", 13'(v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
