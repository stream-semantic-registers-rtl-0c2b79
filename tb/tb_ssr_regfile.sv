// tb_ssr_regfile: random register addresses (biased towards t0/t1/ft0/ft1),
// valids, stream data and stream readiness with the SSR enable on and off.
// For every port it decides independently whether the access is a stream
// access and checks the steering of valid, ready and data; register file
// writes are tracked in a reference array and read back.
module tb_ssr_regfile;
  import ssr_pkg::*;
  logic clk = 0, rst_n = 0, en;
  regaddr_t raddr [3]; logic rvalid [3]; logic rready [3]; word_t rdata [3];
  regaddr_t waddr [2]; word_t wdata [2]; logic wvalid [2]; logic wready [2];
  regaddr_t sra [3]; logic srv [3]; word_t srd [3]; logic srr [3];
  regaddr_t swa [2]; word_t swd [2]; logic swv [2]; logic swr [2];
  word_t model [64];
  int checks = 0, failures = 0;
  int n_ssr_r = 0, n_ssr_w = 0;

  ssr_regfile dut (.clk_i(clk), .rst_ni(rst_n), .ssr_en_i(en),
    .raddr_i(raddr), .rvalid_i(rvalid), .rready_o(rready), .rdata_o(rdata),
    .waddr_i(waddr), .wdata_i(wdata), .wvalid_i(wvalid), .wready_o(wready),
    .ssr_raddr_o(sra), .ssr_rvalid_o(srv), .ssr_rdata_i(srd), .ssr_rready_i(srr),
    .ssr_waddr_o(swa), .ssr_wdata_o(swd), .ssr_wvalid_o(swv), .ssr_wready_i(swr));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic regaddr_t pick();
    case ($urandom % 6)
      0: return 6'd5;
      1: return 6'd6;
      2: return 6'd32;
      3: return 6'd33;
      default: return 6'($urandom);
    endcase
  endfunction

  function automatic bit stream(regaddr_t a, logic e);
    return e && (a == 6'd5 || a == 6'd6 || a == 6'd32 || a == 6'd33);
  endfunction

  initial begin
    for (int i = 0; i < 64; i++) model[i] = 0;
    en = 0;
    for (int p = 0; p < 3; p++) begin raddr[p] = 0; rvalid[p] = 0; srd[p] = 0; srr[p] = 0; end
    for (int p = 0; p < 2; p++) begin waddr[p] = 0; wdata[p] = 0; wvalid[p] = 0; swr[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      en = ($urandom % 3 != 0);
      for (int p = 0; p < 3; p++) begin
        raddr[p] = pick(); rvalid[p] = 1'($urandom); srd[p] = $urandom; srr[p] = 1'($urandom);
      end
      for (int p = 0; p < 2; p++) begin
        waddr[p] = pick(); wdata[p] = $urandom; wvalid[p] = 1'($urandom); swr[p] = 1'($urandom);
      end
      if (waddr[0] == waddr[1]) wvalid[0] = 0;
      #1;
      for (int p = 0; p < 3; p++) begin
        automatic bit s = stream(raddr[p], en);
        automatic word_t exp_d = s ? srd[p] : (raddr[p] == 0 ? 32'd0 : model[raddr[p]]);
        if (s && rvalid[p]) n_ssr_r++;
        checks++;
        if (srv[p] !== (s && rvalid[p]) || rready[p] !== (s ? srr[p] : 1'b1)
            || rdata[p] !== exp_d || sra[p] !== raddr[p]) begin
          failures++;
          if (failures < 10) $display("read port %0d wrong (addr %0d en %b)", p, raddr[p], en);
        end
      end
      for (int p = 0; p < 2; p++) begin
        automatic bit s = stream(waddr[p], en);
        if (s && wvalid[p]) n_ssr_w++;
        checks++;
        if (swv[p] !== (s && wvalid[p]) || wready[p] !== (s ? swr[p] : 1'b1)
            || swd[p] !== wdata[p] || swa[p] !== waddr[p]) begin
          failures++;
          if (failures < 10) $display("write port %0d wrong (addr %0d en %b)", p, waddr[p], en);
        end
      end
      @(posedge clk);
      for (int p = 0; p < 2; p++)
        if (wvalid[p] && !stream(waddr[p], en) && waddr[p] != 0) model[waddr[p]] = wdata[p];
    end
    checks++;
    if (n_ssr_r == 0 || n_ssr_w == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
