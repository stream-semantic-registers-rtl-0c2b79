// tb_ssr_cluster: end-to-end test of the two-core SSR cluster at its default
// parameters (64 kB TCDM, 8 banks, 2 cores).
//
// Each core's pipeline is replaced by a behavioural driver that issues what
// the RI5CY pipeline would: register file port accesses (one instruction per
// cycle, each port held until its own handshake completes), CSR writes to
// ssrcfg, LSU loads and stores, and the hazard hints. The programs follow
// the paper's usage pattern: configure the address generators with stores,
// enable ssrcfg, run the hot loop on ft0/ft1 (or t0/t1), disable ssrcfg.
// Workloads (integer arithmetic stands in for the FPU, which is outside the
// design):
//  1. dot product over 2048 values, split between the two cores, run again
//     on core 0 alone to measure the hot-loop rate (one instruction per
//     cycle);
//  2. GEMV 64x64 on core 0 (2-D pattern that re-reads x for every row, y
//     stored with LSU stores between rows) while core 1 runs
//  3. ReLU over 1024 values with a read stream on t0 and a write stream on
//     t1;
//  4. a repeat test, each a[i] used twice against b[2i], b[2i+1];
//  5. t0 as an ordinary register while ssrcfg is clear.
// Results are compared with values computed here. The mechanisms the design
// has are counted and each must occur: stream reads, stream writes, read
// back-pressure, bank conflicts, LSU/lane-0 contention on the shared port,
// decode holds after an ssrcfg write, configuration accesses, status
// polling, repeat, multi-dimensional patterns, plain use of t0.
module tb_ssr_cluster;
  import ssr_pkg::*;

  localparam int NC = 2;
  localparam word_t CFG = 32'h0001_0000;
  localparam int N_DOT = 2048, N_RELU = 1024, GM = 64, GN = 64, N_REP = 64;
  // word addresses of the data in the TCDM
  localparam int A_DOT = 0, B_DOT = 2048, A_MAT = 4096, X_VEC = 8192, Y_VEC = 8256,
                 X_RELU = 8448, Y_RELU = 9472, A_REP = 10496, B_REP = 10560,
                 STRESS = 12288;

  logic clk = 0, rst_n = 0;
  core_in_t  core_i [NC];
  core_out_t core_o [NC];
  word_t image [16384];
  event load_ev, dump_ev;
  longint cycle = 0;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_ssr_rd = 0, n_ssr_wr = 0, n_rd_stall = 0, n_wr_stall = 0, n_conflict = 0,
      n_mux_contention = 0, n_hold = 0, n_cfg = 0, n_poll = 0, n_repeat = 0,
      n_multidim = 0, n_plain_t0 = 0;

  ssr_cluster dut (.clk_i(clk), .rst_ni(rst_n), .core_i(core_i), .core_o(core_o));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // backdoor load / dump of the TCDM (word-interleaved over 8 banks)
  for (genvar b = 0; b < 8; b++) begin : g_bd
    always @(load_ev) for (int r = 0; r < 2048; r++) dut.g_bank[b].i_bank.mem[r] = image[r*8 + b];
    always @(dump_ev) for (int r = 0; r < 2048; r++) image[r*8 + b] = dut.g_bank[b].i_bank.mem[r];
  end

  // observers
  always @(posedge clk) if (rst_n) begin
    automatic int per_bank [8] = '{default: 0};
    for (int c = 0; c < NC; c++) begin
      for (int p = 0; p < NR; p++) begin
        if (core_i[c].rvalid[p] && core_o[c].id_issue_ok && core_o[c].ssr_en && is_ssr_reg(core_i[c].raddr[p])) begin
          if (core_o[c].rready[p]) n_ssr_rd++; else n_rd_stall++;
        end
        if (core_i[c].rvalid[p] && !core_o[c].id_issue_ok) n_hold++;
      end
      for (int p = 0; p < NW; p++)
        if (core_i[c].wvalid[p] && core_o[c].ssr_en && is_ssr_reg(core_i[c].waddr[p])) begin
          if (core_o[c].wready[p]) n_ssr_wr++; else n_wr_stall++;
        end
    end
    for (int m = 0; m < 2*NC; m++)
      if (dut.m_req[m].req) per_bank[dut.m_req[m].addr[4:2]]++;
    foreach (per_bank[b]) if (per_bank[b] > 1) n_conflict++;
    for (int c = 0; c < NC; c++) ;
    if (dut.g_core[0].i_ssr.i_data_mover.i_port_mux.lsu_req_i.req &&
        dut.g_core[0].i_ssr.i_data_mover.i_port_mux.lane_req_i.req) n_mux_contention++;
    if (dut.g_core[1].i_ssr.i_data_mover.i_port_mux.lsu_req_i.req &&
        dut.g_core[1].i_ssr.i_data_mover.i_port_mux.lane_req_i.req) n_mux_contention++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ driver tasks
  task automatic idle(int c);
    core_i[c] = '0;
  endtask

  task automatic lsu(int c, bit we, word_t addr, word_t wdata, output word_t rdata);
    @(negedge clk);
    core_i[c].lsu_req = '{req: 1, we: we, be: 4'hF, addr: addr, wdata: wdata};
    #1;
    while (!core_o[c].lsu_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    core_i[c].lsu_req = '0;
    #1;
    rdata = core_o[c].lsu_rsp.rdata;
    if (!core_o[c].lsu_rsp.rvalid) begin failures++; $display("core %0d: no LSU response", c); end
    if (addr >= CFG) n_cfg++;
  endtask

  task automatic store(int c, word_t addr, word_t d);
    word_t dummy;
    lsu(c, 1, addr, d, dummy);
  endtask

  task automatic load(int c, word_t addr, output word_t d);
    lsu(c, 0, addr, 0, d);
  endtask

  function automatic word_t cfg_addr(int lane, cfg_reg_e r);
    return CFG + word_t'(lane * 128) + word_t'(int'(r) * 4);
  endfunction

  task automatic set_ssr(int c, bit en);
    @(negedge clk);
    core_i[c].csr = '{valid: 1, addr: 12'h7C0, op: CSR_OP_WRITE, wdata: word_t'(en)};
    @(negedge clk);
    core_i[c].csr = '0;
    // the CSR write is still in flight for one more cycle
    core_i[c].csr_ssrcfg_pending = 1;
  endtask

  // One instruction: read ports selected by rmask, write ports by wmask.
  // Holds each port until its handshake completes; returns read data.
  task automatic instr(int c, regaddr_t ra [NR], bit [NR-1:0] rmask,
                       regaddr_t wa [NW], word_t wd [NW], bit [NW-1:0] wmask,
                       output word_t rd [NR]);
    bit [NR-1:0] rpend = rmask;
    bit [NW-1:0] wpend = wmask;
    // called at a falling edge; the instruction occupies the next cycle(s)
    core_i[c].id_uses_ssr_reg = 0;
    for (int p = 0; p < NR; p++) begin
      core_i[c].raddr[p] = ra[p];
      if (rmask[p] && is_ssr_reg(ra[p])) core_i[c].id_uses_ssr_reg = 1;
    end
    for (int p = 0; p < NW; p++) begin core_i[c].waddr[p] = wa[p]; core_i[c].wdata[p] = wd[p]; end
    while (rpend != 0 || wpend != 0) begin
      core_i[c].rvalid = rpend;
      core_i[c].wvalid = wpend;
      #1;
      for (int p = 0; p < NR; p++)
        if (rpend[p] && core_o[c].rready[p] && core_o[c].id_issue_ok) begin
          rd[p] = core_o[c].rdata[p]; rpend[p] = 0;
        end
      for (int p = 0; p < NW; p++) if (wpend[p] && core_o[c].wready[p]) wpend[p] = 0;
      @(negedge clk);
      core_i[c].csr_ssrcfg_pending = 0;
    end
    core_i[c].rvalid = '0;
    core_i[c].wvalid = '0;
    core_i[c].id_uses_ssr_reg = 0;
  endtask

  // read stream start through the READ_1D/2D aliases
  task automatic stream_1d(int c, int lane, bit wr, int words, int base_word);
    store(c, cfg_addr(lane, CFG_BOUND0), word_t'(words - 1));
    store(c, cfg_addr(lane, CFG_STRIDE0), 4);
    store(c, cfg_addr(lane, wr ? CFG_WRITE_1D : CFG_READ_1D), word_t'(base_word * 4));
  endtask

  task automatic wait_done(int c, int lane);
    word_t st;
    do begin load(c, cfg_addr(lane, CFG_STATUS), st); n_poll++; end while (!st[ST_DONE]);
  endtask

  // dot product over n pairs; returns the sum and the hot-loop cycle count
  task automatic dot(int c, int a_w, int b_w, int n, output word_t sum, output longint cyc);
    regaddr_t ra [NR] = '{REG_FT0, REG_FT1, 6'd34};
    regaddr_t wa [NW] = '{6'd34, 6'd0};
    word_t wd [NW] = '{0, 0};
    word_t rd [NR];
    longint t0;
    stream_1d(c, 0, 0, n, a_w);
    stream_1d(c, 1, 0, n, b_w);
    set_ssr(c, 1);
    sum = 0;
    t0 = cycle;
    for (int i = 0; i < n; i++) begin
      // fmadd ft2, ft0, ft1, ft2 (accumulator write-back overlapped)
      instr(c, ra, 3'b011, wa, wd, (i > 0) ? 2'b01 : 2'b00, rd);
      sum = sum + rd[0] * rd[1];
      wd[0] = sum;
    end
    cyc = cycle - t0;
    instr(c, ra, 3'b000, wa, wd, 2'b01, rd);
    set_ssr(c, 0);
    @(negedge clk); core_i[c].csr_ssrcfg_pending = 0;
  endtask

  // ------------------------------------------------------------ programs
  word_t dot_ref, dot0, dot1, dot_solo;
  longint cyc0, cyc1, cyc_solo;

  task automatic prog_gemv(int c);
    regaddr_t ra [NR] = '{REG_FT0, REG_FT1, 6'd34};
    regaddr_t wa [NW] = '{6'd34, 6'd0};
    word_t wd [NW] = '{0, 0};
    word_t rd [NR];
    word_t acc;
    stream_1d(c, 0, 0, GM*GN, A_MAT);
    // lane 1: x re-read for every row: inner loop over x, outer loop rewinds
    store(c, cfg_addr(1, CFG_BOUND0), GN - 1);
    store(c, cfg_addr(1, CFG_BOUND1), GM - 1);
    store(c, cfg_addr(1, CFG_STRIDE0), 4);
    store(c, cfg_addr(1, CFG_STRIDE1), word_t'(-(GN - 1) * 4));
    store(c, cfg_addr(1, CFG_READ_2D), X_VEC * 4);
    n_multidim++;
    set_ssr(c, 1);
    for (int i = 0; i < GM; i++) begin
      acc = 0;
      for (int j = 0; j < GN; j++) begin
        instr(c, ra, 3'b011, wa, wd, 2'b00, rd);
        acc = acc + rd[0] * rd[1];
      end
      store(c, word_t'((Y_VEC + i) * 4), acc);   // LSU store while lane 0 prefetches
    end
    set_ssr(c, 0);
    @(negedge clk); core_i[c].csr_ssrcfg_pending = 0;
  endtask

  task automatic prog_relu(int c);
    regaddr_t ra [NR] = '{REG_T0, 6'd0, 6'd0};
    regaddr_t wa [NW] = '{REG_T1, 6'd0};
    word_t wd [NW] = '{0, 0};
    word_t rd [NR];
    stream_1d(c, 0, 0, N_RELU, X_RELU);
    stream_1d(c, 1, 1, N_RELU, Y_RELU);
    set_ssr(c, 1);
    // max t1, t0, zero: read of element i overlaps the write of element i-1
    for (int i = 0; i <= N_RELU; i++) begin
      instr(c, ra, (i < N_RELU) ? 3'b001 : 3'b000, wa, wd, (i > 0) ? 2'b01 : 2'b00, rd);
      wd[0] = ($signed(rd[0]) > 0) ? rd[0] : 0;
    end
    wait_done(c, 1);
    set_ssr(c, 0);
    @(negedge clk); core_i[c].csr_ssrcfg_pending = 0;
  endtask

  task automatic prog_repeat(int c, output word_t sum);
    regaddr_t ra [NR] = '{REG_FT0, REG_FT1, 6'd0};
    regaddr_t wa [NW] = '{6'd0, 6'd0};
    word_t wd [NW] = '{0, 0};
    word_t rd [NR];
    store(c, cfg_addr(0, CFG_REPEAT), 1);
    stream_1d(c, 0, 0, N_REP, A_REP);
    stream_1d(c, 1, 0, 2*N_REP, B_REP);
    set_ssr(c, 1);
    sum = 0;
    for (int i = 0; i < 2*N_REP; i++) begin
      instr(c, ra, 3'b011, wa, wd, 2'b00, rd);
      sum = sum + rd[0] * rd[1];
    end
    set_ssr(c, 0);
    @(negedge clk); core_i[c].csr_ssrcfg_pending = 0;
    store(c, cfg_addr(0, CFG_REPEAT), 0);
    n_repeat++;
  endtask

  // both cores stream writes with a stride of 8 words, i.e. into one bank,
  // so the bank grants each only every other cycle and the write FIFOs fill
  task automatic prog_bank_stress(int c, int base_w);
    regaddr_t ra [NR] = '{6'd0, 6'd0, 6'd0};
    regaddr_t wa [NW] = '{REG_FT1, 6'd0};
    word_t wd [NW] = '{0, 0};
    word_t rd [NR];
    store(c, cfg_addr(1, CFG_BOUND0), 63);
    store(c, cfg_addr(1, CFG_STRIDE0), 32);
    store(c, cfg_addr(1, CFG_WRITE_1D), word_t'(base_w * 4));
    set_ssr(c, 1);
    for (int i = 0; i < 64; i++) begin
      wd[0] = word_t'(c * 1000 + i);
      instr(c, ra, 3'b000, wa, wd, 2'b01, rd);
    end
    wait_done(c, 1);
    set_ssr(c, 0);
    @(negedge clk); core_i[c].csr_ssrcfg_pending = 0;
  endtask

  // ------------------------------------------------------------ main
  initial begin
    word_t v, ref_sum, rep_sum;
    regaddr_t ra [NR];
    regaddr_t wa [NW];
    word_t wd [NW];
    word_t rd [NR];
    for (int c = 0; c < NC; c++) core_i[c] = '0;
    for (int i = 0; i < 16384; i++) image[i] = 0;
    for (int i = 0; i < N_DOT; i++) begin image[A_DOT + i] = $urandom % 1000; image[B_DOT + i] = $urandom % 1000; end
    for (int i = 0; i < GM*GN; i++) image[A_MAT + i] = $urandom % 100;
    for (int j = 0; j < GN; j++) image[X_VEC + j] = $urandom % 100;
    for (int i = 0; i < N_RELU; i++) image[X_RELU + i] = $urandom - 32'h8000_0000;
    for (int i = 0; i < N_REP; i++) image[A_REP + i] = $urandom % 50;
    for (int i = 0; i < 2*N_REP; i++) image[B_REP + i] = $urandom % 50;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ->load_ev;
    @(negedge clk);

    // 5. t0 is an ordinary register while ssrcfg is clear
    ra = '{REG_T0, REG_FT1, 6'd0}; wa = '{REG_T0, REG_FT1}; wd = '{32'h1234_5678, 32'hCAFE_0001};
    instr(0, ra, 3'b000, wa, wd, 2'b11, rd);
    instr(0, ra, 3'b011, wa, wd, 2'b00, rd);
    checks++;
    if (rd[0] !== 32'h1234_5678 || rd[1] !== 32'hCAFE_0001) begin failures++; $display("plain t0/ft1 wrong"); end
    else n_plain_t0++;

    // 1. dot product split over both cores
    dot_ref = 0;
    for (int i = 0; i < N_DOT; i++) dot_ref += image[A_DOT + i] * image[B_DOT + i];
    fork
      dot(0, A_DOT, B_DOT, N_DOT/2, dot0, cyc0);
      dot(1, A_DOT + N_DOT/2, B_DOT + N_DOT/2, N_DOT/2, dot1, cyc1);
    join
    checks++;
    if (dot0 + dot1 !== dot_ref) begin failures++; $display("dot %0d + %0d != %0d", dot0, dot1, dot_ref); end
    $display("dot product 2x%0d: %0d and %0d cycles", N_DOT/2, cyc0, cyc1);
    // accumulator left in ft2 of core 0
    ra = '{6'd34, 6'd0, 6'd0};
    instr(0, ra, 3'b001, wa, wd, 2'b00, rd);
    checks++;
    if (rd[0] !== dot0) begin failures++; $display("ft2 holds %0d, expected %0d", rd[0], dot0); end

    // single core, full reduction: one fmadd per cycle in the hot loop
    dot(0, A_DOT, B_DOT, N_DOT, dot_solo, cyc_solo);
    checks++;
    if (dot_solo !== dot_ref) begin failures++; $display("solo dot wrong"); end
    checks++;
    if (cyc_solo > N_DOT + 2) begin failures++; $display("hot loop took %0d cycles for %0d fmadd", cyc_solo, N_DOT); end
    $display("single-core dot product: %0d instructions in %0d cycles", N_DOT, cyc_solo);

    // 2 + 3: GEMV on core 0 while core 1 runs ReLU
    fork
      prog_gemv(0);
      prog_relu(1);
    join
    // 4. repeat
    prog_repeat(1, rep_sum);
    ref_sum = 0;
    for (int i = 0; i < N_REP; i++) ref_sum += image[A_REP + i] * (image[B_REP + 2*i] + image[B_REP + 2*i + 1]);
    checks++;
    if (rep_sum !== ref_sum) begin failures++; $display("repeat sum %0d != %0d", rep_sum, ref_sum); end

    // 6. write streams of both cores into the same bank
    fork
      prog_bank_stress(0, STRESS);
      prog_bank_stress(1, STRESS + 1024);
    join

    // check GEMV and ReLU results in memory (backdoor) and a few through the LSU
    repeat (4) @(negedge clk);
    ->dump_ev;
    @(negedge clk);
    for (int i = 0; i < GM; i++) begin
      automatic word_t acc = 0;
      for (int j = 0; j < GN; j++) acc += image[A_MAT + i*GN + j] * image[X_VEC + j];
      checks++;
      if (image[Y_VEC + i] !== acc) begin failures++; if (failures < 10) $display("y[%0d] %0d != %0d", i, image[Y_VEC + i], acc); end
    end
    for (int i = 0; i < N_RELU; i++) begin
      automatic word_t x = image[X_RELU + i];
      checks++;
      if (image[Y_RELU + i] !== (($signed(x) > 0) ? x : 0)) begin failures++; if (failures < 10) $display("relu[%0d] wrong", i); end
    end
    for (int i = 0; i < 64; i++) for (int c = 0; c < NC; c++) begin
      checks++;
      if (image[STRESS + c*1024 + 8*i] !== word_t'(c * 1000 + i)) begin failures++; if (failures < 10) $display("stress write %0d/%0d wrong", c, i); end
    end
    for (int i = 0; i < 8; i++) begin
      load(0, word_t'((Y_RELU + i) * 4), v);
      checks++;
      if (v !== image[Y_RELU + i]) begin failures++; $display("LSU load mismatch"); end
    end

    $display("mechanisms: ssr_reads=%0d ssr_writes=%0d read_stalls=%0d write_stalls=%0d bank_conflicts=%0d",
             n_ssr_rd, n_ssr_wr, n_rd_stall, n_wr_stall, n_conflict);
    $display("            port_mux_contention=%0d decode_holds=%0d cfg_accesses=%0d status_polls=%0d repeat=%0d multidim=%0d plain_t0=%0d",
             n_mux_contention, n_hold, n_cfg, n_poll, n_repeat, n_multidim, n_plain_t0);
    checks++; if (n_ssr_rd == 0) begin failures++; $display("no stream reads"); end
    checks++; if (n_ssr_wr == 0) begin failures++; $display("no stream writes"); end
    checks++; if (n_rd_stall == 0) begin failures++; $display("no read back-pressure"); end
    checks++; if (n_wr_stall == 0) begin failures++; $display("no write back-pressure"); end
    checks++; if (n_conflict == 0) begin failures++; $display("no bank conflicts"); end
    checks++; if (n_mux_contention == 0) begin failures++; $display("no port contention"); end
    checks++; if (n_hold == 0) begin failures++; $display("no decode hold"); end
    checks++; if (n_cfg == 0 || n_poll == 0) begin failures++; $display("no config/status access"); end
    checks++; if (n_repeat == 0 || n_multidim == 0 || n_plain_t0 == 0) begin failures++; $display("mode missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
