// tb_ssr_kernels: the data-oblivious kernels of the evaluation, run on core
// 0 of the two-core cluster at its default parameters (64 kB TCDM, 8 banks,
// FIFO depth 4, four-loop address generators).
//
// As in tb_ssr_cluster, the RI5CY pipeline is replaced by a behavioural
// driver that issues register-file port accesses one instruction per cycle,
// ssrcfg writes and LSU loads/stores; integer arithmetic stands in for the
// FPU. Sizes are the evaluation's own:
//  - scan (prefix sums) over 4096 values: read stream on ft0, write stream
//    on ft1 in the same instruction; checks one element per cycle;
//  - 1-D star stencil of diameter 11 over 1024 points: inputs and
//    coefficients as 2-D patterns (the coefficient pattern rewinds after
//    every point), results stored by the LSU;
//  - 2-D star stencil of diameter 11 on a 64x64 grid: row taps as a 3-D
//    pattern, column taps as a 4-D pattern in a second pass;
//  - GEMM of two 32x32 matrices: both operands as 3-D patterns (k, j, i),
//    C stored by the LSU; checks the multiply-accumulate rate;
//  - the eleven radix-2 butterfly stages of a 2048-point FFT on complex
//    data held as (re, im) word pairs; every stage reads and writes through
//    a 4-D pattern (re/im, pair member, butterfly, group). The twiddle
//    multiplication is left out (all twiddles 1), so the result is checked
//    against the same butterfly network computed here, not a DFT;
//  - a bitonic sort network over 1024 values: each of the 55
//    compare-exchange steps reads its pairs through a 3-D pattern on lane 0
//    and writes them back through the same pattern on lane 1.
// The pattern choices (loop order, strides) are this testbench's own; the
// evaluation gives only the kernels and their sizes.
module tb_ssr_kernels;
  import ssr_pkg::*;

  localparam int NC = 2;
  localparam word_t CFG = 32'h0001_0000;
  // word addresses
  localparam int X_SCAN = 0, Y_SCAN = 4096, N_SCAN = 4096;
  localparam int X_ST = 8192, Y_ST = 9216, C_ST = 10240, N_ST = 1024, D_ST = 11;
  localparam int A_MM = 10496, B_MM = 11520, C_MM = 12544, MM = 32;
  localparam int X_FFT = 0, N_FFT = 2048;
  localparam int X_SORT = 4096, N_SORT = 1024;
  localparam int X_S2 = 8192, Y_S2 = 12288, C_S2 = 6144, S2_N = 64;

  logic clk = 0, rst_n = 0;
  core_in_t  core_i [NC];
  core_out_t core_o [NC];
  word_t image [16384];
  event load_ev, dump_ev;
  longint cycle = 0;
  int checks = 0, failures = 0;

  ssr_cluster dut (.clk_i(clk), .rst_ni(rst_n), .core_i(core_i), .core_o(core_o));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  for (genvar b = 0; b < 8; b++) begin : g_bd
    always @(load_ev) for (int r = 0; r < 2048; r++) dut.g_bank[b].i_bank.mem[r] = image[r*8 + b];
    always @(dump_ev) for (int r = 0; r < 2048; r++) image[r*8 + b] = dut.g_bank[b].i_bank.mem[r];
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ driver tasks
  task automatic lsu(int c, bit we, word_t addr, word_t wdata, output word_t rdata);
    @(negedge clk);
    core_i[c].lsu_req = '{req: 1, we: we, be: 4'hF, addr: addr, wdata: wdata};
    #1;
    while (!core_o[c].lsu_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    core_i[c].lsu_req = '0;
    #1;
    rdata = core_o[c].lsu_rsp.rdata;
    if (!core_o[c].lsu_rsp.rvalid) begin failures++; $display("no LSU response"); end
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

  // Program a lane: dims loops, bounds are iteration counts minus one,
  // strides are byte increments applied when that loop advances.
  task automatic stream(int c, int lane, bit wr, int dims, int bnd [4], int str [4], int base_word);
    for (int d = 0; d < dims; d++) begin
      store(c, cfg_addr(lane, cfg_reg_e'(int'(CFG_BOUND0) + d)), word_t'(bnd[d]));
      store(c, cfg_addr(lane, cfg_reg_e'(int'(CFG_STRIDE0) + d)), word_t'(str[d]));
    end
    store(c, cfg_addr(lane, cfg_reg_e'((wr ? int'(CFG_WRITE_1D) : int'(CFG_READ_1D)) + dims - 1)),
          word_t'(base_word * 4));
  endtask

  task automatic wait_done(int c, int lane);
    word_t st;
    do load(c, cfg_addr(lane, CFG_STATUS), st); while (!st[ST_DONE]);
  endtask

  task automatic set_ssr(int c, bit en);
    @(negedge clk);
    core_i[c].csr = '{valid: 1, addr: 12'h7C0, op: CSR_OP_WRITE, wdata: word_t'(en)};
    @(negedge clk);
    core_i[c].csr = '0;
    core_i[c].csr_ssrcfg_pending = 1;
  endtask

  task automatic ssr_off(int c);
    set_ssr(c, 0);
    @(negedge clk); core_i[c].csr_ssrcfg_pending = 0;
  endtask

  // One instruction reading port 0/1 (rmask) and writing port 0 (wen).
  task automatic instr(int c, regaddr_t r0, regaddr_t r1, bit [1:0] rmask,
                       regaddr_t w0, word_t wd, bit wen, output word_t rd0, output word_t rd1);
    bit [1:0] rpend = rmask;
    bit wpend = wen;
    core_i[c].raddr[0] = r0; core_i[c].raddr[1] = r1; core_i[c].raddr[2] = '0;
    core_i[c].waddr[0] = w0; core_i[c].wdata[0] = wd;
    core_i[c].waddr[1] = '0; core_i[c].wdata[1] = '0;
    core_i[c].id_uses_ssr_reg = (rmask[0] && is_ssr_reg(r0)) || (rmask[1] && is_ssr_reg(r1));
    while (rpend != 0 || wpend) begin
      core_i[c].rvalid = {1'b0, rpend};
      core_i[c].wvalid = {1'b0, wpend};
      #1;
      if (rpend[0] && core_o[c].rready[0] && core_o[c].id_issue_ok) begin rd0 = core_o[c].rdata[0]; rpend[0] = 0; end
      if (rpend[1] && core_o[c].rready[1] && core_o[c].id_issue_ok) begin rd1 = core_o[c].rdata[1]; rpend[1] = 0; end
      if (wpend && core_o[c].wready[0]) wpend = 0;
      @(negedge clk);
      core_i[c].csr_ssrcfg_pending = 0;
    end
    core_i[c].rvalid = '0;
    core_i[c].wvalid = '0;
    core_i[c].id_uses_ssr_reg = 0;
  endtask

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endfunction

  // ------------------------------------------------------------ kernels
  task automatic k_scan();
    word_t acc = 0, d0, d1;
    longint t0, cyc;
    int bnd [4] = '{N_SCAN - 1, 0, 0, 0};
    int str [4] = '{4, 0, 0, 0};
    stream(0, 0, 0, 1, bnd, str, X_SCAN);
    stream(0, 1, 1, 1, bnd, str, Y_SCAN);
    set_ssr(0, 1);
    t0 = cycle;
    // fadd ft1, ft0, ft2: the read of element i overlaps the write-back of
    // the sum up to element i-1
    for (int i = 0; i <= N_SCAN; i++) begin
      instr(0, REG_FT0, '0, (i < N_SCAN) ? 2'b01 : 2'b00, REG_FT1, acc, i > 0, d0, d1);
      if (i < N_SCAN) acc = acc + d0;
    end
    cyc = cycle - t0;
    wait_done(0, 1);
    ssr_off(0);
    ->dump_ev; #1;
    acc = 0;
    for (int i = 0; i < N_SCAN; i++) begin
      acc = acc + image[X_SCAN + i];
      check(image[Y_SCAN + i] === acc, $sformatf("scan[%0d]", i));
    end
    // one instruction per element
    check(cyc <= N_SCAN + 3, $sformatf("scan took %0d cycles", cyc));
    $display("scan %0d: %0d cycles", N_SCAN, cyc);
  endtask

  task automatic k_stencil();
    localparam int R = D_ST / 2, P = N_ST - 2 * R;
    word_t acc, d0, d1;
    int bx [4] = '{D_ST - 1, P - 1, 0, 0};
    int sx [4] = '{4, -(D_ST - 2) * 4, 0, 0};
    int sc [4] = '{4, -(D_ST - 1) * 4, 0, 0};
    stream(0, 0, 0, 2, bx, sx, X_ST);
    stream(0, 1, 0, 2, bx, sc, C_ST);
    set_ssr(0, 1);
    for (int p = 0; p < P; p++) begin
      acc = 0;
      for (int k = 0; k < D_ST; k++) begin
        instr(0, REG_FT0, REG_FT1, 2'b11, '0, '0, 0, d0, d1);
        acc = acc + d0 * d1;
      end
      store(0, word_t'((Y_ST + R + p) * 4), acc);
    end
    ssr_off(0);
    ->dump_ev; #1;
    for (int p = 0; p < P; p++) begin
      acc = 0;
      for (int k = 0; k < D_ST; k++) acc = acc + image[X_ST + p + k] * image[C_ST + k];
      check(image[Y_ST + R + p] === acc, $sformatf("stencil[%0d]", p));
    end
    $display("stencil 1-D d=%0d over %0d points done", D_ST, N_ST);
  endtask

  task automatic k_gemm();
    word_t acc, d0, d1;
    longint t0, cyc;
    int bnd [4] = '{MM - 1, MM - 1, MM - 1, 0};
    int sa [4] = '{4, -(MM - 1) * 4, 4, 0};
    int sb [4] = '{MM * 4, -(MM - 1) * MM * 4 + 4, -((MM - 1) * MM + MM - 1) * 4, 0};
    stream(0, 0, 0, 3, bnd, sa, A_MM);
    stream(0, 1, 0, 3, bnd, sb, B_MM);
    set_ssr(0, 1);
    t0 = cycle;
    for (int i = 0; i < MM; i++)
      for (int j = 0; j < MM; j++) begin
        acc = 0;
        for (int k = 0; k < MM; k++) begin
          instr(0, REG_FT0, REG_FT1, 2'b11, '0, '0, 0, d0, d1);
          acc = acc + d0 * d1;
        end
        store(0, word_t'((C_MM + i * MM + j) * 4), acc);
      end
    cyc = cycle - t0;
    ssr_off(0);
    ->dump_ev; #1;
    for (int i = 0; i < MM; i++)
      for (int j = 0; j < MM; j++) begin
        acc = 0;
        for (int k = 0; k < MM; k++) acc = acc + image[A_MM + i * MM + k] * image[B_MM + k * MM + j];
        check(image[C_MM + i * MM + j] === acc, $sformatf("C[%0d][%0d]", i, j));
      end
    // one MAC per cycle plus the store of each result: three cycles in this
    // driver (an idle cycle, the request, the response), and up to two
    // more while lane 0 refills after the LSU took its shared port
    check(cyc <= MM * MM * MM + MM * MM * 5, $sformatf("gemm took %0d cycles", cyc));
    $display("gemm %0dx%0d: %0d cycles, %0d MACs", MM, MM, cyc, MM * MM * MM);
  endtask

  // one radix-2 stage (distance j) on interleaved complex data
  task automatic k_fft_stage(int j);
    word_t ar, ai, br, bi, d1;
    int bnd [4] = '{1, 1, j - 1, N_FFT / (2 * j) - 1};
    int str [4] = '{4, (2 * j - 1) * 4, (1 - 2 * j) * 4, 4};
    stream(0, 0, 0, 4, bnd, str, X_FFT);
    stream(0, 1, 1, 4, bnd, str, X_FFT);
    set_ssr(0, 1);
    for (int n = 0; n < N_FFT / 2; n++) begin
      instr(0, REG_FT0, '0, 2'b01, '0, '0, 0, ar, d1);
      instr(0, REG_FT0, '0, 2'b01, '0, '0, 0, ai, d1);
      instr(0, REG_FT0, '0, 2'b01, '0, '0, 0, br, d1);
      instr(0, REG_FT0, '0, 2'b01, '0, '0, 0, bi, d1);
      instr(0, '0, '0, 2'b00, REG_FT1, ar + br, 1, d1, d1);
      instr(0, '0, '0, 2'b00, REG_FT1, ai + bi, 1, d1, d1);
      instr(0, '0, '0, 2'b00, REG_FT1, ar - br, 1, d1, d1);
      instr(0, '0, '0, 2'b00, REG_FT1, ai - bi, 1, d1, d1);
    end
    wait_done(0, 1);
    ssr_off(0);
  endtask

  task automatic k_fft();
    word_t ref_x [2 * N_FFT];
    word_t ar, ai, br, bi;
    for (int i = 0; i < 2 * N_FFT; i++) ref_x[i] = image[X_FFT + i];
    for (int j = 1; j < N_FFT; j = j * 2) begin
      k_fft_stage(j);
      for (int i = 0; i < N_FFT; i++)
        if ((i & j) == 0) begin
          ar = ref_x[2 * i]; ai = ref_x[2 * i + 1];
          br = ref_x[2 * (i + j)]; bi = ref_x[2 * (i + j) + 1];
          ref_x[2 * i] = ar + br; ref_x[2 * i + 1] = ai + bi;
          ref_x[2 * (i + j)] = ar - br; ref_x[2 * (i + j) + 1] = ai - bi;
        end
    end
    ->dump_ev; #1;
    for (int i = 0; i < 2 * N_FFT; i++) check(image[X_FFT + i] === ref_x[i], $sformatf("fft[%0d]", i));
    $display("fft %0d points: 11 butterfly stages done", N_FFT);
  endtask

  task automatic k_sort();
    word_t a, b, d1;
    int pos;
    for (int k = 2; k <= N_SORT; k = k * 2)
      for (int j = k / 2; j > 0; j = j / 2) begin
        int bnd [4] = '{1, j - 1, N_SORT / (2 * j) - 1, 0};
        int str [4] = '{j * 4, (1 - j) * 4, 4, 0};
        stream(0, 0, 0, 3, bnd, str, X_SORT);
        stream(0, 1, 1, 3, bnd, str, X_SORT);
        set_ssr(0, 1);
        for (int blk = 0; blk < N_SORT / (2 * j); blk++)
          for (int t = 0; t < j; t++) begin
            pos = blk * 2 * j + t;
            instr(0, REG_FT0, '0, 2'b01, '0, '0, 0, a, d1);
            instr(0, REG_FT0, '0, 2'b01, '0, '0, 0, b, d1);
            // ascending where bit k of the index is clear
            if (((pos & k) == 0) == (a > b)) begin d1 = a; a = b; b = d1; end
            instr(0, '0, '0, 2'b00, REG_FT1, a, 1, d1, d1);
            instr(0, '0, '0, 2'b00, REG_FT1, b, 1, d1, d1);
          end
        wait_done(0, 1);
        ssr_off(0);
      end
    ->dump_ev; #1;
    for (int i = 1; i < N_SORT; i++)
      check(image[X_SORT + i - 1] <= image[X_SORT + i], $sformatf("sort order at %0d", i));
    $display("bitonic sort %0d done", N_SORT);
  endtask

  // 2-D star stencil, diameter 11, on a 64x64 grid (54x54 interior points).
  // Pass 1 takes the 11 taps along the row (3-D pattern: tap, column, row);
  // pass 2 the 10 taps along the column, skipping the centre (4-D pattern:
  // tap, upper/lower half, column, row) and adds them to pass 1's partial
  // sums, which the LSU loads and stores back.
  task automatic k_stencil2d();
    localparam int R = D_ST / 2, G = S2_N, P = S2_N - 2 * R;
    word_t acc, d0, d1;
    int b1 [4] = '{D_ST - 1, P - 1, P - 1, 0};
    int sx1 [4] = '{4, -(D_ST - 2) * 4, 4, 0};
    int sc1 [4] = '{4, -(D_ST - 1) * 4, -(D_ST - 1) * 4, 0};
    int b2 [4] = '{R - 1, 1, P - 1, P - 1};
    int sx2 [4] = '{G * 4, 2 * G * 4, -(2 * R * G - 1) * 4, -((R + R - 1) * G + P - 1) * 4};
    int sc2 [4] = '{4, 4, -(2 * R - 1) * 4, -(2 * R - 1) * 4};
    stream(0, 0, 0, 3, b1, sx1, X_S2 + R * G);
    stream(0, 1, 0, 3, b1, sc1, C_S2);
    set_ssr(0, 1);
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) begin
        acc = 0;
        for (int k = 0; k < D_ST; k++) begin
          instr(0, REG_FT0, REG_FT1, 2'b11, '0, '0, 0, d0, d1);
          acc = acc + d0 * d1;
        end
        store(0, word_t'((Y_S2 + (r + R) * G + c + R) * 4), acc);
      end
    ssr_off(0);
    stream(0, 0, 0, 4, b2, sx2, X_S2 + R);
    stream(0, 1, 0, 4, b2, sc2, C_S2 + D_ST);
    set_ssr(0, 1);
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) begin
        load(0, word_t'((Y_S2 + (r + R) * G + c + R) * 4), acc);
        for (int k = 0; k < D_ST - 1; k++) begin
          instr(0, REG_FT0, REG_FT1, 2'b11, '0, '0, 0, d0, d1);
          acc = acc + d0 * d1;
        end
        store(0, word_t'((Y_S2 + (r + R) * G + c + R) * 4), acc);
      end
    ssr_off(0);
    ->dump_ev; #1;
    for (int r = R; r < G - R; r++)
      for (int c = R; c < G - R; c++) begin
        acc = 0;
        for (int k = 0; k < D_ST; k++) acc = acc + image[X_S2 + r * G + c - R + k] * image[C_S2 + k];
        for (int k = 0; k < R; k++) acc = acc + image[X_S2 + (r - R + k) * G + c] * image[C_S2 + D_ST + k];
        for (int k = 0; k < R; k++) acc = acc + image[X_S2 + (r + 1 + k) * G + c] * image[C_S2 + D_ST + R + k];
        check(image[Y_S2 + r * G + c] === acc, $sformatf("stencil2d[%0d][%0d]", r, c));
      end
    $display("stencil 2-D d=%0d over %0dx%0d points done", D_ST, G, G);
  endtask

  // ------------------------------------------------------------ main
  initial begin
    longint sum_in, sum_out;
    for (int c = 0; c < NC; c++) core_i[c] = '0;
    for (int i = 0; i < 16384; i++) image[i] = 0;
    for (int i = 0; i < N_SCAN; i++) image[X_SCAN + i] = $urandom;
    for (int i = 0; i < N_ST; i++) image[X_ST + i] = $urandom % 1000;
    for (int i = 0; i < D_ST; i++) image[C_ST + i] = $urandom % 16;
    for (int i = 0; i < MM * MM; i++) begin image[A_MM + i] = $urandom % 100; image[B_MM + i] = $urandom % 100; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    ->load_ev;
    @(negedge clk);

    k_scan();
    k_stencil();
    k_gemm();

    // reload with the FFT and sort data
    for (int i = 0; i < 2 * N_FFT; i++) image[X_FFT + i] = $urandom;
    sum_in = 0;
    for (int i = 0; i < N_SORT; i++) begin image[X_SORT + i] = $urandom % 100000; sum_in += image[X_SORT + i]; end
    for (int i = 0; i < S2_N * S2_N; i++) begin image[X_S2 + i] = $urandom % 1000; image[Y_S2 + i] = 0; end
    for (int i = 0; i < 2 * D_ST - 1; i++) image[C_S2 + i] = $urandom % 16;
    ->load_ev; #1;
    @(negedge clk);
    k_fft();
    k_sort();
    k_stencil2d();
    sum_out = 0;
    for (int i = 0; i < N_SORT; i++) sum_out += image[X_SORT + i];
    check(sum_in == sum_out, "sort lost or duplicated values");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
