// ssr_lane: one lane of the SSR data mover (one per stream register pair,
// t0/ft0 or t1/ft1).
//
// A lane owns a set of memory-mapped configuration registers, an address
// generator (ssr_agu) and a FIFO (ssr_fifo). A stream is started by a write
// to the status register or to one of the READ_nD/WRITE_nD aliases, which
// loads the base pointer, the direction and the number of loop dimensions,
// flushes the FIFO and restarts the address generator. The stream then runs
// in one direction until the pattern is exhausted:
//  * Read mode: the lane issues a memory read for every generated address as
//    long as the FIFO has room for the datum (FIFO fill + outstanding read
//    < DEPTH), so data is prefetched before the core asks for it. A core read
//    of the stream register pops the FIFO head; with repeat = R each datum is
//    handed out R+1 times before it is popped.
//  * Write mode: every datum the core writes into the stream register enters
//    the FIFO; the lane stores the FIFO head at the next generated address.
// The core side is a valid/ready stream: rd_ready_o is low while no datum is
// available, wr_ready_o is low while the FIFO is full, which stalls the core.
//
// Writing the status register with bit 31 (done) set aborts the running
// stream instead: the address generator stops, the FIFO is flushed (data a
// write stream has not yet stored is dropped) and a read in flight is
// ignored. An exception handler uses this to end the streams.
//
// Configuration registers (word index in the lane's window): 0 status
// ([31] done, [30] write, [29:28] dims-1, [27:0] pointer), 1 repeat,
// 2-5 bound0-3 (iterations - 1), 6-9 stride0-3, 24-27 READ_1D..4D and
// 28-31 WRITE_1D..4D (write-only, data = full 32-bit base address). done
// reads 1 once the pattern is exhausted, no read is outstanding and the FIFO
// is empty. The ten registers and their meanings follow the paper; the word
// indices, bit positions and the aliases' exact encoding are this design's
// choices (the aliases appear in the paper's code example as READ_1D).
//
// Memory side: TCDM protocol from ssr_pkg (gnt in the request cycle, read
// data exactly one cycle after the grant). Configuration reads are
// combinational (cfg_rdata_o); writes take effect at the next edge.
//
// Byte enables of lane requests are always 4'hF (streams move whole words);
// those output bits are therefore constant. agu_done is not used: the lane's
// own done also waits for in-flight reads and for the FIFO to drain.
module ssr_lane
  import ssr_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned LOOPS  = ssr_pkg::NUM_LOOPS,
  localparam int unsigned DW = (LOOPS > 1) ? $clog2(LOOPS) : 1,
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1)
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // configuration
  input  cfg_req_t cfg_i,
  output word_t    cfg_rdata_o,
  // core read stream
  input  logic     rd_valid_i,
  output logic     rd_ready_o,
  output word_t    rd_data_o,
  // core write stream
  input  logic     wr_valid_i,
  output logic     wr_ready_o,
  input  word_t    wr_data_i,
  // memory port
  output mem_req_t mem_req_o,
  input  mem_rsp_t mem_rsp_i,
  // stream finished (status.done)
  output logic     done_o
);

  // ---------------------------------------------------------------- config
  logic [BOUND_W-1:0] repeat_q;
  logic [BOUND_W-1:0] bound_q  [LOOPS];
  word_t              stride_q [LOOPS];
  logic               write_q;
  logic [DW-1:0]      dims_q;

  logic               start;
  logic               abort;
  word_t              start_ptr;
  logic               start_write;
  logic [DW-1:0]      start_dims;

  always_comb begin
    start       = 1'b0;
    abort       = 1'b0;
    start_ptr   = '0;
    start_write = 1'b0;
    start_dims  = '0;
    if (cfg_i.valid && cfg_i.write) begin
      if (cfg_i.idx == CFG_STATUS && cfg_i.wdata[ST_DONE]) begin
        abort       = 1'b1;
      end else if (cfg_i.idx == CFG_STATUS) begin
        start       = 1'b1;
        start_ptr   = {{(XLEN-PTR_W){1'b0}}, cfg_i.wdata[PTR_W-1:0]};
        start_write = cfg_i.wdata[ST_WRITE];
        start_dims  = DW'(cfg_i.wdata[ST_DIMS +: 2]);
      end else if (cfg_i.idx >= CFG_READ_1D) begin
        start       = 1'b1;
        start_ptr   = cfg_i.wdata;
        start_write = cfg_i.idx[2];
        start_dims  = DW'(cfg_i.idx[1:0]);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      repeat_q <= '0;
      write_q  <= 1'b0;
      dims_q   <= '0;
      for (int i = 0; i < LOOPS; i++) begin
        bound_q[i]  <= '0;
        stride_q[i] <= '0;
      end
    end else if (cfg_i.valid && cfg_i.write) begin
      if (start) begin
        write_q <= start_write;
        dims_q  <= start_dims;
      end
      if (cfg_i.idx == CFG_REPEAT) repeat_q <= cfg_i.wdata[BOUND_W-1:0];
      for (int i = 0; i < LOOPS; i++) begin
        if (cfg_i.idx == 5'(CFG_BOUND0) + 5'(i))  bound_q[i]  <= cfg_i.wdata[BOUND_W-1:0];
        if (cfg_i.idx == 5'(CFG_STRIDE0) + 5'(i)) stride_q[i] <= cfg_i.wdata;
      end
    end
  end

  // ---------------------------------------------------------------- datapath
  word_t           agu_addr;
  logic            agu_valid, agu_done, agu_en;
  logic            fifo_push, fifo_pop, fifo_full, fifo_empty;
  word_t           fifo_wdata, fifo_rdata;
  logic [CW-1:0]   fifo_usage;
  logic            rd_pend_q;     // a granted read returns data this cycle
  logic [BOUND_W-1:0] rep_q;     // times the FIFO head has been handed out

  ssr_agu #(
    .NUM_LOOPS  (LOOPS),
    .ADDR_WIDTH (XLEN),
    .BOUND_WIDTH(BOUND_W)
  ) i_agu (
    .clk_i,
    .rst_ni,
    .start_i (start),
    .abort_i (abort),
    .base_i  (start_ptr),
    .dims_i  (start ? start_dims : dims_q),
    .bound_i (bound_q),
    .stride_i(stride_q),
    .en_i    (agu_en),
    .addr_o  (agu_addr),
    .valid_o (agu_valid),
    .done_o  (agu_done)
  );

  ssr_fifo #(
    .DEPTH(FIFO_DEPTH),
    .WIDTH(XLEN)
  ) i_fifo (
    .clk_i,
    .rst_ni,
    .flush_i(start || abort),
    .push_i (fifo_push),
    .data_i (fifo_wdata),
    .full_o (fifo_full),
    .pop_i  (fifo_pop),
    .data_o (fifo_rdata),
    .empty_o(fifo_empty),
    .usage_o(fifo_usage)
  );

  logic credit_ok;
  assign credit_ok = (32'(fifo_usage) + 32'(rd_pend_q)) < FIFO_DEPTH;

  always_comb begin
    mem_req_o       = '0;
    mem_req_o.addr  = agu_addr;
    mem_req_o.be    = 4'hF;
    mem_req_o.we    = write_q;
    mem_req_o.wdata = fifo_rdata;
    if (write_q) mem_req_o.req = agu_valid && !fifo_empty;
    else         mem_req_o.req = agu_valid && credit_ok;
  end
  assign agu_en = mem_req_o.req && mem_rsp_i.gnt;

  // core side
  assign rd_ready_o = !write_q && !fifo_empty;
  assign rd_data_o  = fifo_rdata;
  assign wr_ready_o = write_q && !fifo_full;

  always_comb begin
    if (write_q) begin
      fifo_push  = wr_valid_i && wr_ready_o;
      fifo_wdata = wr_data_i;
      fifo_pop   = agu_en;
    end else begin
      fifo_push  = rd_pend_q && mem_rsp_i.rvalid;
      fifo_wdata = mem_rsp_i.rdata;
      fifo_pop   = rd_valid_i && rd_ready_o && (rep_q == repeat_q);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_pend_q <= 1'b0;
      rep_q     <= '0;
    end else if (start || abort) begin
      rd_pend_q <= 1'b0;   // a read still in flight belongs to the old stream
      rep_q     <= '0;
    end else begin
      rd_pend_q <= agu_en && !write_q;
      if (!write_q && rd_valid_i && rd_ready_o) begin
        rep_q <= (rep_q == repeat_q) ? '0 : rep_q + 1'b1;
      end
    end
  end

  assign done_o = !agu_valid && !rd_pend_q && fifo_empty;

  always_comb begin
    cfg_rdata_o = '0;
    case (cfg_i.idx)
      CFG_STATUS: begin
        cfg_rdata_o[ST_DONE]         = done_o;
        cfg_rdata_o[ST_WRITE]        = write_q;
        cfg_rdata_o[ST_DIMS +: 2]    = 2'(dims_q);
        cfg_rdata_o[PTR_W-1:0]       = agu_addr[PTR_W-1:0];
      end
      CFG_REPEAT: cfg_rdata_o = {{(XLEN-BOUND_W){1'b0}}, repeat_q};
      default: begin
        for (int i = 0; i < LOOPS; i++) begin
          if (cfg_i.idx == 5'(CFG_BOUND0) + 5'(i))  cfg_rdata_o = {{(XLEN-BOUND_W){1'b0}}, bound_q[i]};
          if (cfg_i.idx == 5'(CFG_STRIDE0) + 5'(i)) cfg_rdata_o = stride_q[i];
        end
      end
    endcase
  end

  // A read response is only ever expected one cycle after a granted read.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
      (rd_pend_q && !mem_rsp_i.rvalid) |-> 1'b0)
    else $error("ssr_lane: missing read response");

endmodule
