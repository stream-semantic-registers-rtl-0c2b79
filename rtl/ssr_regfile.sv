// ssr_regfile: register file wrapper that gives t0, t1, ft0 and ft1 stream
// semantics.
//
// Every read and write port of the core's register file gets a valid/ready
// handshake and a matching stream interface. For each port an "SSR?" check
// evaluates (address is t0/t1/ft0/ft1) AND (ssrcfg enable bit). When it is
// true the port's valid is steered to the stream interface instead of the
// register file (write enable), the stream's data is returned instead of the
// register file's read data, and the stream's ready becomes the port's ready,
// so the data mover can stall the pipeline. When it is false, the register
// file is used and ready is constantly 1. Stream address and data outputs are
// wired to the port's address and data unconditionally.
//
// This is the circuit of the paper's per-port schematic (valid demultiplexer,
// ready multiplexer with a constant 1 input, read-data multiplexer); the
// signal names follow it. The register file inside is the module regfile.
// Everything is combinational around the register file: a stream read or
// write completes in the cycle in which valid and ready are both high, and a
// register-file write takes effect at the next clock edge. A read port has a
// valid input only for the sake of the stream side; the plain register file
// read itself is combinational and side-effect free.
//
// The stream-side address and write-data outputs are wires from the port
// inputs, as in the schematic; only the valids, readies and read data are
// switched.
module ssr_regfile
  import ssr_pkg::*;
#(
  parameter int unsigned NUM_READ  = 3,
  parameter int unsigned NUM_WRITE = 2
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     ssr_en_i,          // ssrcfg enable bit E
  // core-side read ports
  input  regaddr_t raddr_i  [NUM_READ],
  input  logic     rvalid_i [NUM_READ],
  output logic     rready_o [NUM_READ],
  output word_t    rdata_o  [NUM_READ],
  // core-side write ports
  input  regaddr_t waddr_i  [NUM_WRITE],
  input  word_t    wdata_i  [NUM_WRITE],
  input  logic     wvalid_i [NUM_WRITE],
  output logic     wready_o [NUM_WRITE],
  // read streams
  output regaddr_t ssr_raddr_o  [NUM_READ],
  output logic     ssr_rvalid_o [NUM_READ],
  input  word_t    ssr_rdata_i  [NUM_READ],
  input  logic     ssr_rready_i [NUM_READ],
  // write streams
  output regaddr_t ssr_waddr_o  [NUM_WRITE],
  output word_t    ssr_wdata_o  [NUM_WRITE],
  output logic     ssr_wvalid_o [NUM_WRITE],
  input  logic     ssr_wready_i [NUM_WRITE]
);

  word_t rf_rdata [NUM_READ];
  logic  rf_we    [NUM_WRITE];

  regfile #(
    .NUM_REGS  (64),
    .DATA_WIDTH(XLEN),
    .NUM_READ  (NUM_READ),
    .NUM_WRITE (NUM_WRITE)
  ) i_rf (
    .clk_i,
    .rst_ni,
    .raddr_i(raddr_i),
    .rdata_o(rf_rdata),
    .waddr_i(waddr_i),
    .wdata_i(wdata_i),
    .we_i   (rf_we)
  );

  // "SSR?" check and steering, one copy per port.
  for (genvar p = 0; p < NUM_READ; p++) begin : g_rport
    logic is_ssr;
    assign is_ssr          = is_ssr_reg(raddr_i[p]) && ssr_en_i;
    assign ssr_raddr_o[p]  = raddr_i[p];
    assign ssr_rvalid_o[p] = is_ssr ? rvalid_i[p] : 1'b0;
    assign rready_o[p]     = is_ssr ? ssr_rready_i[p] : 1'b1;
    assign rdata_o[p]      = is_ssr ? ssr_rdata_i[p] : rf_rdata[p];
  end

  for (genvar p = 0; p < NUM_WRITE; p++) begin : g_wport
    logic is_ssr;
    assign is_ssr          = is_ssr_reg(waddr_i[p]) && ssr_en_i;
    assign ssr_waddr_o[p]  = waddr_i[p];
    assign ssr_wdata_o[p]  = wdata_i[p];
    assign ssr_wvalid_o[p] = is_ssr ? wvalid_i[p] : 1'b0;
    assign rf_we[p]        = is_ssr ? 1'b0 : wvalid_i[p];
    assign wready_o[p]     = is_ssr ? ssr_wready_i[p] : 1'b1;
  end

endmodule
