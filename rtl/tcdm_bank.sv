// tcdm_bank: one bank of the tightly coupled data memory (TCDM), a
// single-ported SRAM of WORDS x 32 bit with byte enables.
//
// A request (req_i) reads or writes the word at addr_i; read data appears on
// rdata_o in the following cycle (single-cycle access latency, as the paper
// states for the TCDM). Writes honour be_i. The memory array is written as a
// plain array so that synthesis can map it to an SRAM macro; the content is
// not reset. The bank count and depth come from the cluster (64 kB in total).
module tcdm_bank #(
  parameter int unsigned WORDS      = 2048,
  parameter int unsigned DATA_WIDTH = 32,
  localparam int unsigned AW = $clog2(WORDS),
  localparam int unsigned BW = DATA_WIDTH / 8
) (
  input  logic                  clk_i,
  input  logic                  req_i,
  input  logic                  we_i,
  input  logic [AW-1:0]         addr_i,
  input  logic [BW-1:0]         be_i,
  input  logic [DATA_WIDTH-1:0] wdata_i,
  output logic [DATA_WIDTH-1:0] rdata_o
);

  logic [DATA_WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < BW; b++) begin
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
        end
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
