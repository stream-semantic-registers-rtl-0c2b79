// regfile: the core's plain register file, 64 x 32 bit, fused integer and
// floating-point halves (address bit 5 selects the floating-point half), with
// NUM_READ combinational read ports and NUM_WRITE synchronous write ports.
//
// It is the unmodified register file that the SSR wrapper (ssr_regfile)
// surrounds. The port counts (three read, two write) and the 64-entry fused
// organisation follow the paper. That integer register x0 reads as zero is
// RISC-V; that the highest-numbered write port wins when two ports write the
// same register in one cycle, and that all registers reset to zero, are this
// design's choices. Reads see the value before the clock edge (no
// write-to-read bypass).
module regfile #(
  parameter int unsigned NUM_REGS   = 64,
  parameter int unsigned DATA_WIDTH = 32,
  parameter int unsigned NUM_READ   = 3,
  parameter int unsigned NUM_WRITE  = 2,
  localparam int unsigned AW = $clog2(NUM_REGS)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [AW-1:0]         raddr_i [NUM_READ],
  output logic [DATA_WIDTH-1:0] rdata_o [NUM_READ],
  input  logic [AW-1:0]         waddr_i [NUM_WRITE],
  input  logic [DATA_WIDTH-1:0] wdata_i [NUM_WRITE],
  input  logic                  we_i    [NUM_WRITE]
);

  logic [DATA_WIDTH-1:0] mem_q [NUM_REGS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int r = 0; r < NUM_REGS; r++) mem_q[r] <= '0;
    end else begin
      for (int w = 0; w < NUM_WRITE; w++) begin
        if (we_i[w] && waddr_i[w] != '0) mem_q[waddr_i[w]] <= wdata_i[w];
      end
    end
  end

  always_comb begin
    for (int r = 0; r < NUM_READ; r++) begin
      rdata_o[r] = (raddr_i[r] == '0) ? '0 : mem_q[raddr_i[r]];
    end
  end

endmodule
