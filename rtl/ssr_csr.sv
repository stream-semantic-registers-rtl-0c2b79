// ssr_csr: the ssrcfg control and status register (address 0x7C0).
//
// ssrcfg holds a single bit, the SSR enable, which turns the stream semantics
// of t0/t1/ft0/ft1 on and off all at once. It resets to 0 so that code that
// does not know the extension sees an ordinary register file. Software sets
// the bit at the start of an "SSR region" and clears it at the end
// (csrwi ssrcfg, 1 / csrwi ssrcfg, 0).
//
// Interface: one CSR access per cycle (csr_i). csr_hit_o flags that the
// address is ssrcfg; csr_rdata_o returns the old value (bit 0, upper bits
// zero) combinationally, as CSRRW/CSRRS/CSRRC need it. A write, set or clear
// takes effect at the next clock edge. The address, the single bit and the
// reset value follow the paper; the read/set/clear operations are the
// standard RISC-V CSR instruction semantics.
module ssr_csr
  import ssr_pkg::*;
#(
  parameter logic [11:0] CSR_ADDR = CSR_SSRCFG
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  csr_req_t csr_i,
  output logic     csr_hit_o,
  output word_t    csr_rdata_o,
  output logic     ssr_en_o
);

  logic en_q, en_d;

  assign csr_hit_o   = csr_i.valid && (csr_i.addr == CSR_ADDR);
  assign csr_rdata_o = {{(XLEN-1){1'b0}}, en_q};
  assign ssr_en_o    = en_q;

  always_comb begin
    en_d = en_q;
    if (csr_hit_o) begin
      unique case (csr_i.op)
        CSR_OP_WRITE: en_d = csr_i.wdata[0];
        CSR_OP_SET:   en_d = en_q | csr_i.wdata[0];
        CSR_OP_CLEAR: en_d = en_q & ~csr_i.wdata[0];
        default:      en_d = en_q;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) en_q <= 1'b0;
    else         en_q <= en_d;
  end

endmodule
