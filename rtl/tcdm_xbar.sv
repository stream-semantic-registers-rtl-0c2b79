// tcdm_xbar: logarithmic interconnect between the cores' memory ports and
// the TCDM banks.
//
// Banks are word-interleaved: byte address bits [2 +: log2(NUM_BANKS)] select
// the bank, the bits above select the row; addresses beyond the TCDM wrap.
// Each bank is arbitrated on its own. When several masters request the same
// bank in one cycle, one is granted and the others see gnt low and retry
// (they stall for a cycle), as the paper describes for the PULP TCDM. The
// arbitration is round robin per bank (own choice; the paper does not name
// the policy): the pointer moves past the master last granted. The grant is
// combinational in the request cycle; the read data and rvalid reach the
// granted master one cycle later, straight from the bank.
module tcdm_xbar
  import ssr_pkg::*;
#(
  parameter int unsigned NUM_MASTERS = 4,
  parameter int unsigned NUM_BANKS   = 8,
  parameter int unsigned BANK_WORDS  = 2048,
  localparam int unsigned BKW = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1,
  localparam int unsigned MW  = (NUM_MASTERS > 1) ? $clog2(NUM_MASTERS) : 1,
  localparam int unsigned RW  = $clog2(BANK_WORDS)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  mem_req_t      m_req_i   [NUM_MASTERS],
  output mem_rsp_t      m_rsp_o   [NUM_MASTERS],
  output logic          b_req_o   [NUM_BANKS],
  output logic          b_we_o    [NUM_BANKS],
  output logic [RW-1:0] b_addr_o  [NUM_BANKS],
  output logic [3:0]    b_be_o    [NUM_BANKS],
  output word_t         b_wdata_o [NUM_BANKS],
  input  word_t         b_rdata_i [NUM_BANKS]
);

  logic [BKW-1:0] m_bank   [NUM_MASTERS];
  logic [MW-1:0]  rr_q     [NUM_BANKS];
  logic [MW-1:0]  winner   [NUM_BANKS];
  logic           b_busy   [NUM_BANKS];
  logic           gnt      [NUM_MASTERS];
  logic           rvalid_q [NUM_MASTERS];
  logic [BKW-1:0] rbank_q  [NUM_MASTERS];

  always_comb begin
    for (int m = 0; m < NUM_MASTERS; m++) m_bank[m] = m_req_i[m].addr[2 +: BKW];
  end

  // per-bank round-robin arbiter
  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      b_busy[b] = 1'b0;
      winner[b] = '0;
      for (int k = 0; k < NUM_MASTERS; k++) begin
        automatic logic [MW-1:0] m = MW'((int'(rr_q[b]) + k) % NUM_MASTERS);
        if (!b_busy[b] && m_req_i[m].req && m_bank[m] == BKW'(b)) begin
          b_busy[b] = 1'b1;
          winner[b] = MW'(m);
        end
      end
      b_req_o[b]   = b_busy[b];
      b_we_o[b]    = m_req_i[winner[b]].we;
      b_addr_o[b]  = m_req_i[winner[b]].addr[2+BKW +: RW];
      b_be_o[b]    = m_req_i[winner[b]].be;
      b_wdata_o[b] = m_req_i[winner[b]].wdata;
    end
  end

  always_comb begin
    for (int m = 0; m < NUM_MASTERS; m++) begin
      gnt[m] = m_req_i[m].req && b_busy[m_bank[m]] && (winner[m_bank[m]] == MW'(m));
      m_rsp_o[m].gnt    = gnt[m];
      m_rsp_o[m].rvalid = rvalid_q[m];
      m_rsp_o[m].rdata  = b_rdata_i[rbank_q[m]];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int b = 0; b < NUM_BANKS; b++) rr_q[b] <= '0;
      for (int m = 0; m < NUM_MASTERS; m++) begin
        rvalid_q[m] <= 1'b0;
        rbank_q[m]  <= '0;
      end
    end else begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        if (b_busy[b]) rr_q[b] <= MW'((int'(winner[b]) + 1) % NUM_MASTERS);
      end
      for (int m = 0; m < NUM_MASTERS; m++) begin
        rvalid_q[m] <= gnt[m];
        if (gnt[m]) rbank_q[m] <= m_bank[m];
      end
    end
  end

endmodule
