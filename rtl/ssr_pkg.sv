// ssr_pkg: types and constants shared by the stream semantic register (SSR)
// extension, its data mover and the tightly coupled data memory (TCDM).
//
// The register numbers of the stream registers (t0, t1, ft0, ft1), the fused
// 6-bit register address space (integer registers 0-31, floating-point
// registers 32-63), the ssrcfg CSR address 0x7C0 and the 32-bit data width
// follow the paper. The memory request/response bundles, the layout of the
// data mover configuration registers and the status register bit fields are
// this design's own choices; they are described next to each definition.
package ssr_pkg;

  localparam int unsigned XLEN       = 32;  // data and address width
  localparam int unsigned REG_AW     = 6;   // fused int/fp register address
  localparam int unsigned NUM_LANES  = 2;   // data mover lanes per core
  localparam int unsigned NUM_LOOPS  = 4;   // nested loops per address generator
  localparam int unsigned BOUND_W    = 16;  // width of a loop bound/counter (own choice)

  typedef logic [XLEN-1:0]   word_t;
  typedef logic [REG_AW-1:0] regaddr_t;

  // Registers with stream semantics. Integer x5/x6 are t0/t1, floating-point
  // f0/f1 are ft0/ft1; the most significant address bit selects the FP half.
  localparam regaddr_t REG_T0  = 6'd5;
  localparam regaddr_t REG_T1  = 6'd6;
  localparam regaddr_t REG_FT0 = 6'd32;
  localparam regaddr_t REG_FT1 = 6'd33;

  // ssrcfg CSR address.
  localparam logic [11:0] CSR_SSRCFG = 12'h7C0;

  // True when a register address names one of the four stream registers.
  function automatic logic is_ssr_reg(regaddr_t a);
    return (a == REG_T0) || (a == REG_T1) || (a == REG_FT0) || (a == REG_FT1);
  endfunction

  // Lane that a stream register is bound to: t0/ft0 -> lane 0, t1/ft1 -> lane 1.
  function automatic logic lane_of(regaddr_t a);
    return (a == REG_T1) || (a == REG_FT1);
  endfunction

  // ---------------------------------------------------------------------------
  // Memory port (TCDM style). A request is accepted in the cycle in which gnt
  // is high; a granted read returns its data with rvalid exactly one cycle
  // later (single-cycle TCDM). Granted writes also produce rvalid, with
  // undefined data, so that every master can count its outstanding requests.
  typedef struct packed {
    logic       req;
    logic       we;
    logic [3:0] be;
    word_t      addr;
    word_t      wdata;
  } mem_req_t;

  typedef struct packed {
    logic  gnt;
    logic  rvalid;
    word_t rdata;
  } mem_rsp_t;

  // ---------------------------------------------------------------------------
  // CSR access from the pipeline (CSRRW/CSRRS/CSRRC semantics).
  typedef enum logic [1:0] {
    CSR_OP_READ  = 2'd0,
    CSR_OP_WRITE = 2'd1,
    CSR_OP_SET   = 2'd2,
    CSR_OP_CLEAR = 2'd3
  } csr_op_e;

  typedef struct packed {
    logic        valid;
    logic [11:0] addr;
    csr_op_e     op;
    word_t       wdata;
  } csr_req_t;

  // ---------------------------------------------------------------------------
  // Data mover configuration registers, as word indices inside a lane's
  // 32-word window. status, repeat, bound0-3 and stride0-3 are the ten
  // registers the paper names; the READ_nD/WRITE_nD aliases are write-only
  // shortcuts that set the pointer, direction and dimension in one store.
  typedef enum logic [4:0] {
    CFG_STATUS  = 5'd0,
    CFG_REPEAT  = 5'd1,
    CFG_BOUND0  = 5'd2,
    CFG_BOUND1  = 5'd3,
    CFG_BOUND2  = 5'd4,
    CFG_BOUND3  = 5'd5,
    CFG_STRIDE0 = 5'd6,
    CFG_STRIDE1 = 5'd7,
    CFG_STRIDE2 = 5'd8,
    CFG_STRIDE3 = 5'd9,
    CFG_READ_1D = 5'd24,
    CFG_READ_2D = 5'd25,
    CFG_READ_3D = 5'd26,
    CFG_READ_4D = 5'd27,
    CFG_WRITE_1D = 5'd28,
    CFG_WRITE_2D = 5'd29,
    CFG_WRITE_3D = 5'd30,
    CFG_WRITE_4D = 5'd31
  } cfg_reg_e;

  // Byte size of one lane's configuration window.
  localparam int unsigned CFG_LANE_BYTES = 32 * 4;

  // status register fields: [31] done, [30] write, [29:28] dims-1,
  // [27:0] pointer (low 28 address bits).
  localparam int unsigned ST_DONE  = 31;
  localparam int unsigned ST_WRITE = 30;
  localparam int unsigned ST_DIMS  = 28;
  localparam int unsigned PTR_W    = 28;

  // Configuration register access (already decoded to a lane and word).
  typedef struct packed {
    logic     valid;
    logic     write;
    logic [4:0] idx;
    word_t    wdata;
  } cfg_req_t;

  // ---------------------------------------------------------------------------
  // Pipeline-side bundle of one SSR-extended core (what the RI5CY pipeline
  // drives into, and receives from, the SSR additions). Three read and two
  // write register file ports as in RI5CY.
  localparam int unsigned NR = 3;
  localparam int unsigned NW = 2;

  typedef struct packed {
    regaddr_t [NR-1:0] raddr;        // read port addresses (decode stage)
    logic     [NR-1:0] rvalid;       // read port is accessed this cycle
    regaddr_t [NW-1:0] waddr;        // write port addresses (write-back)
    word_t    [NW-1:0] wdata;
    logic     [NW-1:0] wvalid;
    csr_req_t          csr;          // CSR access
    mem_req_t          lsu_req;      // LSU data request
    logic              id_uses_ssr_reg;     // decode instruction names t0/t1/ft0/ft1
    logic              csr_ssrcfg_pending;  // an ssrcfg write is in EX or WB
    logic              branch_pending;      // a branch is being resolved
  } core_in_t;

  typedef struct packed {
    word_t    [NR-1:0] rdata;
    logic     [NR-1:0] rready;
    logic     [NW-1:0] wready;
    word_t             csr_rdata;
    logic              csr_hit;
    mem_rsp_t          lsu_rsp;
    logic              ssr_en;
    logic              id_issue_ok;
    logic              stall_id;
    logic              stall_wb;
    logic [NUM_LANES-1:0] lane_done;
  } core_out_t;

endpackage
