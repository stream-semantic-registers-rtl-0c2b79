// ssr_agu: address generator of one data mover lane.
//
// It walks an affine pattern of up to NUM_LOOPS (4) nested loops. Each loop
// level i has a counter Li that runs from 0 to bound_i[i] (the bound register
// holds the iteration count minus one) and an address increment stride_i[i].
// A pointer register holds the current address. On every step (en_i while
// valid_o), the counters form an enable chain: level 0 always counts, and
// level i counts when all levels below it are at their end. A priority
// encoder over that chain picks the highest counting level; the pointer adds
// that level's stride, the level's counter increments and the counters below
// it return to 0. Levels above dims_i are treated as always at their end.
// When every enabled level is at its end the current address is the last
// one (done_o); stepping past it ends the pattern (valid_o falls).
//
// Strides are therefore the increments applied when a level advances, after
// the lower levels have wrapped: for a plain row-major walk software writes
// stride[i] = step_i - sum_{j<i} bound[j]*stride[j]. This matches the paper's
// figure (one adder, a stride multiplexer steered by a priority encoder over
// the loop-end chain). Counter width (16 bit) is this design's choice.
//
// Timing: start_i loads the pointer from base_i and clears the counters at
// the next edge; addr_o is registered. One address per cycle.
module ssr_agu #(
  parameter int unsigned NUM_LOOPS   = 4,
  parameter int unsigned ADDR_WIDTH  = 32,
  parameter int unsigned BOUND_WIDTH = 16,
  localparam int unsigned DW = (NUM_LOOPS > 1) ? $clog2(NUM_LOOPS) : 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   start_i,
  input  logic                   abort_i,
  input  logic [ADDR_WIDTH-1:0]  base_i,
  input  logic [DW-1:0]          dims_i,     // number of enabled loops - 1
  input  logic [BOUND_WIDTH-1:0] bound_i  [NUM_LOOPS],
  input  logic [ADDR_WIDTH-1:0]  stride_i [NUM_LOOPS],
  input  logic                   en_i,
  output logic [ADDR_WIDTH-1:0]  addr_o,
  output logic                   valid_o,
  output logic                   done_o
);

  logic [BOUND_WIDTH-1:0] cnt_q [NUM_LOOPS];
  logic [ADDR_WIDTH-1:0]  ptr_q;
  logic                   busy_q;
  logic [NUM_LOOPS-1:0]   at_end;   // loop level i is at its last iteration
  logic [NUM_LOOPS-1:0]   chain;    // priority encoder inputs (enable chain)
  logic [DW-1:0]          sel;
  logic                   step;

  always_comb begin
    for (int i = 0; i < NUM_LOOPS; i++) begin
      at_end[i] = (DW'(i) > dims_i) || (cnt_q[i] == bound_i[i]);
    end
    sel = '0;
    for (int i = 0; i < NUM_LOOPS; i++) if (chain[i] && DW'(i) <= dims_i) sel = DW'(i);
  end

  // enable chain: level i counts when all levels below it are at their end
  assign chain[0] = 1'b1;
  for (genvar i = 1; i < NUM_LOOPS; i++) begin : g_chain
    assign chain[i] = chain[i-1] && at_end[i-1];
  end

  assign done_o  = busy_q && chain[NUM_LOOPS-1] && at_end[NUM_LOOPS-1];
  assign valid_o = busy_q;
  assign addr_o  = ptr_q;
  assign step    = en_i && busy_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      ptr_q  <= '0;
      for (int i = 0; i < NUM_LOOPS; i++) cnt_q[i] <= '0;
    end else if (abort_i) begin
      busy_q <= 1'b0;
    end else if (start_i) begin
      busy_q <= 1'b1;
      ptr_q  <= base_i;
      for (int i = 0; i < NUM_LOOPS; i++) cnt_q[i] <= '0;
    end else if (step) begin
      if (done_o) begin
        busy_q <= 1'b0;
      end else begin
        ptr_q <= ptr_q + stride_i[sel];
        for (int i = 0; i < NUM_LOOPS; i++) begin
          if (DW'(i) < sel)       cnt_q[i] <= '0;
          else if (DW'(i) == sel) cnt_q[i] <= cnt_q[i] + 1'b1;
        end
      end
    end
  end

endmodule
