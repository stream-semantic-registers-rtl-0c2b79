// ssr_fifo: the first-in first-out queue in each data mover lane.
//
// In read mode it holds data prefetched from memory until the core reads the
// stream register; in write mode it holds data the core wrote until the lane
// stores it. It is a circular buffer of DEPTH entries with a fall-through
// read port: data_o shows the oldest entry combinationally while empty_o is
// low. push_i while full_o and pop_i while empty_o are ignored (and flagged
// by assertions). A push and a pop in the same cycle are both performed.
// flush_i empties the queue. The paper shows a FIFO in every lane; its depth
// (4 here) is this design's choice.
module ssr_fifo #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             flush_i,
  input  logic             push_i,
  input  logic [WIDTH-1:0] data_i,
  output logic             full_o,
  input  logic             pop_i,
  output logic [WIDTH-1:0] data_o,
  output logic             empty_o,
  output logic [CW-1:0]    usage_o
);

  logic [WIDTH-1:0] mem_q [DEPTH];
  logic [PW-1:0]    rd_q, wr_q;
  logic [CW-1:0]    cnt_q;
  logic             do_push, do_pop;

  assign full_o  = (cnt_q == CW'(DEPTH));
  assign empty_o = (cnt_q == '0);
  assign usage_o = cnt_q;
  assign data_o  = mem_q[rd_q];
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;

  function automatic logic [PW-1:0] next_ptr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else if (flush_i) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) begin
        mem_q[wr_q] <= data_i;
        wr_q        <= next_ptr(wr_q);
      end
      if (do_pop) rd_q <= next_ptr(rd_q);
      cnt_q <= cnt_q + CW'(do_push) - CW'(do_pop);
    end
  end

  // A producer must not push into a full queue, a consumer not pop an empty one.
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push_i && full_o))
    else $error("ssr_fifo: push while full");
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(pop_i && empty_o))
    else $error("ssr_fifo: pop while empty");

endmodule
