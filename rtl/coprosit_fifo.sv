// coprosit_fifo: the first-in first-out buffer used three times in Coprosit
// (input buffer, memory stream FIFO and result FIFO).
//
// DEPTH entries of type T in a circular array with read and write pointers
// and an occupancy counter. push_ready is high when there is room, or when
// the FIFO is full but the head leaves in the same cycle, so a one-entry
// buffer still moves one item per cycle. pop_valid is high while the FIFO
// holds something and pop_data is the oldest entry (no fall-through: an item
// pushed in a cycle is visible from the next one). DEPTH=1 is the input
// buffer depth the paper gives; the FIFO structure itself is this design's.
module coprosit_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 2,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          push_valid_i,
  output logic          push_ready_o,
  input  T              push_data_i,
  output logic          pop_valid_o,
  input  logic          pop_ready_i,
  output T              pop_data_o,
  output logic [PW:0]   count_o
);
  T             mem_q [DEPTH];
  logic [PW-1:0] wptr_q, rptr_q;
  logic [PW:0]   cnt_q;
  logic          push, pop;

  assign pop_valid_o  = (cnt_q != '0);
  assign push_ready_o = (cnt_q != (PW+1)'(DEPTH)) || pop_ready_i;
  assign push         = push_valid_i && push_ready_o;
  assign pop          = pop_valid_o && pop_ready_i;
  assign pop_data_o   = mem_q[rptr_q];
  assign count_o      = cnt_q;

  function automatic logic [PW-1:0] next_ptr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
      for (int i = 0; i < int'(DEPTH); i++) mem_q[i] <= '0;
    end else begin
      if (push) begin
        mem_q[wptr_q] <= push_data_i;
        wptr_q        <= next_ptr(wptr_q);
      end
      if (pop) rptr_q <= next_ptr(rptr_q);
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  // a pop never happens on an empty FIFO, a push never on a full one
  assert property (@(posedge clk_i) disable iff (!rst_ni) pop |-> cnt_q != '0);
  assert property (@(posedge clk_i) disable iff (!rst_ni) cnt_q <= (PW+1)'(DEPTH));
endmodule
