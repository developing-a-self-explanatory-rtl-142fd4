// vector_fifo: FIFO between the automaton engine and the transduction stage.
//
// Carries the state vectors of matched sub-sequences. First-word-fall-through:
// `dout` shows the oldest entry whenever `empty` is low, and `pop` removes it.
// A push and a pop in the same clock are allowed. Pushing when full or
// popping when empty is a protocol error, caught by assertions, and is
// ignored by the logic.
//
// The paper names this FIFO but gives neither its depth nor its interface;
// the default depth of 2 and the handshake are this design's choices. With
// the sequential schedule of the controller one entry is in use at a time.
module vector_fifo #(
  parameter int unsigned W     = 6144,
  parameter int unsigned DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         full,
  output logic         empty
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]        mem [DEPTH];
  logic [AW-1:0]       rd_ptr, wr_ptr;
  localparam int unsigned CW = $clog2(DEPTH + 1);
  logic [CW-1:0]       count;
  logic                do_push, do_pop;

  assign full    = (count == CW'(DEPTH));
  assign empty   = (count == 0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= incr(wr_ptr);
      if (do_pop)  rd_ptr <= incr(rd_ptr);
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full || pop)
    else $error("vector_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("vector_fifo: pop while empty");

endmodule
