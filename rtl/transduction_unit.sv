// transduction_unit: output function of the transducer.
//
// Holds the transduction table, one output symbol per PE (the output label of
// the edge that PE holds), in a distributed RAM written over the
// configuration bus. During the transduction phase the controller presents
// the PE indices 0 .. m-1, one per clock, together with the state vector at
// the head of the FIFO; for every PE whose bit is set, the PE's output symbol
// is written to the next free position of the output buffer. `count` tells how
// many positions were filled. Positions past n are dropped: an output
// sub-sequence has exactly n symbols.
//
// The separate transduction RAM and the cost of one clock per PE (m clocks)
// follow the paper. Emitting the symbols in PE-index order, so that an
// automaton is laid out with its edges in path order, and the cap at n are
// this design's choices.
module transduction_unit
  import nfa_pkg::*;
#(
  parameter int unsigned M   = 6144,
  parameter int unsigned N   = 1000,
  localparam int unsigned MW = $clog2(M),
  localparam int unsigned NW = $clog2(N),
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // table write port
  input  logic          cfg_we,
  input  logic [MW-1:0] cfg_addr,
  input  sym_t          cfg_data,
  // scan
  input  logic          start,     // reset the output position
  input  logic          scan,      // examine PE `idx` this clock
  input  logic [MW-1:0] idx,
  input  logic [M-1:0]  vec,       // state vector being transduced
  // output buffer write port
  output logic          obuf_we,
  output logic [NW-1:0] obuf_waddr,
  output sym_t          obuf_wdata,
  output logic [CW-1:0] count
);

  sym_t table_q [M];

  always_ff @(posedge clk) begin
    if (cfg_we) table_q[cfg_addr] <= cfg_data;
  end

  assign obuf_we    = scan && vec[idx] && (count < CW'(N));
  assign obuf_waddr = NW'(count);
  assign obuf_wdata = table_q[idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       count <= '0;
    else if (start)   count <= '0;
    else if (obuf_we) count <= count + 1'b1;
  end

endmodule
