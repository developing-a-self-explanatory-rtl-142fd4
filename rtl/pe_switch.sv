// pe_switch: programmable neighbour switch of one PE.
//
// The PE array only wires each PE to its four immediate neighbours (north,
// east, south, west). The switch holds a 4-bit mask, written during
// configuration, that says which neighbours' activations may enable this PE;
// its output is the OR of the selected neighbour activations. In automaton
// terms a set mask bit is a transition from the edge held by that neighbour
// to the edge held by this PE. Neighbour-only wiring follows the paper; the
// mask encoding (bit = nfa_pkg::dir_e) and its reset to 0 (no connection)
// are this design's choices.
module pe_switch
  import nfa_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_we,      // write a new mask
  input  logic [NDIR-1:0] cfg_mask,
  input  logic [NDIR-1:0] nbr_active,  // activations of N, E, S, W neighbours
  output logic            enable       // some selected neighbour is active
);

  logic [NDIR-1:0] mask_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      mask_q <= '0;
    else if (cfg_we) mask_q <= cfg_mask;
  end

  assign enable = |(mask_q & nbr_active);

endmodule
