// state_vector: per-sub-sequence record of the PEs that were activated.
//
// While a sub-sequence streams through the PE array, every step clock ORs
// the array's next activations into an M-bit vector, one bit per PE index,
// and sets a sticky `matched` flag when a PE with the report flag fires.
// At the end of the sub-sequence the controller either flushes the vector to
// the FIFO (matched) or discards it (no match) by clearing it for the next
// sub-sequence.
//
// The paper keeps, per sub-sequence, a vector of the activated PE IDs with
// one entry per PE (width m in its framework figure) and discards it when no
// match is found; the OR-accumulation is this design's reading of that.
// `clear` has priority over `step`.
module state_vector #(
  parameter int unsigned M = 6144
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,        // start of a new sub-sequence
  input  logic         step,         // step clock of the PE array
  input  logic [M-1:0] active_next,  // activations taking effect this step
  input  logic         report_any,   // a report PE fires this step
  output logic [M-1:0] vec,
  output logic         matched
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec     <= '0;
      matched <= 1'b0;
    end else if (clear) begin
      vec     <= '0;
      matched <= 1'b0;
    end else if (step) begin
      vec     <= vec | active_next;
      matched <= matched | report_any;
    end
  end

endmodule
