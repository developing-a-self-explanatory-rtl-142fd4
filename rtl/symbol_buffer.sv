// symbol_buffer: n-entry buffer for one sub-sequence of symbols.
//
// The engine cuts the input stream into sub-sequences of n symbols. One
// instance holds the sub-sequence being processed (written while it is
// flushed in, read by the transition phase); a second instance holds the
// output sub-sequence built by the transduction stage. Synchronous write,
// asynchronous read, as a distributed RAM on the FPGA.
//
// The sub-sequence length n = 1000 is the value used in the paper's
// hardware results; the RAM style is this design's choice.
module symbol_buffer
  import nfa_pkg::*;
#(
  parameter int unsigned N  = 1000,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  sym_t          wdata,
  input  logic [AW-1:0] raddr,
  output sym_t          rdata
);

  sym_t mem [N];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
