// symbol_ram: the 256x1-bit match memory of one processor element (PE).
//
// Entry s is 1 when the automaton edge held by the PE accepts input symbol s,
// so a lookup with the current symbol answers "does this edge match". The
// paper specifies a 256x1-bit distributed RAM per PE; this module is that RAM:
// one synchronous write port (used during configuration) and one
// asynchronous read port, as a LUT RAM provides. Contents are not reset; the
// array must be written before the PE is enabled.
module symbol_ram #(
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic                     wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic                     rdata
);

  logic [DEPTH-1:0] mem;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
