// pe_array: two-dimensional array of processor elements.
//
// ROWS x COLS PEs; PE (r, c) has index r*COLS + c, which is the bit position
// used in every PE-indexed vector and in the transduction table. Each PE is
// wired only to its four immediate neighbours; neighbours outside the array
// read as inactive. The symbol, the phase strobes and the configuration bus
// are broadcast; configuration is decoded by comparing cfg.pe with each PE's
// index.
//
// Outputs: `active` is the current activation of all PEs; during a step clock
// `active_next` and `report_next` give the activations and report hits that
// take effect at its end, and `report_any` is their OR (a match).
//
// The 2D array with nearest-neighbour interconnect is the paper's. The
// default 64 x 96 = 6144 PEs is the largest array ("6K") of the paper's
// hardware results; the 64-row split of that count is this design's choice.
module pe_array
  import nfa_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 96,
  localparam int unsigned M   = ROWS * COLS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  cfg_t         cfg,
  input  sym_t         sym,
  input  logic         strobe,
  input  logic         step,
  input  logic         first,
  input  logic         clear,
  output logic [M-1:0] active,
  output logic [M-1:0] active_next,
  output logic [M-1:0] report_next,
  output logic         report_any
);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned ID = r * COLS + c;
      logic [NDIR-1:0] nbr;

      if (r > 0) begin : g_n
        assign nbr[DIR_N] = active[ID-COLS];
      end else begin : g_n0
        assign nbr[DIR_N] = 1'b0;
      end
      if (r < ROWS - 1) begin : g_s
        assign nbr[DIR_S] = active[ID+COLS];
      end else begin : g_s0
        assign nbr[DIR_S] = 1'b0;
      end
      if (c > 0) begin : g_w
        assign nbr[DIR_W] = active[ID-1];
      end else begin : g_w0
        assign nbr[DIR_W] = 1'b0;
      end
      if (c < COLS - 1) begin : g_e
        assign nbr[DIR_E] = active[ID+1];
      end else begin : g_e0
        assign nbr[DIR_E] = 1'b0;
      end

      pe u_pe (
        .clk        (clk),
        .rst_n      (rst_n),
        .cfg        (cfg),
        .cfg_sel    (cfg.pe == PEID_W'(ID)),
        .sym        (sym),
        .strobe     (strobe),
        .step       (step),
        .first      (first),
        .clear      (clear),
        .nbr_active (nbr),
        .active     (active[ID]),
        .active_next(active_next[ID]),
        .report_next(report_next[ID])
      );
    end
  end

  assign report_any = |report_next;

endmodule
