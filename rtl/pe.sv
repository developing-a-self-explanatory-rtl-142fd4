// pe: processor element holding one edge of the automaton.
//
// Each edge of the transducer graph is mapped to one PE. The PE holds
// - a 256x1 match RAM (symbol_ram) with the input symbols its edge accepts,
// - a neighbour switch (pe_switch) naming the neighbour PEs whose edges lead
//   into this one,
// - a start mode and a report flag.
// The edge fires (becomes active) for a symbol when the symbol matches and the
// PE is enabled, either by its start mode or by an active selected neighbour.
//
// Timing: a transition takes two clocks per symbol, as in the paper's
// execution-time formula. In the `strobe` clock the broadcast symbol is looked
// up in the match RAM and the result registered; in the `step` clock the
// activation register is updated from that match and the neighbours'
// activations of the previous symbol. `active_next` and `report_next` show,
// during the step clock, the value the activation takes at its end. `clear`
// drops the activation before a new sub-sequence.
//
// The RAM size and neighbour-only communication follow the paper. The
// two-phase split, the start modes (none / first symbol of a sub-sequence /
// every symbol) and the report flag per PE are this design's choices,
// modelled on the automata processor the paper builds on.
module pe
  import nfa_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // configuration
  input  cfg_t            cfg,
  input  logic            cfg_sel,     // cfg.pe addresses this PE
  // symbol stream
  input  sym_t            sym,
  input  logic            strobe,      // phase 1: look up sym
  input  logic            step,        // phase 2: update activation
  input  logic            first,       // current symbol is the first of the sub-sequence
  input  logic            clear,       // reset activation state
  input  logic [NDIR-1:0] nbr_active,
  output logic            active,
  output logic            active_next,
  output logic            report_next
);

  logic        cfg_hit;
  logic        ram_rd;
  logic        match_q;
  logic        sw_en;
  logic        start_ok;
  start_mode_e start_q;
  logic        report_q;

  assign cfg_hit = cfg.we && cfg_sel;

  symbol_ram #(.DEPTH(NSYM)) u_ram (
    .clk  (clk),
    .we   (cfg_hit && cfg.target == CFG_SYM),
    .waddr(cfg.sym),
    .wdata(cfg.data[0]),
    .raddr(sym),
    .rdata(ram_rd)
  );

  pe_switch u_sw (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg_we    (cfg_hit && cfg.target == CFG_SWITCH),
    .cfg_mask  (cfg.data[NDIR-1:0]),
    .nbr_active(nbr_active),
    .enable    (sw_en)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q  <= START_NONE;
      report_q <= 1'b0;
    end else if (cfg_hit) begin
      if (cfg.target == CFG_START)  start_q  <= start_mode_e'(cfg.data[1:0]);
      if (cfg.target == CFG_REPORT) report_q <= cfg.data[0];
    end
  end

  always_comb begin
    unique case (start_q)
      START_SUB: start_ok = first;
      START_ALL: start_ok = 1'b1;
      default:   start_ok = 1'b0;
    endcase
  end

  assign active_next = match_q && (start_ok || sw_en);
  assign report_next = active_next && report_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      match_q <= 1'b0;
      active  <= 1'b0;
    end else if (clear) begin
      match_q <= 1'b0;
      active  <= 1'b0;
    end else begin
      if (strobe) match_q <= ram_rd;
      if (step)   active  <= active_next;
    end
  end

endmodule
