// nfa_transformer: training-free NFA transducer engine (top level).
//
// Maps an input symbol stream to an output symbol stream with a finite state
// transducer whose edges are loaded into a 2D array of processor elements
// (PEs), one edge per PE. Each PE matches the current symbol against its
// 256x1 match RAM and is enabled by active neighbour PEs; the transduction
// table gives each PE's output symbol. The input is processed in
// sub-sequences of N symbols:
//   1. the sub-sequence is streamed into the input buffer      (N clocks)
//   2. it is run through the PE array, two clocks per symbol  (2N clocks)
//   3. if a report PE fired, the M-bit vector of activated PEs is flushed to
//      the FIFO (1 clock); otherwise it is discarded and step 1 restarts
//   4. the transduction unit scans the vector, one PE per clock, collecting
//      the output symbols of the activated PEs in PE-index order  (M clocks)
//   5. the N-symbol output sub-sequence is streamed out       (N clocks)
// giving 4N + M + 1 clocks per matched sub-sequence. Output positions beyond
// the collected symbols carry SYM_EPS (0).
//
// Interface: `cfg` is a one-word-per-clock configuration bus (see
// nfa_pkg::cfg_t) used to load a new automaton, with no training involved;
// writes should be issued while the engine waits for input. Input and output
// are valid/ready streams of 8-bit symbols; `out_last` marks the last symbol
// of an output sub-sequence. Defaults: M = 64 x 96 = 6144 PEs (the paper's
// largest array) and N = 1000 (the sub-sequence length of its results).
module nfa_transformer
  import nfa_pkg::*;
#(
  parameter int unsigned ROWS      = 64,
  parameter int unsigned COLS      = 96,
  parameter int unsigned N         = 1000,
  parameter int unsigned FIFO_DEPTH = 2,
  localparam int unsigned M        = ROWS * COLS,
  localparam int unsigned NW       = $clog2(N),
  localparam int unsigned MW       = $clog2(M),
  localparam int unsigned CW       = $clog2(N + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  cfg_t        cfg,
  // input stream
  input  logic        in_valid,
  input  sym_t        in_sym,
  output logic        in_ready,
  // output stream
  output logic        out_valid,
  output sym_t        out_sym,
  output logic        out_last,
  input  logic        out_ready,
  // status
  output ctrl_state_e state,
  output logic [31:0] n_matched,
  output logic [31:0] n_discarded
);

  // controller wires
  logic          ibuf_we;
  logic [NW-1:0] ibuf_waddr, ibuf_raddr, obuf_raddr;
  logic          arr_clear, arr_strobe, arr_step, arr_first;
  logic          fifo_push, fifo_pop, fifo_full, fifo_empty;
  logic          tr_start, tr_scan;
  logic [MW-1:0] tr_idx;

  // datapath wires
  sym_t          cur_sym;
  logic [M-1:0]  active, active_next, report_next;
  logic          report_any;
  logic [M-1:0]  vec, fifo_dout;
  logic          matched;
  logic          obuf_we;
  logic [NW-1:0] obuf_waddr;
  sym_t          obuf_wdata, obuf_rdata;
  logic [CW-1:0] out_count;

  controller #(.N(N), .M(M)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (in_valid),
    .in_ready   (in_ready),
    .ibuf_we    (ibuf_we),
    .ibuf_waddr (ibuf_waddr),
    .ibuf_raddr (ibuf_raddr),
    .arr_clear  (arr_clear),
    .arr_strobe (arr_strobe),
    .arr_step   (arr_step),
    .arr_first  (arr_first),
    .matched    (matched),
    .report_any (report_any),
    .fifo_push  (fifo_push),
    .fifo_pop   (fifo_pop),
    .tr_start   (tr_start),
    .tr_scan    (tr_scan),
    .tr_idx     (tr_idx),
    .out_valid  (out_valid),
    .out_ready  (out_ready),
    .out_last   (out_last),
    .obuf_raddr (obuf_raddr),
    .state      (state),
    .n_matched  (n_matched),
    .n_discarded(n_discarded)
  );

  symbol_buffer #(.N(N)) u_ibuf (
    .clk  (clk),
    .we   (ibuf_we),
    .waddr(ibuf_waddr),
    .wdata(in_sym),
    .raddr(ibuf_raddr),
    .rdata(cur_sym)
  );

  pe_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk        (clk),
    .rst_n      (rst_n),
    .cfg        (cfg),
    .sym        (cur_sym),
    .strobe     (arr_strobe),
    .step       (arr_step),
    .first      (arr_first),
    .clear      (arr_clear),
    .active     (active),
    .active_next(active_next),
    .report_next(report_next),
    .report_any (report_any)
  );

  state_vector #(.M(M)) u_vec (
    .clk        (clk),
    .rst_n      (rst_n),
    .clear      (arr_clear),
    .step       (arr_step),
    .active_next(active_next),
    .report_any (report_any),
    .vec        (vec),
    .matched    (matched)
  );

  vector_fifo #(.W(M), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk  (clk),
    .rst_n(rst_n),
    .push (fifo_push),
    .din  (vec),
    .pop  (fifo_pop),
    .dout (fifo_dout),
    .full (fifo_full),
    .empty(fifo_empty)
  );

  transduction_unit #(.M(M), .N(N)) u_trans (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg_we    (cfg.we && cfg.target == CFG_OUT),
    .cfg_addr  (MW'(cfg.pe)),
    .cfg_data  (cfg.data),
    .start     (tr_start),
    .scan      (tr_scan && !fifo_empty),
    .idx       (tr_idx),
    .vec       (fifo_dout),
    .obuf_we   (obuf_we),
    .obuf_waddr(obuf_waddr),
    .obuf_wdata(obuf_wdata),
    .count     (out_count)
  );

  symbol_buffer #(.N(N)) u_obuf (
    .clk  (clk),
    .we   (obuf_we),
    .waddr(obuf_waddr),
    .wdata(obuf_wdata),
    .raddr(obuf_raddr),
    .rdata(obuf_rdata)
  );

  assign out_sym = (CW'(obuf_raddr) < out_count) ? obuf_rdata : SYM_EPS;

  // The schedule never pushes into a full FIFO: one vector is in flight.
  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) fifo_push |-> !fifo_full)
    else $error("nfa_transformer: state vector flushed into a full FIFO");

endmodule
