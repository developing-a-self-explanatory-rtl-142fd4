// tb_pe_array: self-checking test of a small PE array against a reference
// NFA model.
// A 3 x 4 array is loaded with random match bits over a 4-symbol alphabet,
// random neighbour masks, start modes and report flags. Random symbols are
// then streamed with the strobe/step protocol; after every step the model,
// which applies the same edge semantics over the grid neighbourhood, predicts
// all activations, the report hits and report_any.
module tb_pe_array;
  import nfa_pkg::*;
  localparam int ROWS = 3, COLS = 4, M = ROWS * COLS;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  sym_t sym;
  logic strobe, step, first, clear;
  logic [M-1:0] active, active_next, report_next;
  logic report_any;
  int checks = 0, failures = 0;
  int n_reports = 0;

  logic ram_m [M][4];
  logic [3:0] mask_m [M];
  int start_m [M];
  logic rep_m [M];
  logic [M-1:0] act_m;

  pe_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(input cfg_target_e t, input int p, input int s, input int d);
    @(negedge clk);
    cfg = '{we: 1'b1, target: t, pe: 16'(p), sym: 8'(s), data: 8'(d)};
    @(negedge clk);
    cfg.we = 0;
  endtask

  function automatic logic [M-1:0] model_step(input int s, input logic f, output logic [M-1:0] rep);
    logic [M-1:0] nxt;
    for (int i = 0; i < M; i++) begin
      int r = i / COLS, c = i % COLS;
      logic en;
      en = (start_m[i] == 2) || (start_m[i] == 1 && f);
      if (mask_m[i][0] && r > 0)        en |= act_m[i-COLS];
      if (mask_m[i][1] && c < COLS - 1) en |= act_m[i+1];
      if (mask_m[i][2] && r < ROWS - 1) en |= act_m[i+COLS];
      if (mask_m[i][3] && c > 0)        en |= act_m[i-1];
      nxt[i] = ram_m[i][s] && en;
      rep[i] = nxt[i] && rep_m[i];
    end
    return nxt;
  endfunction

  initial begin
    cfg = '0; sym = 0; strobe = 0; step = 0; first = 0; clear = 0;
    #12 rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      for (int i = 0; i < M; i++) begin
        for (int s = 0; s < NSYM; s++) begin
          automatic logic b = (s < 4) ? ($urandom_range(99) < 70) : 1'b0;
          if (s < 4) ram_m[i][s] = b;
          cfg_write(CFG_SYM, i, s, int'(b));
        end
        mask_m[i]  = 4'($urandom);
        start_m[i] = ($urandom_range(9) == 0) ? 2 : ($urandom_range(3) == 0 ? 1 : 0);
        rep_m[i]   = ($urandom_range(3) == 0);
        cfg_write(CFG_SWITCH, i, 0, int'(mask_m[i]));
        cfg_write(CFG_START, i, 0, start_m[i]);
        cfg_write(CFG_REPORT, i, 0, int'(rep_m[i]));
      end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0; act_m = '0;
      checks++; if (active !== '0) failures++;
      for (int t = 0; t < 100; t++) begin
        automatic int s = $urandom_range(3);
        automatic logic f = (t % 10) == 0;
        logic [M-1:0] exp_next, exp_rep;
        sym = 8'(s); first = f;
        strobe = 1; @(negedge clk); strobe = 0; step = 1; #1;
        exp_next = model_step(s, f, exp_rep);
        checks++;
        if (active_next !== exp_next) begin
          failures++; $display("round %0d t %0d: next %b exp %b", round, t, active_next, exp_next);
        end
        checks++; if (report_next !== exp_rep) failures++;
        checks++; if (report_any !== (|exp_rep)) failures++;
        if (|exp_rep) n_reports++;
        @(negedge clk); step = 0; first = 0;
        act_m = exp_next;
        checks++; if (active !== act_m) failures++;
      end
    end
    checks++;
    if (n_reports == 0) begin failures++; $display("no report ever fired"); end
    $display("reports seen: %0d", n_reports);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
