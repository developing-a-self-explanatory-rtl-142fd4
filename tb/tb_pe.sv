// tb_pe: self-checking test of one processor element.
// The PE is configured with random match bits for a small alphabet, random
// neighbour masks, start modes and report flags; random symbols, neighbour
// activations and first/clear flags are then applied with the two-clock
// strobe/step protocol. A reference model in the testbench predicts the
// activation and report after each step.
module tb_pe;
  import nfa_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic cfg_sel;
  sym_t sym;
  logic strobe, step, first, clear;
  logic [NDIR-1:0] nbr_active;
  logic active, active_next, report_next;
  int checks = 0, failures = 0;

  logic ram_m [NSYM];
  logic [3:0] mask_m;
  start_mode_e start_m;
  logic rep_m, act_m;

  pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(input cfg_target_e t, input int s, input int d, input logic sel);
    @(negedge clk);
    cfg = '{we: 1'b1, target: t, pe: 16'd0, sym: 8'(s), data: 8'(d)};
    cfg_sel = sel;
    @(negedge clk);
    cfg.we = 0;
  endtask

  task automatic configure();
    for (int s = 0; s < NSYM; s++) begin
      ram_m[s] = (s < 4) ? 1'($urandom) : 1'b0;
      cfg_write(CFG_SYM, s, int'(ram_m[s]), 1'b1);
    end
    mask_m  = 4'($urandom);
    start_m = start_mode_e'($urandom_range(2));
    rep_m   = 1'($urandom);
    cfg_write(CFG_SWITCH, 0, int'(mask_m), 1'b1);
    cfg_write(CFG_START, 0, int'(start_m), 1'b1);
    cfg_write(CFG_REPORT, 0, int'(rep_m), 1'b1);
    // a write to another PE must be ignored
    cfg_write(CFG_SWITCH, 0, int'(~mask_m), 1'b0);
    cfg_write(CFG_START, 0, 3, 1'b0);
  endtask

  initial begin
    cfg = '0; cfg_sel = 0; sym = 0; strobe = 0; step = 0; first = 0; clear = 0; nbr_active = 0;
    act_m = 0;
    #12 rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      configure();
      @(negedge clk); clear = 1; @(negedge clk); clear = 0; act_m = 0;
      checks++; if (active !== 1'b0) begin failures++; $display("clear failed"); end
      for (int t = 0; t < 60; t++) begin
        logic f, en;
        f = (t % 8) == 0;
        sym = 8'($urandom_range(3));
        nbr_active = 4'($urandom);
        first = f;
        strobe = 1; @(negedge clk); strobe = 0;
        sym = 8'($urandom);  // symbol may change after the strobe clock
        step = 1;
        en = (start_m == START_ALL) || (start_m == START_SUB && f) || ((mask_m & nbr_active) != 0);
        #1;
        checks++;
        if (active_next !== expected_next(en)) begin
          failures++; $display("round %0d t %0d: active_next %0b", round, t, active_next);
        end
        checks++;
        if (report_next !== (expected_next(en) && rep_m)) failures++;
        @(negedge clk); step = 0; first = 0;
        act_m = expected_next(en);
        checks++;
        if (active !== act_m) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // The symbol looked up in the last strobe clock.
  sym_t last_sym;
  always @(posedge clk) if (strobe) last_sym <= sym;
  function automatic logic expected_next(input logic en);
    return ram_m[int'(last_sym)] && en;
  endfunction
endmodule
