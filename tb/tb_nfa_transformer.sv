// tb_nfa_transformer: end-to-end test of the transducer engine.
//
// A 4 x 4 array (M = 16) with sub-sequences of N = 12 symbols is loaded over
// the configuration bus with a small transducer laid out on neighbouring PEs:
//   "hello" -> "hi"   PEs B h:h, B+1 e:i, B+2 l:eps, B+3 l:eps,
//                     B+3+COLS o:eps (report)
//   "het"   -> "hxy"  PEs B h:h, B+COLS e:x, B+2*COLS t:y (report); shares
//                     "he" with "hello", so two paths are active at once
//   "z" at the start of a sub-sequence -> "Z"  PE M-1 (report)
// with B = 0 here.
// Random sub-sequences, some with a pattern planted in them, are streamed in.
// A reference model in the testbench computes, for each sub-sequence, whether
// it matches and the output sub-sequence (output symbols of all activated PEs
// in PE order, padded with 0 to N). The testbench checks every output symbol,
// the outcome counters, and the clock count of unstalled sub-sequences
// against the paper's formula (4N + M + 1 matched, 3N discarded).
// It counts how often each mechanism happened and fails if one never did:
// matched and flushed, discarded, several PEs active in one step, a
// start-of-sub-sequence start, input stalls and output stalls.
module tb_nfa_transformer;
  import nfa_pkg::*;
  localparam int ROWS = 4, COLS = 4, M = ROWS * COLS, N = 12;
  localparam int NSUB = 60;
  localparam int B = 0;           // PE of the first edge

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_last, out_ready;
  sym_t in_sym, out_sym;
  ctrl_state_e state;
  logic [31:0] n_matched, n_discarded;
  int checks = 0, failures = 0;
  longint cycle = 0;

  // mechanism counters
  int c_match = 0, c_discard = 0, c_multi = 0, c_startsub = 0, c_in_stall = 0, c_out_stall = 0;
  int c_timed = 0;

  nfa_transformer #(.ROWS(ROWS), .COLS(COLS), .N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference configuration ----------------
  typedef struct {
    byte unsigned sym;   // accepted input symbol
    byte unsigned outs;  // output symbol
    int           mask;  // neighbour mask
    int           start; // start mode
    bit           rep;   // report flag
    bit           used;
  } edge_t;
  edge_t ed [M];

  task automatic set_edge(input int p, input byte unsigned s, input byte unsigned o,
                          input int mask, input int start, input bit rep);
    ed[p] = '{sym: s, outs: o, mask: mask, start: start, rep: rep, used: 1'b1};
  endtask

  task automatic cfg_write(input cfg_target_e t, input int p, input int s, input int d);
    @(negedge clk);
    cfg = '{we: 1'b1, target: t, pe: 16'(p), sym: 8'(s), data: 8'(d)};
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic load_config();
    for (int p = 0; p < M; p++) begin
      if (!ed[p].used) continue;
      for (int s = 0; s < NSYM; s++) cfg_write(CFG_SYM, p, s, int'(s == int'(ed[p].sym)));
      cfg_write(CFG_SWITCH, p, 0, ed[p].mask);
      cfg_write(CFG_START, p, 0, ed[p].start);
      cfg_write(CFG_REPORT, p, 0, int'(ed[p].rep));
      cfg_write(CFG_OUT, p, 0, int'(ed[p].outs));
    end
  endtask

  // ---------------- reference model ----------------
  function automatic bit model(input byte unsigned s [N], output byte unsigned o [N],
                               output bit multi, output bit startsub);
    bit act [M], nxt [M], vec [M];
    bit matched = 0;
    int k = 0;
    multi = 0; startsub = 0;
    for (int p = 0; p < M; p++) begin act[p] = 0; vec[p] = 0; end
    for (int t = 0; t < N; t++) begin
      int n_act = 0;
      for (int p = 0; p < M; p++) begin
        int r = p / COLS, c = p % COLS;
        bit en;
        nxt[p] = 0;
        if (!ed[p].used) continue;
        en = (ed[p].start == 2) || (ed[p].start == 1 && t == 0);
        if ((ed[p].mask & 1) && r > 0)        en |= act[p-COLS];
        if ((ed[p].mask & 2) && c < COLS - 1) en |= act[p+1];
        if ((ed[p].mask & 4) && r < ROWS - 1) en |= act[p+COLS];
        if ((ed[p].mask & 8) && c > 0)        en |= act[p-1];
        nxt[p] = en && (s[t] == ed[p].sym);
        if (nxt[p]) n_act++;
        if (nxt[p] && ed[p].rep) begin
          matched = 1;
          if (ed[p].start == 1) startsub = 1;
        end
      end
      if (n_act > 1) multi = 1;
      for (int p = 0; p < M; p++) begin act[p] = nxt[p]; vec[p] |= nxt[p]; end
    end
    for (int i = 0; i < N; i++) o[i] = 0;
    for (int p = 0; p < M; p++) if (vec[p] && k < N) begin o[k] = ed[p].outs; k++; end
    return matched;
  endfunction

  // ---------------- stimulus ----------------
  function automatic void make_sub(input int kind, output byte unsigned s [N]);
    string alpha = "helotaxq";
    string pat;
    for (int i = 0; i < N; i++) s[i] = alpha[$urandom_range(alpha.len() - 1)];
    case (kind)
      1: pat = "hello";
      2: pat = "het";
      3: begin s[0] = "z"; pat = ""; end
      4: begin  // no "h" and no leading "z": can never match
        for (int i = 0; i < N; i++) s[i] = alpha[2 + $urandom_range(alpha.len() - 3)];
        pat = "";
      end
      default: pat = "";
    endcase
    if (pat.len() > 0) begin
      int at = $urandom_range(N - pat.len());
      for (int i = 0; i < pat.len(); i++) s[at + i] = pat[i];
    end
  endfunction

  task automatic run_sub(input byte unsigned s [N], input bit stall);
    byte unsigned exp_o [N];
    bit multi, startsub, exp_match;
    longint t0 = 0;
    int k;
    int m0 = int'(n_matched), d0 = int'(n_discarded);
    exp_match = model(s, exp_o, multi, startsub);
    // stream the sub-sequence in
    k = 0;
    while (k < N) begin
      in_valid = stall ? ($urandom_range(3) != 0) : 1'b1;
      in_sym = sym_t'(s[k]);
      if (!in_valid) c_in_stall++;
      @(posedge clk);
      if (in_valid && in_ready) begin
        if (k == 0) t0 = cycle;
        k++;
      end
      @(negedge clk);
    end
    in_valid = 0;
    if (!exp_match) begin
      while (state != ST_LOAD) @(negedge clk);
      checks++;
      if (int'(n_discarded) != d0 + 1 || int'(n_matched) != m0) begin
        failures++; $display("expected discard, counters %0d/%0d", n_matched, n_discarded);
      end
      if (!stall) begin
        checks++; c_timed++;
        if (cycle - t0 != 3 * N) begin
          failures++; $display("discarded sub took %0d clocks, expected %0d", cycle - t0, 3 * N);
        end
      end
      c_discard++;
      return;
    end
    // collect the output sub-sequence
    k = 0;
    while (k < N) begin
      out_ready = stall ? ($urandom_range(3) != 0) : 1'b1;
      if (!out_ready && out_valid) c_out_stall++;
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (out_sym !== sym_t'(exp_o[k])) begin
          failures++; $display("out[%0d] = %02h, expected %02h", k, out_sym, exp_o[k]);
        end
        checks++;
        if (out_last !== (k == N - 1)) failures++;
        if (k == N - 1 && !stall) begin
          checks++; c_timed++;
          if (cycle - t0 + 1 != 4 * N + M + 1) begin
            failures++; $display("matched sub took %0d clocks, expected %0d", cycle - t0 + 1, 4 * N + M + 1);
          end
        end
        k++;
      end
      @(negedge clk);
    end
    out_ready = 1;
    checks++;
    if (int'(n_matched) != m0 + 1) begin failures++; $display("matched counter not advanced"); end
    c_match++;
    if (multi) c_multi++;
    if (startsub) c_startsub++;
  endtask

  task automatic check_mech(input string name, input int cnt);
    checks++;
    $display("  %-28s %0d", name, cnt);
    if (cnt == 0) begin failures++; $display("mechanism never exercised: %s", name); end
  endtask

  initial begin
    byte unsigned s [N];
    cfg = '0; in_valid = 0; in_sym = 0; out_ready = 1;
    for (int p = 0; p < M; p++) ed[p].used = 0;
    set_edge(B,            "h", "h", 0, 2, 0);  // start anywhere
    set_edge(B + 1,        "e", "i", 8, 0, 0);  // from west
    set_edge(B + 2,        "l", 0,   8, 0, 0);  // from west
    set_edge(B + 3,        "l", 0,   8, 0, 0);  // from west
    set_edge(B + 3 + COLS, "o", 0,   1, 0, 1);  // from north, report
    set_edge(B + COLS,     "e", "x", 1, 0, 0);  // from north (the "h" PE)
    set_edge(B + 2 * COLS, "t", "y", 1, 0, 1);  // from north, report
    set_edge(M - 1,        "z", "Z", 0, 1, 1);  // start of sub-sequence, report
    #12 rst_n = 1;
    load_config();
    @(negedge clk);

    // a fixed sub-sequence with "hello" and its known result
    begin
      string fixed = "qqhelloqqtqq";
      byte unsigned exp_o [N];
      bit mu, ss;
      for (int i = 0; i < N; i++) s[i] = fixed[i];
      void'(model(s, exp_o, mu, ss));
      checks++;
      if (exp_o[0] != "h" || exp_o[1] != "i" || exp_o[2] != 0) begin
        failures++; $display("reference model disagrees with the hand result");
      end
      run_sub(s, 1'b0);
    end

    for (int i = 0; i < NSUB; i++) begin
      make_sub(i % 5, s);
      run_sub(s, (i % 4) == 3);
    end

    $display("mechanisms:");
    check_mech("matched and flushed", c_match);
    check_mech("discarded (no match)", c_discard);
    check_mech("parallel active paths", c_multi);
    check_mech("start-of-sub-sequence match", c_startsub);
    check_mech("input stall", c_in_stall);
    check_mech("output stall", c_out_stall);
    check_mech("cycle count checked", c_timed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
