// tb_controller: self-checking test of the sub-sequence scheduler.
// Small sizes (N = 5, M = 7). Sub-sequences alternate between ones in which
// a report fires during the run phase and ones in which none does. For each
// the testbench checks the length of every phase (N, 2N, 1, M, N clocks,
// or 3N for a discarded one), the strobe/step alternation and the first
// flag, the input and output buffer addresses, the FIFO push and pop
// strobes, out_last and the two outcome counters. One sub-sequence is run
// with input and output stalls to check that the handshakes hold it.
module tb_controller;
  import nfa_pkg::*;
  localparam int N = 5, M = 7;
  localparam int NW = $clog2(N), MW = $clog2(M);
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, ibuf_we;
  logic [NW-1:0] ibuf_waddr, ibuf_raddr, obuf_raddr;
  logic arr_clear, arr_strobe, arr_step, arr_first;
  logic matched, report_any;
  logic fifo_push, fifo_pop, tr_start, tr_scan;
  logic [MW-1:0] tr_idx;
  logic out_valid, out_ready, out_last;
  ctrl_state_e state;
  logic [31:0] n_matched, n_discarded;
  int checks = 0, failures = 0;

  controller #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (state %s)", what, state.name()); end
  endtask

  // One sub-sequence; returns its length in clocks.
  task automatic run_sub(input logic hit, input logic stall, output int clocks);
    int k;
    clocks = 0;
    // load
    check(state == ST_LOAD, "starts in load");
    k = 0;
    while (k < N) begin
      in_valid = stall ? 1'($urandom) : 1'b1;
      #1;
      check(in_ready && arr_clear, "load: ready and clear");
      check(ibuf_we == in_valid, "load: buffer write follows in_valid");
      if (in_valid) begin check(ibuf_waddr == NW'(k), "load: write address"); k++; end
      @(negedge clk); clocks++;
    end
    in_valid = 0;
    // run
    for (int c = 0; c < 2 * N; c++) begin
      report_any = hit && (c == 2 * N - 1) && arr_step;
      #1;
      check(state == ST_RUN, "run phase");
      check(arr_strobe == (c % 2 == 0) && arr_step == (c % 2 == 1), "strobe/step alternate");
      check(arr_first == (c / 2 == 0), "first flag");
      check(ibuf_raddr == NW'(c / 2), "run: read address");
      check(!fifo_push && !tr_scan && !out_valid, "run: nothing else");
      @(negedge clk); clocks++;
    end
    report_any = 0;
    if (!hit) begin
      check(state == ST_LOAD, "discarded: back to load");
      return;
    end
    #1;
    check(state == ST_FLUSH_VEC && fifo_push && tr_start, "flush: push");
    @(negedge clk); clocks++;
    for (int c = 0; c < M; c++) begin
      #1;
      check(tr_scan && tr_idx == MW'(c), "transduce: index");
      check(fifo_pop == (c == M - 1), "transduce: pop on last");
      @(negedge clk); clocks++;
    end
    k = 0;
    while (k < N) begin
      out_ready = stall ? 1'($urandom) : 1'b1;
      #1;
      check(out_valid && obuf_raddr == NW'(k), "output: valid and address");
      check(out_last == (k == N - 1), "output: last");
      if (out_ready) k++;
      @(negedge clk); clocks++;
    end
    out_ready = 1;
  endtask

  initial begin
    int clocks, exp_m = 0, exp_d = 0;
    in_valid = 0; out_ready = 1; matched = 0; report_any = 0;
    #12 rst_n = 1;
    @(negedge clk);
    for (int s = 0; s < 8; s++) begin
      automatic logic hit = (s % 3) != 1;
      run_sub(hit, 1'b0, clocks);
      if (hit) exp_m++; else exp_d++;
      check(clocks == (hit ? 4 * N + M + 1 : 3 * N), $sformatf("sub %0d takes %0d clocks", s, clocks));
      check(n_matched == exp_m && n_discarded == exp_d, "outcome counters");
    end
    run_sub(1'b1, 1'b1, clocks);
    exp_m++;
    check(clocks >= 4 * N + M + 1, "stalled sub not shorter");
    check(n_matched == exp_m, "counter after stalled sub");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
