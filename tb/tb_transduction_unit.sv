// tb_transduction_unit: self-checking test of the transduction stage.
// The table is loaded with random symbols; for random state vectors the PE
// indices are scanned one per clock and every output-buffer write is checked
// against the expected sequence: the table entries of the set bits in index
// order, at most N of them. The final count is checked too.
module tb_transduction_unit;
  import nfa_pkg::*;
  localparam int M = 20, N = 6;
  localparam int MW = $clog2(M), NW = $clog2(N), CW = $clog2(N + 1);
  logic clk = 0, rst_n = 0;
  logic cfg_we, start, scan;
  logic [MW-1:0] cfg_addr, idx;
  sym_t cfg_data, obuf_wdata;
  logic [M-1:0] vec;
  logic obuf_we;
  logic [NW-1:0] obuf_waddr;
  logic [CW-1:0] count;
  sym_t table_m [M];
  int checks = 0, failures = 0;
  int n_capped = 0;

  transduction_unit #(.M(M), .N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; start = 0; scan = 0; cfg_addr = 0; idx = 0; cfg_data = 0; vec = 0;
    #12 rst_n = 1;
    for (int i = 0; i < M; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = MW'(i); cfg_data = sym_t'($urandom); table_m[i] = cfg_data;
    end
    @(negedge clk); cfg_we = 0;
    for (int round = 0; round < 30; round++) begin
      sym_t exp_q[$];
      int got = 0;
      exp_q.delete();
      got = 0;
      vec = M'($urandom) & M'($urandom);
      if (round % 3 == 0) vec = M'($urandom) | M'($urandom);
      for (int i = 0; i < M; i++) if (vec[i] && exp_q.size() < N) exp_q.push_back(table_m[i]);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int i = 0; i < M; i++) begin
        scan = 1; idx = MW'(i); #1;
        if (obuf_we) begin
          checks++;
          if (got >= exp_q.size() || obuf_waddr !== NW'(got) || obuf_wdata !== exp_q[got]) begin
            failures++; $display("round %0d pe %0d: write %0d:%h unexpected", round, i, obuf_waddr, obuf_wdata);
          end
          got++;
        end
        @(negedge clk);
      end
      scan = 0;
      checks++;
      if (got != exp_q.size() || count !== CW'(exp_q.size())) begin
        failures++; $display("round %0d: %0d writes, count %0d, expected %0d", round, got, count, exp_q.size());
      end
      if ($countones(vec) > N) n_capped++;
    end
    checks++;
    if (n_capped == 0) begin failures++; $display("cap at N never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
