// tb_symbol_buffer: self-checking test of the sub-sequence buffer.
// Fills all N entries with random symbols, reads them back, then overwrites
// random entries and checks them.
module tb_symbol_buffer;
  import nfa_pkg::*;
  localparam int N = 37;
  localparam int AW = $clog2(N);
  logic clk = 0;
  logic we;
  logic [AW-1:0] waddr, raddr;
  sym_t wdata, rdata;
  sym_t model [N];
  int checks = 0, failures = 0;

  symbol_buffer #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input sym_t d);
    @(negedge clk); we = 1; waddr = AW'(a); wdata = d;
    @(negedge clk); we = 0;
    model[a] = d;
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int a = 0; a < N; a++) wr(a, sym_t'($urandom));
    for (int a = 0; a < N; a++) begin
      raddr = AW'(a); #1; checks++;
      if (rdata !== model[a]) begin failures++; $display("a %0d got %h exp %h", a, rdata, model[a]); end
    end
    for (int k = 0; k < 50; k++) begin
      automatic int a = $urandom_range(N-1);
      wr(a, sym_t'($urandom));
      raddr = AW'(a); #1; checks++;
      if (rdata !== model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
