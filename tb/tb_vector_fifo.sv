// tb_vector_fifo: self-checking test of the state-vector FIFO.
// Random pushes and pops (never pushing when full or popping when empty)
// are checked against a queue model: head data, full and empty flags.
module tb_vector_fifo;
  localparam int W = 24, DEPTH = 3;
  logic clk = 0, rst_n = 0;
  logic push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0;
  int n_full = 0;

  vector_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = 0;
    #12 rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == DEPTH)) begin
        failures++; $display("t %0d flags empty %0b full %0b size %0d", t, empty, full, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("t %0d dout %h exp %h", t, dout, q[0]); end
      end
      if (full) n_full++;
      push = !full && ($urandom_range(99) < 55);
      pop  = !empty && ($urandom_range(99) < 45);
      din  = W'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FIFO never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
