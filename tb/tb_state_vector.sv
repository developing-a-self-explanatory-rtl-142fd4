// tb_state_vector: self-checking test of the activated-PE log.
// Random activation vectors and report hits are applied on step clocks,
// with idle clocks and clears in between; the vector must be the OR of all
// activations since the last clear and `matched` the OR of the report hits.
module tb_state_vector;
  localparam int M = 40;
  logic clk = 0, rst_n = 0;
  logic clear, step, report_any, matched;
  logic [M-1:0] active_next, vec;
  logic [M-1:0] vec_m;
  logic match_m;
  int checks = 0, failures = 0;

  state_vector #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; step = 0; report_any = 0; active_next = 0;
    vec_m = '0; match_m = 0;
    #12 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      clear = ($urandom_range(19) == 0);
      step  = $urandom_range(1);
      active_next = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      report_any = ($urandom_range(15) == 0);
      @(posedge clk); #1;
      if (clear) begin vec_m = '0; match_m = 0; end
      else if (step) begin vec_m |= active_next; match_m |= report_any; end
      checks++;
      if (vec !== vec_m) begin failures++; $display("t %0d vec %h exp %h", t, vec, vec_m); end
      checks++;
      if (matched !== match_m) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
