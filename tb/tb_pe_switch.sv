// tb_pe_switch: self-checking test of the neighbour switch.
// After reset no neighbour may enable the PE. Then every 4-bit mask is
// written and, for each, all 16 neighbour activation patterns are applied;
// the enable output must equal the OR of the masked activations.
module tb_pe_switch;
  import nfa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we;
  logic [NDIR-1:0] cfg_mask, nbr_active;
  logic enable;
  int checks = 0, failures = 0;

  pe_switch dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_mask = 0; nbr_active = '1;
    #12 rst_n = 1;
    #1; checks++;
    if (enable !== 1'b0) begin failures++; $display("enabled after reset"); end
    for (int m = 0; m < 16; m++) begin
      @(negedge clk); cfg_we = 1; cfg_mask = 4'(m);
      @(negedge clk); cfg_we = 0; cfg_mask = 4'($urandom);
      for (int a = 0; a < 16; a++) begin
        nbr_active = 4'(a); #1;
        checks++;
        if (enable !== ((m & a) != 0)) begin
          failures++; $display("mask %0h nbr %0h: enable %0b", m, a, enable);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
