// tb_symbol_ram: self-checking test of the 256x1 match RAM.
// Writes a random bit pattern through the write port, reads every address
// back through the asynchronous read port and compares with a copy kept in
// the testbench; then rewrites a few entries and checks them again.
module tb_symbol_ram;
  localparam int DEPTH = 256;
  logic clk = 0;
  logic we;
  logic [7:0] waddr, raddr;
  logic wdata, rdata;
  logic model [DEPTH];
  int checks = 0, failures = 0;

  symbol_ram #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_bit(input int a, input logic d);
    @(negedge clk); we = 1; waddr = 8'(a); wdata = d;
    @(negedge clk); we = 0;
    model[a] = d;
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int a = 0; a < DEPTH; a++) write_bit(a, 1'($urandom));
    for (int a = 0; a < DEPTH; a++) begin
      raddr = 8'(a); #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++; $display("mismatch at %0d: got %0b exp %0b", a, rdata, model[a]);
      end
    end
    for (int k = 0; k < 32; k++) begin
      automatic int a = $urandom_range(DEPTH-1);
      write_bit(a, ~model[a]);
      raddr = 8'(a); #1;
      checks++;
      if (rdata !== model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
