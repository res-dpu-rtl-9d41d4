// tb_a5t_cell: self-checking test of one A5T cell. Writes random bits through
// the write word line, checks that the bit holds while WWL is low, and that the
// read port shows the bit only while RWL is high.
module tb_a5t_cell;
  logic clk = 0, wwl, wbit, rwl, q, rbit;
  int checks = 0, failures = 0;
  logic model;

  a5t_cell dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wwl = 1; wbit = 0; rwl = 0;
    @(negedge clk); model = 0;
    for (int i = 0; i < 400; i++) begin
      wwl  = 1'($urandom_range(0, 1));
      wbit = 1'($urandom_range(0, 1));
      rwl  = 1'($urandom_range(0, 1));
      @(negedge clk);
      if (wwl) model = wbit;
      checks++;
      if (q !== model) begin failures++; $display("q mismatch at %0d", i); end
      checks++;
      if (rbit !== (rwl & model)) begin failures++; $display("rbit mismatch at %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
