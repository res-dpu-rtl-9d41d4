// tb_accumulator: random shift-accumulate sequences with clears, checked
// against a 64-bit reference truncated to the accumulator width.
module tb_accumulator;
  localparam int IN_W = 14, ACC_W = 40, SH_W = 5;
  logic clk = 0, rst_n, clr, en;
  logic [SH_W-1:0] shift;
  logic [IN_W-1:0] psum;
  logic [ACC_W-1:0] acc;
  logic [63:0] model;
  int checks = 0, failures = 0;

  accumulator dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clr = 0; en = 0; shift = '0; psum = '0; model = '0;
    #12 rst_n = 1;
    @(negedge clk);
    checks++;
    if (acc !== '0) begin failures++; $display("not reset"); end
    for (int i = 0; i < 1000; i++) begin
      clr   = ($urandom_range(0, 19) == 0);
      en    = 1'($urandom_range(0, 3) != 0);
      shift = SH_W'($urandom_range(0, 27));
      psum  = IN_W'($urandom);
      @(negedge clk);
      if (clr) model = '0;
      else if (en) model = model + (64'(psum) << shift);
      checks++;
      if (acc !== ACC_W'(model)) begin
        failures++; $display("step %0d: acc %h expected %h", i, acc, ACC_W'(model));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
