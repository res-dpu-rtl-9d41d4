// tb_sram_driver: checks the one-hot write word line for every row address and
// that no line rises without EN_STR.
module tb_sram_driver;
  localparam int ROWS = 256;
  logic en_str;
  logic [7:0] row;
  logic [ROWS-1:0] wwl;
  int checks = 0, failures = 0;

  sram_driver dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      row = 8'(r); en_str = 1; #1;
      checks++;
      if (wwl !== (ROWS'(1) << r)) begin failures++; $display("row %0d wrong", r); end
      en_str = 0; #1;
      checks++;
      if (wwl !== '0) begin failures++; $display("row %0d raised without en_str", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
