// tb_res_dpu: self-checking test of the resource-shared DPU. Fills the eight
// cells with random bits, then for every cell, input bit and CIM_EN value checks
// the shared-AND product MUL and the read-out bit.
module tb_res_dpu;
  localparam int CELLS = 8;
  logic clk = 0;
  logic [CELLS-1:0] wwl, rwl;
  logic wbit, cim_en, in_bit, mul, rd;
  logic [CELLS-1:0] w;
  int checks = 0, failures = 0;

  res_dpu #(.CELLS(CELLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wwl = '0; rwl = '0; wbit = 0; cim_en = 0; in_bit = 0;
    for (int rep = 0; rep < 20; rep++) begin
      w = CELLS'($urandom);
      for (int i = 0; i < CELLS; i++) begin
        @(negedge clk); wwl = '0; wwl[i] = 1'b1; wbit = w[i];
      end
      @(negedge clk); wwl = '0;
      for (int i = 0; i < CELLS; i++)
        for (int e = 0; e < 2; e++)
          for (int b = 0; b < 2; b++) begin
            rwl = '0; rwl[i] = 1'b1; cim_en = 1'(e); in_bit = 1'(b);
            #1;
            checks++;
            if (mul !== (w[i] & 1'(e) & 1'(b))) begin
              failures++; $display("mul mismatch cell %0d en %0d in %0d", i, e, b);
            end
            checks++;
            if (rd !== w[i]) begin failures++; $display("rd mismatch cell %0d", i); end
          end
      rwl = '0; #1;
      checks++;
      if (mul !== 1'b0) begin failures++; $display("mul with no row selected"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
