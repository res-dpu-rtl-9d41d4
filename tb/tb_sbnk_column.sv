// tb_sbnk_column: one full-size column group (256 rows, 32 sub-banks, 32-input
// adder tree). Writes random nibbles into every row, then checks the adder-tree
// sum for random input bits and compute rows, and the read bit lines per row.
module tb_sbnk_column;
  localparam int ROWS = 256, CELLS = 8, DPUS = 4, NSB = 32;
  logic clk = 0, pim_en;
  logic [ROWS-1:0] wwl, rwl;
  logic [DPUS-1:0] bl_wr, bl_rd;
  logic [NSB-1:0] in_bits;
  logic [8:0] psum;
  logic [DPUS-1:0] mem [ROWS];
  int checks = 0, failures = 0;

  sbnk_column dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pim_en = 0; wwl = '0; rwl = '0; bl_wr = '0; in_bits = '0;
    for (int r = 0; r < ROWS; r++) begin
      mem[r] = DPUS'($urandom);
      @(negedge clk); wwl = '0; wwl[r] = 1'b1; bl_wr = mem[r];
    end
    @(negedge clk); wwl = '0; bl_wr = '0;
    for (int r = 0; r < ROWS; r++) begin
      rwl = '0; rwl[r] = 1'b1; #1;
      checks++;
      if (bl_rd !== mem[r]) begin failures++; $display("read row %0d", r); end
    end
    pim_en = 1;
    for (int t = 0; t < 200; t++) begin
      int cidx, ref_sum;
      cidx    = $urandom_range(0, CELLS - 1);
      ref_sum = 0;
      in_bits = NSB'($urandom);
      rwl = '0;
      for (int s = 0; s < NSB; s++) begin
        rwl[s*CELLS + cidx] = 1'b1;
        if (in_bits[s]) ref_sum += int'(mem[s*CELLS + cidx]);
      end
      #1;
      checks++;
      if (int'(psum) != ref_sum) begin failures++; $display("psum %0d expected %0d", psum, ref_sum); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
