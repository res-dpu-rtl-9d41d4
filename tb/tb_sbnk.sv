// tb_sbnk: self-checking test of the 8 x 4 sub-bank. Writes eight random
// nibbles (one per row), then checks the 4-bit partial product IN & nibble and
// the read nibble for every row, input bit and enable.
module tb_sbnk;
  localparam int CELLS = 8, DPUS = 4;
  logic clk = 0;
  logic [CELLS-1:0] wwl, rwl;
  logic [DPUS-1:0] wdata, out_pp, rd;
  logic cim_en, in_bit;
  logic [DPUS-1:0] w [CELLS];
  int checks = 0, failures = 0;

  sbnk #(.CELLS(CELLS), .DPUS(DPUS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wwl = '0; rwl = '0; wdata = '0; cim_en = 0; in_bit = 0;
    for (int rep = 0; rep < 20; rep++) begin
      for (int i = 0; i < CELLS; i++) begin
        w[i] = DPUS'($urandom);
        @(negedge clk); wwl = '0; wwl[i] = 1'b1; wdata = w[i];
      end
      @(negedge clk); wwl = '0; wdata = '0;
      for (int i = 0; i < CELLS; i++)
        for (int e = 0; e < 2; e++)
          for (int b = 0; b < 2; b++) begin
            rwl = '0; rwl[i] = 1'b1; cim_en = 1'(e); in_bit = 1'(b);
            #1;
            checks++;
            if (out_pp !== ((e == 1 && b == 1) ? w[i] : '0)) begin
              failures++; $display("out_pp mismatch row %0d: %h", i, out_pp);
            end
            checks++;
            if (rd !== w[i]) begin failures++; $display("rd mismatch row %0d", i); end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
