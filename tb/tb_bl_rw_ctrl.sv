// tb_bl_rw_ctrl: drives the read/write control against a small behavioural
// array in the testbench (rows written from bl_wr when the testbench's word
// line is high, bit lines returned from the row selected by rwl_rd). Checks
// write data on the bit lines, the read word line, read data and rvalid timing.
module tb_bl_rw_ctrl;
  localparam int COLS = 64, ROWS = 256;
  logic clk = 0, rst_n, wr_en, rd_en, rvalid;
  logic [7:0] row;
  logic [COLS-1:0] wdata, bl_in, bl_wr, rdata;
  logic [ROWS-1:0] rwl_rd;
  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] expect_q;
  int checks = 0, failures = 0;

  bl_rw_ctrl dut (.*);

  always #5 clk = ~clk;

  // Behavioural array.
  always_ff @(posedge clk) if (wr_en) mem[row] <= bl_wr;
  always_comb begin
    bl_in = '0;
    for (int r = 0; r < ROWS; r++) if (rwl_rd[r]) bl_in |= mem[r];
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; wr_en = 0; rd_en = 0; row = '0; wdata = '0;
    #12 rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; row = 8'(r); wdata = {$urandom, $urandom};
      #1;
      checks++;
      if (bl_wr !== wdata) begin failures++; $display("bl_wr wrong"); end
      checks++;
      if (rwl_rd !== '0) begin failures++; $display("rwl_rd during write"); end
    end
    @(negedge clk); wr_en = 0;
    #1;
    checks++;
    if (bl_wr !== '0) begin failures++; $display("bl_wr driven when idle"); end
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      rd_en = 1; row = 8'($urandom); expect_q = mem[row];
      #1;
      checks++;
      if (rwl_rd !== (ROWS'(1) << row)) begin failures++; $display("rwl_rd wrong"); end
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (!rvalid || rdata !== expect_q) begin failures++; $display("read %0d wrong", i); end
      @(negedge clk);
      checks++;
      if (rvalid) begin failures++; $display("rvalid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
