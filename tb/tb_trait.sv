// tb_trait: tests the default 64-input, 4-bit TRAIT adder tree against a plain
// sum: random vectors plus the all-ones and single-input corner cases.
module tb_trait;
  localparam int N_IN = 64, IN_W = 4, OUT_W = 10;
  logic rdb;
  logic [N_IN-1:0][IN_W-1:0] din;
  logic [OUT_W-1:0] sum;
  int checks = 0, failures = 0;

  trait dut (.rdb, .din, .sum);

  task automatic check_sum(string what);
    int ref_sum = 0;
    for (int i = 0; i < N_IN; i++) ref_sum += int'(din[i]);
    #1;
    checks++;
    if (int'(sum) != ref_sum) begin
      failures++; $display("%s: sum %0d expected %0d", what, sum, ref_sum);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rdb = 1'b1;
    for (int i = 0; i < N_IN; i++) din[i] = '1;
    check_sum("all ones");
    for (int k = 0; k < N_IN; k++) begin
      din = '0; din[k] = 4'(k % 15 + 1);
      check_sum("single input");
    end
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N_IN; i++) din[i] = IN_W'($urandom);
      check_sum("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
