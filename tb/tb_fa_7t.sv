// tb_fa_7t: exhaustive test of the 7-transistor full adder's logic function.
module tb_fa_7t;
  logic a, b, cin, sum, cout;
  int checks = 0, failures = 0;

  fa_7t dut (.*);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      checks++;
      if ({cout, sum} !== 2'(int'(a) + int'(b) + int'(cin))) begin
        failures++; $display("mismatch a=%0d b=%0d c=%0d", a, b, cin);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
