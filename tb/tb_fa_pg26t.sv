// tb_fa_pg26t: exhaustive test of the power-gated full adder in PIM mode
// (rdb = 1, arithmetic sum) and storage mode (rdb = 0, outputs held low).
module tb_fa_pg26t;
  logic rdb, a, b, cin, sum, cout;
  int checks = 0, failures = 0;

  fa_pg26t dut (.*);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      {rdb, a, b, cin} = 4'(v);
      #1;
      checks++;
      if (rdb) begin
        if ({cout, sum} !== 2'(int'(a) + int'(b) + int'(cin))) begin
          failures++; $display("sum mismatch a=%0d b=%0d c=%0d", a, b, cin);
        end
      end else if ({cout, sum} !== 2'b00) begin
        failures++; $display("gated outputs not low");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
