// tb_trait_rca: tests the interspersed ripple-carry adder with both starting
// cell types: exhaustively at 4 bits, randomly at 9 bits (the widest adder of
// the default tree).
module tb_trait_rca;
  logic rdb;
  logic [3:0] a4, b4;  logic [4:0] s4p, s4s;
  logic [8:0] a9, b9;  logic [9:0] s9p, s9s;
  int checks = 0, failures = 0;

  trait_rca #(.W(4), .START_PG(1'b1)) u4p (.rdb, .a(a4), .b(b4), .s(s4p));
  trait_rca #(.W(4), .START_PG(1'b0)) u4s (.rdb, .a(a4), .b(b4), .s(s4s));
  trait_rca #(.W(9), .START_PG(1'b1)) u9p (.rdb, .a(a9), .b(b9), .s(s9p));
  trait_rca #(.W(9), .START_PG(1'b0)) u9s (.rdb, .a(a9), .b(b9), .s(s9s));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rdb = 1'b1;
    a9 = '0; b9 = '0;
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++) begin
        a4 = 4'(x); b4 = 4'(y); #1;
        checks += 2;
        if (s4p !== 5'(x + y)) begin failures++; $display("4b PG-first %0d+%0d=%0d", x, y, s4p); end
        if (s4s !== 5'(x + y)) begin failures++; $display("4b 7T-first %0d+%0d=%0d", x, y, s4s); end
      end
    for (int i = 0; i < 500; i++) begin
      a9 = 9'($urandom); b9 = 9'($urandom); #1;
      checks += 2;
      if (s9p !== 10'(a9) + 10'(b9)) begin failures++; $display("9b PG-first mismatch"); end
      if (s9s !== 10'(a9) + 10'(b9)) begin failures++; $display("9b 7T-first mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
