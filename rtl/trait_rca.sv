// trait_rca: one interspersed ripple-carry adder of the TRAIT adder tree.
//
// Adds two W-bit unsigned operands into a W+1-bit sum through a carry chain of
// full adders whose type alternates along the chain: PG-26T, FA-7T, PG-26T, ...
// when START_PG = 1, or FA-7T first when START_PG = 0. The tree flips START_PG
// from one level to the next, so cell types also alternate across levels
// (the "2-D interspersed" arrangement). Carry-in of bit 0 is 0. The PG-26T
// cells are powered only while rdb is high; with rdb low the result is not
// meaningful (the tree is gated in storage mode). Purely combinational.
module trait_rca #(
  parameter int unsigned W        = 4,
  parameter bit          START_PG = 1'b1
) (
  input  logic         rdb,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W:0]   s
);
  logic [W:0] c;
  assign c[0] = 1'b0;

  for (genvar i = 0; i < W; i++) begin : g_bit
    if ((i % 2 == 0) == START_PG) begin : g_pg
      fa_pg26t u_fa (.rdb, .a(a[i]), .b(b[i]), .cin(c[i]), .sum(s[i]), .cout(c[i+1]));
    end else begin : g_7t
      fa_7t    u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(s[i]), .cout(c[i+1]));
    end
  end
  assign s[W] = c[W];
endmodule
