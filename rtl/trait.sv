// trait: Transistor-Reduced 2-D Interspersed Adder Tree (TRAIT) of one column.
//
// Sums N_IN unsigned IN_W-bit partial products in a single combinational pass.
// The tree is binary: level l (1..log2 N_IN) has N_IN >> l ripple-carry adders of
// IN_W+l-1 bits, each one bit wider in its result, so the default 64 x 4-bit
// inputs grow 4b -> 5b -> 6b -> ... -> 10b as in the paper's tree drawing. Every
// adder alternates PG-26T and FA-7T cells along its carry chain and odd/even
// levels start with opposite cell types. rdb powers the PG-26T cells (PIM mode).
// The result sum is valid in the same cycle; the accumulator registers it.
// Structure and default size are the paper's; N_IN must be a power of two.
module trait #(
  parameter int unsigned N_IN = 64,
  parameter int unsigned IN_W = 4,
  localparam int unsigned LVLS  = $clog2(N_IN),
  localparam int unsigned OUT_W = IN_W + LVLS
) (
  input  logic                       rdb,
  input  logic [N_IN-1:0][IN_W-1:0]  din,
  output logic [OUT_W-1:0]           sum
);
  for (genvar l = 0; l <= LVLS; l++) begin : g_lvl
    logic [IN_W+l-1:0] node [N_IN >> l];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < N_IN; i++) begin : g_in
        assign node[i] = din[i];
      end
    end else begin : g_add
      for (genvar i = 0; i < (N_IN >> l); i++) begin : g_node
        trait_rca #(.W(IN_W + l - 1), .START_PG(l % 2 == 1)) u_rca (
          .rdb,
          .a(g_lvl[l-1].node[2*i]),
          .b(g_lvl[l-1].node[2*i+1]),
          .s(node[i])
        );
      end
    end
  end

  assign sum = g_lvl[LVLS].node[0];

  initial assert (N_IN >= 2 && (N_IN & (N_IN - 1)) == 0)
    else $fatal(1, "trait: N_IN must be a power of two");
endmodule
