// sbnk_column: one column group of the array (SBNK #c) with its adder tree.
//
// A ROWS x DPUS slice of the array, built as ROWS/CELLS sub-banks stacked
// vertically; sub-bank s owns rows s*CELLS .. s*CELLS+CELLS-1 and receives input
// bit in_bits[s]. All word lines are shared with the other columns. In PIM mode
// each sub-bank's 4-bit partial product enters the TRAIT, whose sum (psum) is
// ready in the same cycle; pim_en also powers the tree. In storage mode the
// four read bit lines bl_rd carry the row selected by rwl (at most one row
// active). At the default size this is 32 sub-banks and a 32-input tree.
module sbnk_column #(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned CELLS = 8,
  parameter int unsigned DPUS  = 4,
  localparam int unsigned NSB  = ROWS / CELLS,
  localparam int unsigned PS_W = DPUS + $clog2(NSB)
) (
  input  logic            clk,
  input  logic            pim_en,
  input  logic [ROWS-1:0] wwl,
  input  logic [DPUS-1:0] bl_wr,
  input  logic [ROWS-1:0] rwl,
  input  logic [NSB-1:0]  in_bits,
  output logic [PS_W-1:0] psum,
  output logic [DPUS-1:0] bl_rd
);
  logic [NSB-1:0][DPUS-1:0] pp;
  logic [NSB-1:0][DPUS-1:0] rd;

  for (genvar s = 0; s < NSB; s++) begin : g_sbnk
    sbnk #(.CELLS(CELLS), .DPUS(DPUS)) u_sbnk (
      .clk,
      .wwl   (wwl[s*CELLS +: CELLS]),
      .wdata (bl_wr),
      .rwl   (rwl[s*CELLS +: CELLS]),
      .cim_en(pim_en),
      .in_bit(in_bits[s]),
      .out_pp(pp[s]),
      .rd    (rd[s])
    );
  end

  always_comb begin
    bl_rd = '0;
    for (int s = 0; s < NSB; s++) bl_rd |= rd[s];
  end

  trait #(.N_IN(NSB), .IN_W(DPUS)) u_trait (.rdb(pim_en), .din(pp), .sum(psum));
endmodule
