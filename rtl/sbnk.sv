// sbnk: 8 x 4 sub-bank of the REP-DPIM array.
//
// Four Res-DPUs sit side by side and share their eight word-line pairs and one
// input activation bit. A row of the sub-bank holds a 4-bit weight nibble (bit j
// in DPU j). In compute mode the selected row is ANDed with the input bit, giving
// the 4-bit partial product out_pp = in_bit ? nibble : 0, which goes to the
// column's adder tree. In storage mode rd returns the selected nibble.
// The 8 x 4 shape and the 4-bit output are the paper's; the nibble-per-row
// weight layout is this design's choice.
module sbnk #(
  parameter int unsigned CELLS = 8,
  parameter int unsigned DPUS  = 4
) (
  input  logic             clk,
  input  logic [CELLS-1:0] wwl,
  input  logic [DPUS-1:0]  wdata,
  input  logic [CELLS-1:0] rwl,
  input  logic             cim_en,
  input  logic             in_bit,
  output logic [DPUS-1:0]  out_pp,
  output logic [DPUS-1:0]  rd
);
  for (genvar j = 0; j < DPUS; j++) begin : g_dpu
    res_dpu #(.CELLS(CELLS)) u_dpu (
      .clk, .wwl, .wbit(wdata[j]), .rwl, .cim_en, .in_bit,
      .mul(out_pp[j]), .rd(rd[j])
    );
  end
endmodule
