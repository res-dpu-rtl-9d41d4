// sram_driver: write word-line driver of the array.
//
// Decodes the row address into the one-hot write word lines WWL[ROWS-1:0]. The
// lines are raised only while the store enable en_str is high; the selected row
// is then written from the bit lines at the next rising clock edge. Purely
// combinational. Full-row writes are this design's choice.
module sram_driver #(
  parameter int unsigned ROWS = 256,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic            en_str,
  input  logic [AW-1:0]   row,
  output logic [ROWS-1:0] wwl
);
  always_comb begin
    wwl = '0;
    if (en_str) wwl[row] = 1'b1;
  end
endmodule
