// accumulator: shift-accumulator behind one column's adder tree (MAC#c).
//
// Each enabled cycle adds the adder-tree sum, shifted left by the bit weight of
// that cycle (input bit position + 4 x weight nibble index), into a running
// ACC_W-bit total: acc <= acc + (psum << shift). clr starts a new MAC by loading
// zero (clr has priority over en). Results are unsigned. rst_n clears
// asynchronously. The 14-bit input width is the paper's; the shift-add form and
// the accumulator width are this design's choice.
module accumulator #(
  parameter int unsigned IN_W  = 14,
  parameter int unsigned ACC_W = 40,
  parameter int unsigned SH_W  = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             en,
  input  logic [SH_W-1:0]  shift,
  input  logic [IN_W-1:0]  psum,
  output logic [ACC_W-1:0] acc
);
  logic [ACC_W-1:0] addend;
  assign addend = ACC_W'(psum) << shift;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= '0;
    else if (en)  acc <= acc + addend;
endmodule
