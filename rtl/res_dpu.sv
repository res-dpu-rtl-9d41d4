// res_dpu: resource-shared digital processing unit (Res-DPU).
//
// Eight A5T cells in one column share a single 2-transistor AND. The read word
// lines select one cell (one-hot); its bit is the DPU's bit-line value rd. When
// cim_en is high the shared AND multiplies that stored weight bit by the input
// activation bit: mul = in_bit & w & cim_en. With cim_en low mul is 0, so a DPU
// can be switched out of the dot product. Everything is combinational from the
// cell outputs; writes are synchronous to clk.
// The sharing of one AND by eight cells is the paper's; the one-hot rule is
// checked with an assertion.
module res_dpu #(
  parameter int unsigned CELLS = 8
) (
  input  logic             clk,
  input  logic [CELLS-1:0] wwl,
  input  logic             wbit,
  input  logic [CELLS-1:0] rwl,
  input  logic             cim_en,
  input  logic             in_bit,
  output logic             mul,
  output logic             rd
);
  logic [CELLS-1:0] rbit;

  for (genvar i = 0; i < CELLS; i++) begin : g_cell
    a5t_cell u_cell (.clk, .wwl(wwl[i]), .wbit, .rwl(rwl[i]), .q(), .rbit(rbit[i]));
  end

  // Shared line: the selected cell's value (cells not selected contribute 0).
  assign rd  = |rbit;
  // Shared AND multiplier.
  assign mul = cim_en & in_bit & rd;

  a_rwl_onehot: assert property (@(posedge clk) $onehot0(rwl))
    else $error("res_dpu: more than one read word line active");
endmodule
