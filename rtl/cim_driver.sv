// cim_driver: compute-in-memory driver (activation side of the macro).
//
// Holds N_ACT activations of PREC bits, loaded one per cycle through act_we /
// act_idx / act_data (reset clears them). During a compute step (step_en high
// with pim_en) it broadcasts bit bit_idx of activation r to SBNK row r of every
// column (in_bits[r]) and raises the compute read word line row_sel in every DPU
// (rwl_cells, one-hot over the DPU's cells). Outside compute steps all its
// outputs are 0. It also reports lead = 1 + position of the leading one of the
// OR of all activations (0 when all are zero); the controller starts the
// most-significant-digit-first bit stream there, so all rows of a column share
// one bit weight per cycle. Bit-serial MSB-first feeding is the paper's; the
// register file and the common leading-one detector are this design's choice.
module cim_driver #(
  parameter int unsigned N_ACT = 32,
  parameter int unsigned PREC  = 16,
  parameter int unsigned CELLS = 8,
  localparam int unsigned IW   = $clog2(N_ACT),
  localparam int unsigned BW   = $clog2(PREC),
  localparam int unsigned LW   = $clog2(PREC + 1),
  localparam int unsigned CW   = $clog2(CELLS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             act_we,
  input  logic [IW-1:0]    act_idx,
  input  logic [PREC-1:0]  act_data,
  input  logic             pim_en,
  input  logic             step_en,
  input  logic [BW-1:0]    bit_idx,
  input  logic [CW-1:0]    row_sel,
  output logic [N_ACT-1:0] in_bits,
  output logic [CELLS-1:0] rwl_cells,
  output logic [LW-1:0]    lead
);
  logic [PREC-1:0] act [N_ACT];
  logic [PREC-1:0] act_or;
  logic            drive;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int r = 0; r < N_ACT; r++) act[r] <= '0;
    end else if (act_we) begin
      act[act_idx] <= act_data;
    end

  assign drive = pim_en & step_en;

  always_comb begin
    for (int r = 0; r < N_ACT; r++) in_bits[r] = drive & act[r][bit_idx];
    rwl_cells = '0;
    if (drive) rwl_cells[row_sel] = 1'b1;
  end

  // Leading-one detector over the OR of all activations.
  always_comb begin
    act_or = '0;
    for (int r = 0; r < N_ACT; r++) act_or |= act[r];
    lead = '0;
    for (int b = 0; b < PREC; b++)
      if (act_or[b]) lead = LW'(b + 1);
  end
endmodule
