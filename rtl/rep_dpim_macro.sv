// rep_dpim_macro: 16 Kb resource-shared digital processing-in-memory macro.
//
// A 256 x 64 SRAM array of resource-shared DPUs (eight cells sharing one AND)
// grouped in 8 x 4 sub-banks, 16 column groups each closed by an interspersed
// adder tree (TRAIT) and a shift-accumulator, plus the CIM driver, SRAM driver,
// bit-line read/write control and the CIA2M sequencer.
//
// Storage mode (pim_en = 0): en_str writes wdata into row `row` at the clock
// edge; rd_en reads row `row`, returned in rdata with rvalid one cycle later.
// Activations (32 x 16 bit) are loaded with act_we at any time while idle.
// PIM mode (pim_en = 1): start runs one MAC for all 16 columns at once:
//   mac[c] = sum over r of act[r] x W[r][c], where W[r][c] is the weight of
//   sub-bank r in column group c, w_nib nibbles in cell rows slot.. of the
//   sub-bank, i.e. array row 8r+slot+k holds nibble k in columns 4c..4c+3.
// The sequencer processes one input bit x one weight nibble per cycle, MSB
// first from the common leading one of the activations, and stops after all,
// four or three input bits (mode). done marks valid mac[] and cycles.
// col_en[c] = 0 switches column group c out of the dot product (for example a
// pruned filter): its DPUs' CIM_EN stays low and its adder tree stays
// unpowered, so mac[c] reads 0 after the MAC. col_en is sampled every cycle and
// should be held stable during a MAC.
// Block set and sizes follow the paper; the host interface is this design's.
module rep_dpim_macro #(
  parameter int unsigned ROWS = resdpu_pkg::ROWS,   // 256
  parameter int unsigned COLS = resdpu_pkg::COLS,   // 64
  localparam int unsigned NCG  = COLS / resdpu_pkg::SBNK_DPUS,
  localparam int unsigned NSB  = ROWS / resdpu_pkg::DPU_CELLS,
  localparam int unsigned AW   = $clog2(ROWS),
  localparam int unsigned IW   = $clog2(NSB),
  localparam int unsigned PS_W = resdpu_pkg::SBNK_DPUS + $clog2(NSB)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  pim_en,     // PIM_EN
  // storage port
  input  logic                  en_str,     // EN_STR: write row
  input  logic                  rd_en,
  input  logic [AW-1:0]         row,
  input  logic [COLS-1:0]       wdata,
  output logic [COLS-1:0]       rdata,
  output logic                  rvalid,
  // activation load
  input  logic                  act_we,
  input  logic [IW-1:0]         act_idx,
  input  logic [resdpu_pkg::MAX_PREC-1:0]   act_data,
  // MAC command
  input  logic                  start,
  input  resdpu_pkg::cia2m_mode_e           mode,
  input  logic [2:0]            w_nib,
  input  logic [2:0]            slot,
  input  logic [NCG-1:0]        col_en,     // per-column-group compute enable
  output logic                  busy,
  output logic                  done,
  output logic [7:0]            cycles,
  output logic [NCG-1:0][resdpu_pkg::ACC_W-1:0] mac
);
  logic            wr_ok, rd_ok;
  logic [ROWS-1:0] wwl, rwl, rwl_rd;
  logic [COLS-1:0] bl_wr, bl_rd;
  logic [NSB-1:0]  in_bits;
  logic [resdpu_pkg::DPU_CELLS-1:0] rwl_cells;
  logic [$clog2(resdpu_pkg::MAX_PREC+1)-1:0] lead;
  logic            step_en, acc_clr, acc_en;
  logic [$clog2(resdpu_pkg::MAX_PREC)-1:0] bit_idx;
  logic [2:0]      row_sel;
  logic [4:0]      shift;

  assign wr_ok = en_str & ~pim_en;
  assign rd_ok = rd_en & ~pim_en & ~en_str;

  sram_driver #(.ROWS(ROWS)) u_sram_drv (.en_str(wr_ok), .row, .wwl);

  bl_rw_ctrl #(.COLS(COLS), .ROWS(ROWS)) u_blrw (
    .clk, .rst_n, .wr_en(wr_ok), .rd_en(rd_ok), .row, .wdata,
    .bl_in(bl_rd), .bl_wr, .rwl_rd, .rdata, .rvalid
  );

  cim_driver #(.N_ACT(NSB), .PREC(resdpu_pkg::MAX_PREC), .CELLS(resdpu_pkg::DPU_CELLS)) u_cim_drv (
    .clk, .rst_n, .act_we, .act_idx, .act_data, .pim_en, .step_en,
    .bit_idx, .row_sel, .in_bits, .rwl_cells, .lead
  );

  cia2m_ctrl #(.PREC(resdpu_pkg::MAX_PREC), .CELLS(resdpu_pkg::DPU_CELLS)) u_ctrl (
    .clk, .rst_n, .pim_en, .start, .mode, .w_nib, .slot, .lead,
    .busy, .step_en, .bit_idx, .nib_idx(), .row_sel, .shift,
    .acc_clr, .acc_en, .done, .cycles
  );

  // Read word lines: compute pattern (same cell row in every DPU) in PIM mode,
  // the addressed row in storage mode.
  assign rwl = pim_en ? {NSB{rwl_cells}} : rwl_rd;

  for (genvar c = 0; c < NCG; c++) begin : g_col
    logic [PS_W-1:0] psum;

    sbnk_column #(.ROWS(ROWS), .CELLS(resdpu_pkg::DPU_CELLS), .DPUS(resdpu_pkg::SBNK_DPUS)) u_col (
      .clk, .pim_en(pim_en & col_en[c]), .wwl,
      .bl_wr  (bl_wr[c*resdpu_pkg::SBNK_DPUS +: resdpu_pkg::SBNK_DPUS]),
      .rwl, .in_bits, .psum,
      .bl_rd  (bl_rd[c*resdpu_pkg::SBNK_DPUS +: resdpu_pkg::SBNK_DPUS])
    );

    accumulator #(.IN_W(resdpu_pkg::ACC_IN_W), .ACC_W(resdpu_pkg::ACC_W), .SH_W(5)) u_acc (
      .clk, .rst_n, .clr(acc_clr), .en(acc_en), .shift,
      .psum(resdpu_pkg::ACC_IN_W'(psum)), .acc(mac[c])
    );
  end
endmodule
