// bl_rw_ctrl: bit-line driver and read/write control of the array.
//
// Write: while wr_en is high the write data is driven onto the COLS bit lines
// (bl_wr); the SRAM driver raises the row's write word line. Read: rd_en raises
// the read word line of the addressed row (rwl_rd) in the same cycle; the bit
// lines returned by the array (bl_in) are captured at the next rising edge into
// rdata and rvalid pulses for one cycle. Pre-charge and sensing are analog and
// not modelled. The one-cycle read protocol is this design's choice.
module bl_rw_ctrl #(
  parameter int unsigned COLS = 64,
  parameter int unsigned ROWS = 256,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wr_en,
  input  logic            rd_en,
  input  logic [AW-1:0]   row,
  input  logic [COLS-1:0] wdata,
  input  logic [COLS-1:0] bl_in,
  output logic [COLS-1:0] bl_wr,
  output logic [ROWS-1:0] rwl_rd,
  output logic [COLS-1:0] rdata,
  output logic            rvalid
);
  assign bl_wr = wr_en ? wdata : '0;

  always_comb begin
    rwl_rd = '0;
    if (rd_en) rwl_rd[row] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rdata  <= '0;
      rvalid <= 1'b0;
    end else begin
      rvalid <= rd_en;
      if (rd_en) rdata <= bl_in;
    end

  a_no_rw_collision: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && rd_en))
    else $error("bl_rw_ctrl: read and write requested in the same cycle");
endmodule
