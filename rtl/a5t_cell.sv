// a5t_cell: one dual-port 5T SRAM latch of the resource-shared DPU.
//
// The cell stores one bit. Its write port is the write word line WWL with the
// data bit driven by the bit-line driver; the write takes effect at the rising
// clock edge. Its read/compute port is the read word line RWL: while RWL is high
// the stored bit appears on rbit, which the DPU collects onto its shared line.
// The transistor circuit (two pull-ups, one pull-down, two pass gates) is
// reduced to this logic behaviour; the synchronous write and the absence of a
// reset are this design's choices (an SRAM cell has no reset).
module a5t_cell (
  input  logic clk,
  input  logic wwl,    // write word line
  input  logic wbit,   // write data
  input  logic rwl,    // read / compute word line
  output logic q,      // stored bit
  output logic rbit    // rwl & q
);
  always_ff @(posedge clk)
    if (wwl) q <= wbit;

  assign rbit = rwl & q;
endmodule
