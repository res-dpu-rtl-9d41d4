// fa_pg26t: power-gated full adder (PG-26T) of the adder tree.
//
// A transmission-gate full adder whose supply is switched by the read/storage
// control rdb. In PIM mode (rdb = 1) it adds a + b + cin; in storage mode the
// supply is tied low and both outputs read 0. The internal propagate node x is
// a ^ b; sum = x ^ cin and cout = x ? cin : a, as in a mux-based adder.
// Polarity of rdb (1 = powered) is this design's choice; the gating itself is
// the paper's.
module fa_pg26t (
  input  logic rdb,   // 1: PIM mode, supply on
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  logic x;
  assign x    = a ^ b;
  assign sum  = rdb & (x ^ cin);
  assign cout = rdb & (x ? cin : a);
endmodule
