// fa_7t: 7-transistor full adder used in every other position of the adder tree.
//
// Logic function of a full adder: sum = a ^ b ^ cin, cout = majority(a, b, cin).
// The real cell has no supply gating and a weak output level that the next
// PG-26T cell restores; that analog effect has no logic counterpart here.
module fa_7t (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  assign sum  = a ^ b ^ cin;
  assign cout = (a & b) | (cin & (a ^ b));
endmodule
