// in_cell: the I_N 1-bit comparator cell. It compares the most significant
// bits a and b and starts the comparator chain.
//
// One Inventive gate with d = 1 and c = 0 gives P = a ^ b, Q = a'b,
// R = a'b' and S = a' + b. NOT gates on P and S turn them into
//   e = (a ^ b)'   (a == b)
//   l = a'b        (a <  b)
//   g = ab'        (a >  b)
// R is the cell's one garbage output. The cell costs 3 gates, 2 constant
// inputs and 1 garbage output, all as in the paper. Combinational.
module in_cell (
  input  logic a,
  input  logic b,
  output logic e,
  output logic l,
  output logic g,
  output logic garbage
);
  logic ig_p, ig_s;

  inventive_gate u_ig (
    .a(a), .b(b), .c(1'b0), .d(1'b1),
    .p(ig_p), .q(l), .r(garbage), .s(ig_s)
  );

  // The two 1x1 NOT gates.
  always_comb begin
    e = ~ig_p;
    g = ~ig_s;
  end
endmodule
