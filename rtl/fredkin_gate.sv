// fredkin_gate: 3x3 reversible Fredkin (controlled-swap) gate,
//   P = A, Q = A'B + A C, R = A'C + A B.
//
// When A is 1, B and C change places. In the decoder, A is the new address
// bit, B is a minterm and C is 0. Q is then (minterm AND NOT bit) and R is
// (minterm AND bit), and P passes the bit on to the next gate. The paper
// names this gate (FRG) but does not define it, so the standard Fredkin
// definition is used. Combinational.
module fredkin_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  always_comb begin
    p = a;
    q = (~a & b) | (a & c);
    r = (~a & c) | (a & b);
  end
endmodule
