// tr_gate: 3x3 reversible TR gate, P = A, Q = A ^ B, R = A B' ^ C.
//
// In the TR_BME_FG comparator cell it is fed (a, b, 0). Q then carries the
// bit difference a ^ b and R carries a b' (a greater than b at this bit).
// Combinational. The equations are the paper's.
module tr_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  always_comb begin
    p = a;
    q = a ^ b;
    r = (a & ~b) ^ c;
  end
endmodule
