// bme_gate: 4x4 reversible BME gate,
//   P = A, Q = A B ^ C, R = A D ^ C, S = A'B ^ C ^ D.
//
// In the TR_BME_FG comparator cell A is the incoming "equal so far" line
// and C is 0. Q then gates the bit equality B and R gates the bit
// greater-than D. Combinational. The equations are the paper's. As
// printed they are not one-to-one: with A = 0, Q and R both equal C. The
// comparator only needs their function, which is unaffected.
module bme_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);
  always_comb begin
    p = a;
    q = (a & b) ^ c;
    r = (a & d) ^ c;
    s = (~a & b) ^ c ^ d;
  end
endmodule
