// rev_comparator: the n-bit "group-based" reversible binary comparator.
//
// The comparison ripples from the most significant bit down. An I_N cell
// compares a[N-1] with b[N-1]. Its equal output becomes the chain's
// "equal so far" line Q and its greater output becomes the "greater so far"
// line P. Then (N-1) TR_BME_FG cells, one per lower bit from a[N-2] down to
// a[0], update both lines: Q stays 1 only while the bits match, and P turns
// 1 at the first bit where a = 1 and b = 0 while Q is still 1. An F_F cell
// at the end adds less-than = (P ^ Q)'. Exactly one of eq, gt and lt is 1.
//
// Interface: unsigned operands a and b, N >= 2 bits each. The results are
// eq (a == b), gt (a > b) and lt (a < b). garbage collects every garbage
// output of the reversible cells, 1 + 4(N-1) bits: bit 0 is the I_N cell's,
// then 4 bits per TR_BME_FG cell, lowest bit position first. The less-than
// output of the I_N cell is not used by the chain. Like the paper, that
// output is not counted as garbage. Purely combinational. The path runs
// through all N cells, so the delay grows linearly with N.
//
// The cell structure, the chain order and the cost (6 + 4(N-1) gates,
// 1 + 2N constant inputs, 1 + 4(N-1) garbage outputs) follow the paper.
// The default N = 32 is its largest worked example. Which chain line means
// "equal" and which "greater" is taken from the cell equations, because
// the figure labels disagree with them.
module rev_comparator
  import rev_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0]                a,
  input  logic [N-1:0]                b,
  output logic                        eq,
  output logic                        gt,
  output logic                        lt,
  output logic [cmp_garbage(N)-1:0]   garbage
);
  if (N < 2) begin : g_bad_n
    $error("rev_comparator: N must be at least 2");
  end

  // p[i] / q[i]: greater-so-far / equal-so-far after bits N-1 .. i.
  logic [N-1:0] p, q;
  logic         msb_lt;

  in_cell u_in (
    .a(a[N-1]), .b(b[N-1]),
    .e(q[N-1]), .l(msb_lt), .g(p[N-1]),
    .garbage(garbage[0])
  );

  for (genvar i = N - 2; i >= 0; i--) begin : g_bit
    tbf_cell u_tbf (
      .a(a[i]), .b(b[i]),
      .p_in(p[i+1]), .q_in(q[i+1]),
      .p_out(p[i]), .q_out(q[i]),
      .garbage(garbage[1 + 4*i +: 4])
    );
  end

  ff_cell u_ff (
    .p_in(p[0]), .q_in(q[0]),
    .p_out(gt), .q_out(eq), .l_out(lt)
  );
endmodule
