// rev_chip_top: top level of the reversible comparator and decoder design.
//
// Three independent combinational units sit side by side, each with its
// own pins:
//   - an n-bit group-based reversible comparator (rev_comparator),
//   - an n-to-2^n reversible decoder (rev_decoder),
//   - the Inventive-gate function set (ig_logic_set): AND, NAND, OR, NOR,
//     XOR, XNOR, NOT and half/full adder and subtractor, each from one gate.
// The garbage outputs of the reversible circuits come out as pins. A
// reversible realisation needs them to keep every input recoverable, and
// their widths show the paper's garbage counts.
//
// The units and their sizes are the paper's: a 32-bit comparator and a
// 3-to-8 decoder by default. The paper does not say how the units share a
// chip, so putting them side by side with separate pins is this design's
// choice. No clock or reset.
module rev_chip_top
  import rev_pkg::*;
#(
  parameter int unsigned CMP_N = 32,
  parameter int unsigned DEC_N = 3
) (
  input  logic [CMP_N-1:0]              cmp_a,
  input  logic [CMP_N-1:0]              cmp_b,
  output logic                          cmp_eq,
  output logic                          cmp_gt,
  output logic                          cmp_lt,
  output logic [cmp_garbage(CMP_N)-1:0] cmp_garbage_o,

  input  logic [DEC_N-1:0]              dec_x,
  output logic [(1 << DEC_N)-1:0]       dec_y,
  output logic [dec_garbage(DEC_N)-1:0] dec_garbage_o,

  input  logic                          ig_x,
  input  logic                          ig_y,
  input  logic                          ig_z,
  output ig_func_t                      ig_f
);
  rev_comparator #(.N(CMP_N)) u_cmp (
    .a(cmp_a), .b(cmp_b),
    .eq(cmp_eq), .gt(cmp_gt), .lt(cmp_lt),
    .garbage(cmp_garbage_o)
  );

  rev_decoder #(.N(DEC_N)) u_dec (
    .x(dec_x), .y(dec_y), .garbage(dec_garbage_o)
  );

  ig_logic_set u_igs (
    .x(ig_x), .y(ig_y), .z(ig_z), .f(ig_f)
  );
endmodule
