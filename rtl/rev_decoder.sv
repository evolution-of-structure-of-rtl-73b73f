// rev_decoder: the reversible n-to-2^n decoder ("approach 2").
//
// The two most significant inputs go to an I_F_T 2-to-4 cell. Each further
// input bit, taken from the top down, adds one rank of Fredkin gates, one
// per minterm built so far. The new bit drives the control input of the
// rank's first gate and is passed along the rank from gate to gate. Each
// gate gets a minterm on B and 0 on C, and splits it into minterm & ~bit
// and minterm & bit. Only the control line leaving the last gate of a rank
// is garbage. The decoder thus uses 2^n + 1 gates and has n garbage
// outputs, as in the paper's lemmas.
//
// Interface: y[k] is 1 exactly when x == k (one-hot). garbage holds N bits:
// [1:0] from the I_F_T cell, then bit k+1 from Fredkin rank k.
// Purely combinational.
//
// The structure follows the paper's Fig. 4(d) and Fig. 5, with default
// N = 3 (its worked 3-to-8 example). The paper's figures chain the Fredkin
// controls in the order a'b, ab', a'b', ab. Here they are chained in
// minterm order. That does not change the function.
module rev_decoder
  import rev_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic [N-1:0]              x,
  output logic [(1 << N)-1:0]       y,
  output logic [dec_garbage(N)-1:0] garbage
);
  if (N < 2) begin : g_bad_n
    $error("rev_decoder: N must be at least 2");
  end

  logic [3:0] m2;

  ift_decoder_cell u_cell (
    .a(x[N-1]), .b(x[N-2]),
    .m(m2), .garbage(garbage[1:0])
  );

  // Rank k decodes bit x[N-3-k], taking 2^(k+2) minterms to 2^(k+3).
  for (genvar k = 0; k < int'(N) - 2; k++) begin : g_rank
    localparam int unsigned MIN = 1 << (k + 2);
    logic [MIN-1:0]   m_in;
    logic [2*MIN-1:0] m_out;
    logic [MIN:0]     ctrl;

    if (k == 0) begin : g_first
      always_comb m_in = m2;
    end else begin : g_next
      always_comb m_in = g_rank[k-1].m_out;
    end

    always_comb ctrl[0] = x[N-3-k];

    for (genvar j = 0; j < int'(MIN); j++) begin : g_frg
      fredkin_gate u_frg (
        .a(ctrl[j]), .b(m_in[j]), .c(1'b0),
        .p(ctrl[j+1]), .q(m_out[2*j]), .r(m_out[2*j+1])
      );
    end

    always_comb garbage[k+2] = ctrl[MIN];
  end

  if (N == 2) begin : g_out2
    always_comb y = m2;
  end else begin : g_outn
    always_comb y = g_rank[N-3].m_out;
  end
endmodule
