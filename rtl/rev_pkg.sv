// rev_pkg: shared constants and cost formulas for the reversible comparator
// and decoder.
//
// The functions below give the reversible-logic cost of each structure:
// gate count, garbage outputs and constant inputs. The RTL uses them to size
// its garbage buses, and testbenches use them to check those sizes. The
// comparator formulas (Lemma 6.7.1, Table 3) and decoder formulas
// (Lemmas 5.2.1.2 and 5.2.1.3) follow the paper. The per-cell figures they
// are built from are also the paper's. The comparator has one I_N cell,
// (n-1) TR_BME_FG cells and one F_F cell.
package rev_pkg;

  // Per-cell costs of the comparator cells.
  localparam int unsigned IN_GATES    = 3;  // 1 Inventive + 2 NOT
  localparam int unsigned IN_GARBAGE  = 1;
  localparam int unsigned IN_CONST    = 2;
  localparam int unsigned TBF_GATES   = 4;  // TR + NOT + BME + FG
  localparam int unsigned TBF_GARBAGE = 4;
  localparam int unsigned TBF_CONST   = 2;
  localparam int unsigned FF_GATES    = 3;  // 2 FG + NOT
  localparam int unsigned FF_GARBAGE  = 0;
  localparam int unsigned FF_CONST    = 1;

  // I_F_T 2-to-4 decoder cell (approach 2): Inventive + 2 NOT + FG + TG.
  localparam int unsigned IFT_GATES   = 5;
  localparam int unsigned IFT_GARBAGE = 2;

  // n-bit comparator: 6 + 4(n-1) gates.
  function automatic int unsigned cmp_gates(int unsigned n);
    return IN_GATES + TBF_GATES * (n - 1) + FF_GATES;
  endfunction

  // n-bit comparator: 1 + 4(n-1) garbage outputs.
  function automatic int unsigned cmp_garbage(int unsigned n);
    return IN_GARBAGE + TBF_GARBAGE * (n - 1) + FF_GARBAGE;
  endfunction

  // n-bit comparator: 2 + 2(n-1) + 1 = 1 + 2n constant inputs.
  function automatic int unsigned cmp_consts(int unsigned n);
    return IN_CONST + TBF_CONST * (n - 1) + FF_CONST;
  endfunction

  // n-to-2^n decoder (approach 2): 2^n + 1 gates (one Fredkin gate per
  // minterm of each rank added after the 2-to-4 cell).
  function automatic int unsigned dec_gates(int unsigned n);
    return IFT_GATES + ((1 << n) - 4);
  endfunction

  // n-to-2^n decoder: n garbage outputs (2 from the I_F_T cell, then one
  // per Fredkin rank: the control line leaving the last gate of the rank).
  function automatic int unsigned dec_garbage(int unsigned n);
    return IFT_GARBAGE + (n - 2);
  endfunction

  // Functions produced by the Inventive-gate function set (Fig. 1a-1h).
  typedef struct packed {
    logic and_o;      // x & y          (Fig. 1a, output Q)
    logic nand_o;     // ~(x & y)       (Fig. 1a, output R)
    logic xor_o;      // x ^ y          (Fig. 1b, output P)
    logic not_o;      // ~x             (Fig. 1b, output R)
    logic or_o;       // x | y          (Fig. 1b, output S)
    logic nor_o;      // ~(x | y)       (Fig. 1c, output S)
    logic xnor_o;     // ~(x ^ y)       (Fig. 1d, output P)
    logic ha_sum;     // x + y          (Fig. 1e, P)
    logic ha_carry;   //                (Fig. 1e, Q)
    logic hs_diff;    // x - y          (Fig. 1f, P)
    logic hs_borrow;  //                (Fig. 1f, Q)
    logic fa_sum;     // x + y + z      (Fig. 1g, P)
    logic fa_carry;   //                (Fig. 1g, Q)
    logic fs_diff;    // x - y - z      (Fig. 1h, P)
    logic fs_borrow;  //                (Fig. 1h, Q)
  } ig_func_t;

endpackage
