// rev_chip_top_tb: end-to-end test of the whole design at its default sizes
// (32-bit comparator, 3-to-8 decoder). The top is built with no parameter
// override.
//
// Each pass drives all three units at once: the comparator with an operand
// pair, the decoder with an address, and the function set with one (x, y, z)
// pattern. Every output is compared with reference values computed here:
// relational operators for the comparator, 1 << x for the decoder, and
// Boolean operators and integer add/subtract for the function set.
// Coverage counters record how often each mechanism happened. If any stays
// at zero, that counts as a failure. The mechanisms are: each comparator
// outcome (eq, gt, lt), a decision made at each of the 32 chain positions,
// each of the 8 decoder lines, and each function-set output seen at both
// 0 and 1.
module rev_chip_top_tb
  import rev_pkg::*;
;
  localparam int unsigned CN = 32;
  localparam int unsigned DN = 3;

  logic [CN-1:0] a, b;
  logic eq, gt, lt;
  logic [cmp_garbage(CN)-1:0] cg;
  logic [DN-1:0] x;
  logic [(1 << DN)-1:0] y;
  logic [dec_garbage(DN)-1:0] dg;
  logic fx, fy, fz;
  ig_func_t f;

  int checks = 0;
  int failures = 0;
  int n_eq = 0, n_gt = 0, n_lt = 0;
  int n_pos [CN];
  int n_line [1 << DN];
  int n_f0 [$bits(ig_func_t)];
  int n_f1 [$bits(ig_func_t)];

  rev_chip_top dut (
    .cmp_a(a), .cmp_b(b), .cmp_eq(eq), .cmp_gt(gt), .cmp_lt(lt), .cmp_garbage_o(cg),
    .dec_x(x), .dec_y(y), .dec_garbage_o(dg),
    .ig_x(fx), .ig_y(fy), .ig_z(fz), .ig_f(f)
  );

  function automatic ig_func_t ref_funcs(logic xx, logic yy, logic zz);
    ig_func_t r;
    int s2, s3, d2, d3;
    s2 = int'(xx) + int'(yy);
    s3 = s2 + int'(zz);
    d2 = int'(xx) - int'(yy);
    d3 = d2 - int'(zz);
    r.and_o = xx & yy;      r.nand_o = ~(xx & yy);
    r.xor_o = xx ^ yy;      r.not_o = ~xx;
    r.or_o = xx | yy;       r.nor_o = ~(xx | yy);
    r.xnor_o = ~(xx ^ yy);
    r.ha_sum = s2[0];       r.ha_carry = s2[1];
    r.hs_diff = d2[0];      r.hs_borrow = d2 < 0;
    r.fa_sum = s3[0];       r.fa_carry = s3[1];
    r.fs_diff = d3[0];      r.fs_borrow = d3 < 0;
    return r;
  endfunction

  // Position of the most significant differing bit, -1 if equal.
  function automatic int first_diff(logic [CN-1:0] p, logic [CN-1:0] q);
    for (int i = int'(CN) - 1; i >= 0; i--) if (p[i] != q[i]) return i;
    return -1;
  endfunction

  task automatic apply_and_check();
    ig_func_t want;
    int k;
    #1;
    checks++;
    if ({eq, gt, lt} !== {a == b, a > b, a < b}) begin
      failures++;
      $display("FAIL comparator a=%h b=%h eq/gt/lt=%b%b%b", a, b, eq, gt, lt);
    end
    checks++;
    if (y !== (1 << DN)'(1) << x) begin
      failures++;
      $display("FAIL decoder x=%0d y=%b", x, y);
    end
    want = ref_funcs(fx, fy, fz);
    checks++;
    if (f !== want) begin
      failures++;
      $display("FAIL function set xyz=%b%b%b got %b want %b", fx, fy, fz, f, want);
    end
    // coverage
    if (eq) n_eq++;
    if (gt) n_gt++;
    if (lt) n_lt++;
    k = first_diff(a, b);
    if (k >= 0 && (gt || lt)) n_pos[k]++;
    for (int i = 0; i < (1 << DN); i++) if (y[i]) n_line[i]++;
    for (int i = 0; i < $bits(ig_func_t); i++) begin
      if (f[i]) n_f1[i]++; else n_f0[i]++;
    end
  endtask

  task automatic need(string name, int count);
    checks++;
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", name);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [CN-1:0] mask;
    int t;
    for (int i = 0; i < int'(CN); i++) n_pos[i] = 0;
    for (int i = 0; i < (1 << DN); i++) n_line[i] = 0;
    for (int i = 0; i < $bits(ig_func_t); i++) begin n_f0[i] = 0; n_f1[i] = 0; end

    t = 0;
    // Decisions at every chain position, both directions.
    for (int k = 0; k < int'(CN); k++) begin
      for (int r = 0; r < 16; r++) begin
        mask = (k == int'(CN) - 1) ? '1 : ((CN)'(1) << (k + 1)) - 1;
        a = CN'($urandom());
        b = (a & ~mask) | (CN'($urandom()) & mask);
        b[k] = ~a[k];
        x = DN'(t);
        {fx, fy, fz} = 3'(t);
        apply_and_check();
        t++;
      end
    end
    // Equal operands and random operands.
    for (int r = 0; r < 2000; r++) begin
      a = CN'($urandom());
      b = (r % 4 == 0) ? a : CN'($urandom());
      x = DN'($urandom());
      {fx, fy, fz} = 3'($urandom());
      apply_and_check();
    end

    need("comparator result eq", n_eq);
    need("comparator result gt", n_gt);
    need("comparator result lt", n_lt);
    for (int i = 0; i < int'(CN); i++) need($sformatf("decision at bit %0d", i), n_pos[i]);
    for (int i = 0; i < (1 << DN); i++) need($sformatf("decoder line %0d", i), n_line[i]);
    for (int i = 0; i < $bits(ig_func_t); i++) begin
      need($sformatf("function output %0d low", i), n_f0[i]);
      need($sformatf("function output %0d high", i), n_f1[i]);
    end
    $display("coverage: eq=%0d gt=%0d lt=%0d, bit31 decisions=%0d, bit0 decisions=%0d",
             n_eq, n_gt, n_lt, n_pos[CN-1], n_pos[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
