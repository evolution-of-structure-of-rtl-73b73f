// rev_comparator_tb: self-checking test of the n-bit reversible comparator.
//
// Four comparators run in parallel: N = 2, 8, 16 and 32 (the default, so
// that one is built without a parameter override). A fifth, N = 64, gets
// its own operands. They take the low N bits
// of the shared operands. Each result is compared with the SystemVerilog
// relational operators on the same bits. Exactly one of eq/gt/lt must be 1.
// Stimulus:
//   - every operand pair for N = 2 and N = 8 (65,536 pairs),
//   - for every bit position of the 32-bit operands, random pairs that agree
//     above that bit and differ at it, in both directions, so the decision is
//     made once at every cell of the chain,
//   - equal pairs, all-zeros/all-ones corners and random pairs.
// The garbage widths and the cost formulas are checked against the
// published counts: 8/16/32-bit garbage 29/61/125 and constant inputs
// 17/33/65; 10 and 34 gates for 2 and 8 bits.
module rev_comparator_tb
  import rev_pkg::*;
;
  logic [31:0] a, b;
  logic eq2, gt2, lt2, eq8, gt8, lt8, eq16, gt16, lt16, eq32, gt32, lt32;
  logic [cmp_garbage(2)-1:0]  g2;
  logic [cmp_garbage(8)-1:0]  g8;
  logic [cmp_garbage(16)-1:0] g16;
  logic [cmp_garbage(32)-1:0] g32;
  logic [63:0] a64, b64;
  logic eq64, gt64, lt64;
  logic [cmp_garbage(64)-1:0] g64;
  int checks = 0;
  int failures = 0;
  int decided_at [32];

  rev_comparator #(.N(2))  u2  (.a(a[1:0]),  .b(b[1:0]),  .eq(eq2),  .gt(gt2),  .lt(lt2),  .garbage(g2));
  rev_comparator #(.N(8))  u8  (.a(a[7:0]),  .b(b[7:0]),  .eq(eq8),  .gt(gt8),  .lt(lt8),  .garbage(g8));
  rev_comparator #(.N(16)) u16 (.a(a[15:0]), .b(b[15:0]), .eq(eq16), .gt(gt16), .lt(lt16), .garbage(g16));
  rev_comparator #(.N(64)) u64 (.a(a64), .b(b64), .eq(eq64), .gt(gt64), .lt(lt64), .garbage(g64));
  rev_comparator           u32 (.a(a),       .b(b),       .eq(eq32), .gt(gt32), .lt(lt32), .garbage(g32));

  task automatic expect3(string name, logic eq, logic gt, logic lt,
                         logic [31:0] x, logic [31:0] y);
    checks++;
    if ({eq, gt, lt} !== {x == y, x > y, x < y}) begin
      failures++;
      $display("FAIL %s a=%h b=%h got eq/gt/lt=%b%b%b", name, x, y, eq, gt, lt);
    end
  endtask

  task automatic check_all();
    #1;
    expect3("N=2",  eq2,  gt2,  lt2,  {30'b0, a[1:0]},  {30'b0, b[1:0]});
    expect3("N=8",  eq8,  gt8,  lt8,  {24'b0, a[7:0]},  {24'b0, b[7:0]});
    expect3("N=16", eq16, gt16, lt16, {16'b0, a[15:0]}, {16'b0, b[15:0]});
    expect3("N=32", eq32, gt32, lt32, a, b);
  endtask

  task automatic expect64();
    checks++;
    if ({eq64, gt64, lt64} !== {a64 == b64, a64 > b64, a64 < b64}) begin
      failures++;
      $display("FAIL N=64 a=%h b=%h got eq/gt/lt=%b%b%b", a64, b64, eq64, gt64, lt64);
    end
  endtask

  task automatic check_num(string name, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s = %0d, published %0d", name, got, want);
    end
  endtask

  initial begin : watchdog
    #2000000;
    failures++;
    $display("watchdog expired");
    // 64-bit: decision at every position, then equal and random pairs.
    for (int k = 0; k < 64; k++) begin
      for (int t = 0; t < 8; t++) begin
        logic [63:0] m64;
        m64 = (k == 63) ? '1 : ((64'h1 << (k + 1)) - 1);
        a64 = {$urandom(), $urandom()};
        b64 = (a64 & ~m64) | ({$urandom(), $urandom()} & m64);
        b64[k] = ~a64[k];
        #1;
        expect64();
      end
    end
    for (int t = 0; t < 1000; t++) begin
      a64 = {$urandom(), $urandom()};
      b64 = (t % 4 == 0) ? a64 : {$urandom(), $urandom()};
      #1;
      expect64();
    end
    check_num("garbage width N=64", $bits(g64), 253);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] mask;
    // Published costs.
    check_num("garbage width N=8",  $bits(g8),  29);
    check_num("garbage width N=16", $bits(g16), 61);
    check_num("garbage width N=32", $bits(g32), 125);
    check_num("garbage width N=2",  $bits(g2),  5);
    check_num("constants N=8",  int'(cmp_consts(8)),  17);
    check_num("constants N=16", int'(cmp_consts(16)), 33);
    check_num("constants N=32", int'(cmp_consts(32)), 65);
    check_num("gates N=2", int'(cmp_gates(2)), 10);
    check_num("gates N=8", int'(cmp_gates(8)), 34);

    // Exhaustive over 8 bits (covers N = 2 too); upper bits random.
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        a = {$urandom() & 32'hFFFF_FF00} | 32'(i);
        b = {a[31:8], 8'(j)};
        check_all();
      end
    end

    // Decision at every bit position of the 32-bit chain.
    for (int k = 0; k < 32; k++) begin
      decided_at[k] = 0;
      mask = (k == 31) ? 32'hFFFF_FFFF : ((32'h1 << (k + 1)) - 1);
      for (int t = 0; t < 40; t++) begin
        a = $urandom();
        b = (a & ~mask) | ($urandom() & mask);
        b[k] = ~a[k];
        check_all();
        if (gt32 || lt32) decided_at[k]++;
      end
      checks++;
      if (decided_at[k] != 40) begin
        failures++;
        $display("FAIL bit %0d decided %0d of 40 times", k, decided_at[k]);
      end
    end

    // Equal pairs, corners, random.
    for (int t = 0; t < 200; t++) begin
      a = $urandom(); b = a; check_all();
    end
    a = '0; b = '0; check_all();
    a = '1; b = '1; check_all();
    a = '1; b = '0; check_all();
    a = '0; b = '1; check_all();
    a = 32'h8000_0000; b = 32'h7FFF_FFFF; check_all();
    a = 32'h0000_0001; b = 32'h0000_0000; check_all();
    for (int t = 0; t < 5000; t++) begin
      a = $urandom(); b = $urandom(); check_all();
    end

    // 64-bit: decision at every position, then equal and random pairs.
    for (int k = 0; k < 64; k++) begin
      for (int t = 0; t < 8; t++) begin
        logic [63:0] m64;
        m64 = (k == 63) ? '1 : ((64'h1 << (k + 1)) - 1);
        a64 = {$urandom(), $urandom()};
        b64 = (a64 & ~m64) | ({$urandom(), $urandom()} & m64);
        b64[k] = ~a64[k];
        #1;
        expect64();
      end
    end
    for (int t = 0; t < 1000; t++) begin
      a64 = {$urandom(), $urandom()};
      b64 = (t % 4 == 0) ? a64 : {$urandom(), $urandom()};
      #1;
      expect64();
    end
    check_num("garbage width N=64", $bits(g64), 253);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
