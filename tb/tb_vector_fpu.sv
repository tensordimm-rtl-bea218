// tb_vector_fpu: self-checking test of the single-precision vector FPU.
//
// Drives the combinational datapath with random operands and compares every
// lane with a reference computed through the simulator's double-precision
// `real` arithmetic: operands are chosen so that the exact sum, difference
// or product fits in a double, and the double is then rounded to single
// precision by an independent round-to-nearest-even routine with the same
// flush-to-zero rule. The AVERAGE division result is compared after one
// double rounding, which differs from the exact result only in rare ties.
// Special cases (zeros, infinities, NaN, overflow, underflow, exact
// cancellation, large divisors) are checked with fixed expected values.
module tb_vector_fpu;
  import tdimm_pkg::*;
  import tdimm_tb_pkg::*;

  alu_op_t            op;
  logic [BLOCK_W-1:0] a, b, acc, pair, sum, mean;
  logic               first;
  logic [31:0]        avg_n;
  int                 checks = 0, failures = 0;

  vector_fpu dut (.op, .a, .b, .acc, .first, .avg_n, .pair, .sum, .mean);

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random normal float with exponent in [lo, hi]
  function automatic logic [31:0] rnd(int lo, int hi);
    return {1'($urandom), 8'(lo + int'($urandom % (hi - lo + 1))), 23'($urandom)};
  endfunction

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h expected %h", what, got, exp);
    end
  endtask

  task automatic lane_case(int l, logic [31:0] x, logic [31:0] y);
    a[l*32 +: 32] = x;
    b[l*32 +: 32] = y;
  endtask

  logic [31:0] x, y, s;
  int n;

  initial begin
    // random lanes, all operations
    for (int it = 0; it < 300; it++) begin
      for (int l = 0; l < LANES; l++) begin
        int base;
        base = 100 + int'($urandom % 50);
        a[l*32 +: 32]   = rnd(base, base + 12);
        b[l*32 +: 32]   = rnd(base, base + 12);
        acc[l*32 +: 32] = rnd(base, base + 12);
      end
      first = it[0];
      n = (it % 3 == 0) ? 1 + int'($urandom % 60) : int'($urandom);
      if (n == 0) n = 1;
      avg_n = 32'(n);
      foreach (op_list[k]) begin
        op = op_list[k];
        #1;
        for (int l = 0; l < LANES; l++) begin
          x = a[l*32 +: 32]; y = b[l*32 +: 32];
          case (op)
            ALU_FADD: check(pair[l*32 +: 32], r2f(f2r(x) + f2r(y)), "fadd");
            ALU_FSUB: check(pair[l*32 +: 32], r2f(f2r(x) - f2r(y)), "fsub");
            default:  check(pair[l*32 +: 32], r2f(f2r(x) * f2r(y)), "fmul");
          endcase
        end
      end
      for (int l = 0; l < LANES; l++) begin
        x = a[l*32 +: 32];
        s = first ? x : r2f(f2r(acc[l*32 +: 32]) + f2r(x));
        check(sum[l*32 +: 32], s, "sum");
        check(mean[l*32 +: 32], r2f(f2r(s) / real'(longint'(avg_n))), "mean");
      end
    end

    // special cases, lane 0
    a = '0; b = '0; acc = '0; first = 1'b1; avg_n = 1;
    op = ALU_FADD;
    lane_case(0, 32'h3F80_0000, 32'hBF80_0000); #1 check(pair[31:0], 32'h0000_0000, "1 + -1");
    lane_case(0, 32'h7F80_0000, 32'hFF80_0000); #1 check(pair[31:0], 32'h7FC0_0000, "inf - inf");
    lane_case(0, 32'h7F80_0000, 32'h3F80_0000); #1 check(pair[31:0], 32'h7F80_0000, "inf + 1");
    lane_case(0, 32'h7FC0_1234, 32'h3F80_0000); #1 check(pair[31:0], 32'h7FC0_0000, "nan + 1");
    lane_case(0, 32'h7F7F_FFFF, 32'h7F7F_FFFF); #1 check(pair[31:0], 32'h7F80_0000, "max + max");
    lane_case(0, 32'h0000_0001, 32'h3F80_0000); #1 check(pair[31:0], 32'h3F80_0000, "subnormal + 1");
    lane_case(0, 32'h3F80_0000, 32'h3380_0000); #1 check(pair[31:0], 32'h3F80_0000, "1 + 2^-24 tie to even");
    lane_case(0, 32'h3F80_0001, 32'h3380_0000); #1 check(pair[31:0], 32'h3F80_0002, "tie rounds up to even");
    lane_case(0, 32'h3F80_0000, 32'h2000_0000); #1 check(pair[31:0], 32'h3F80_0000, "far smaller operand");
    lane_case(0, 32'h3F80_0000, 32'hB380_0000); #1 check(pair[31:0], 32'h3F7F_FFFF, "1 - 2^-24");
    op = ALU_FMUL;
    lane_case(0, 32'h7F80_0000, 32'h0000_0000); #1 check(pair[31:0], 32'h7FC0_0000, "inf * 0");
    lane_case(0, 32'h0080_0000, 32'h0080_0000); #1 check(pair[31:0], 32'h0000_0000, "underflow");
    lane_case(0, 32'h8080_0000, 32'h0080_0000); #1 check(pair[31:0], 32'h8000_0000, "signed underflow");
    lane_case(0, 32'h7F00_0000, 32'h4000_0000); #1 check(pair[31:0], 32'h7F80_0000, "overflow");
    lane_case(0, 32'h4040_0000, 32'hC000_0000); #1 check(pair[31:0], 32'hC0C0_0000, "3 * -2");
    op = ALU_FAVG;
    lane_case(0, 32'h4040_0000, 32'h0);
    avg_n = 3;          #1 check(mean[31:0], 32'h3F80_0000, "3 / 3");
    avg_n = 32'hFFFF_FFFF; lane_case(0, 32'h4F80_0000, 32'h0);  // 2^32
    #1 check(mean[31:0], 32'h3F80_0000, "2^32 / (2^32-1) rounds to 1");
    avg_n = 2; lane_case(0, 32'h0100_0000, 32'h0);
    #1 check(mean[31:0], 32'h0080_0000, "smallest normal result");
    lane_case(0, 32'h0080_0000, 32'h0);
    #1 check(mean[31:0], 32'h0000_0000, "divide into subnormal flushes");
    first = 1'b0; acc[31:0] = 32'h3F80_0000; lane_case(0, 32'h3F80_0000, 32'h0);
    #1 check(sum[31:0], 32'h4000_0000, "acc 1 + 1");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  alu_op_t op_list[3] = '{ALU_FADD, ALU_FSUB, ALU_FMUL};
endmodule
