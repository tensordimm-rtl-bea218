// tdimm_tb_pkg: helpers shared by the TensorDIMM testbenches.
//
// init_block gives the contents a DRAM model returns for a block nobody has
// written: every lane is a small signed number derived from the DIMM id and
// the DIMM-local block number, so a testbench can compute expected results
// for any table address without preloading the table. The lane formula is
//   lane(t, b, l) = ((t*97 + b*13 + l*7) mod 201) - 100.
// The reference operations below mirror the TensorISA pseudo code.
package tdimm_tb_pkg;
  import tdimm_pkg::*;

  function automatic logic [31:0] init_lane(int unsigned t, longint unsigned b, int unsigned l);
    longint unsigned v;
    v = (longint'(t) * 97 + b * 13 + longint'(l) * 7) % 201;
    return 32'(int'(v) - 100);
  endfunction

  function automatic logic [BLOCK_W-1:0] init_block(int unsigned t, longint unsigned b);
    logic [BLOCK_W-1:0] r;
    for (int l = 0; l < LANES; l++) r[l*32 +: 32] = init_lane(t, b, l);
    return r;
  endfunction

  // single-precision bits <-> real, with subnormals read as zero and a
  // round-to-nearest-even conversion that flushes underflow to zero
  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = d[27:0] != 0;
    if (g && (st || m[0])) m = m + 1;
    if (m[24]) begin m = m >> 1; e++; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [BLOCK_W-1:0] ref_op(alu_op_t op, logic [BLOCK_W-1:0] a,
                                                 logic [BLOCK_W-1:0] b);
    logic [BLOCK_W-1:0] r;
    for (int l = 0; l < LANES; l++) begin
      int ea, eb;
      ea = int'(a[l*32 +: 32]);
      eb = int'(b[l*32 +: 32]);
      case (op)
        ALU_ADD: r[l*32 +: 32] = 32'(ea + eb);
        ALU_SUB: r[l*32 +: 32] = 32'(ea - eb);
        ALU_MUL: r[l*32 +: 32] = 32'(ea * eb);
        // single precision: exact in double for the operands the
        // testbenches use, then rounded once by r2f
        ALU_FADD: r[l*32 +: 32] = r2f(f2r(32'(ea)) + f2r(32'(eb)));
        ALU_FSUB: r[l*32 +: 32] = r2f(f2r(32'(ea)) - f2r(32'(eb)));
        ALU_FMUL: r[l*32 +: 32] = r2f(f2r(32'(ea)) * f2r(32'(eb)));
        default: r[l*32 +: 32] = 32'(ea);
      endcase
    end
    return r;
  endfunction

  // lane-wise signed sum kept at full precision, then divided (toward zero)
  function automatic logic [BLOCK_W-1:0] ref_mean(longint sums [LANES], int unsigned n);
    logic [BLOCK_W-1:0] r;
    for (int l = 0; l < LANES; l++) begin
      int s32;
      s32 = int'(sums[l]);             // the hardware accumulates in 32 bits
      r[l*32 +: 32] = 32'(s32 / int'(n));
    end
    return r;
  endfunction
endpackage
