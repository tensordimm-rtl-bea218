// vector_fpu: the 16-lane single-precision floating-point datapath of the
// vector ALU.
//
// Purely combinational; the vector ALU owns the queues, the handshakes and
// the AVERAGE accumulator register, and selects this datapath's results for
// the floating-point operations. For each 32-bit lane l:
//   pair = A op B                    op = ALU_FADD / ALU_FSUB / ALU_FMUL
//   sum  = first ? A : acc + A       running AVERAGE sum (one add per block)
//   mean = sum / avg_n               the AVERAGE result, avg_n >= 1
// Subtraction is addition with the sign of B flipped. The arithmetic is in
// fp32_pkg: round to nearest even, subnormals flushed to zero. The sum is
// accumulated in single precision in arrival order, so it rounds after
// every block, as a sequential float loop would.
//
// The published design names a single-precision FPU next to the
// fixed-point ALU; its structure and these numerical details are this
// design's choice.
module vector_fpu
  import tdimm_pkg::*;
  import fp32_pkg::*;
(
  input  alu_op_t             op,
  input  logic [BLOCK_W-1:0]  a,
  input  logic [BLOCK_W-1:0]  b,
  input  logic [BLOCK_W-1:0]  acc,
  input  logic                first,   // no block of this group summed yet
  input  logic [31:0]         avg_n,
  output logic [BLOCK_W-1:0]  pair,
  output logic [BLOCK_W-1:0]  sum,
  output logic [BLOCK_W-1:0]  mean
);
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [31:0] ea, eb, es;
      ea = a[l*ELEM_W +: ELEM_W];
      eb = b[l*ELEM_W +: ELEM_W];
      es = first ? ea : fp32_add(acc[l*ELEM_W +: ELEM_W], ea);
      sum[l*ELEM_W +: ELEM_W]  = es;
      mean[l*ELEM_W +: ELEM_W] = fp32_div_u(es, avg_n);
      case (op)
        ALU_FADD: pair[l*ELEM_W +: ELEM_W] = fp32_add(ea, eb);
        ALU_FSUB: pair[l*ELEM_W +: ELEM_W] = fp32_add(ea, {~eb[31], eb[30:0]});
        ALU_FMUL: pair[l*ELEM_W +: ELEM_W] = fp32_mul(ea, eb);
        default:  pair[l*ELEM_W +: ELEM_W] = ea;
      endcase
    end
  end
endmodule
