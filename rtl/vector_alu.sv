// vector_alu: the 16-wide vector ALU of the NMP core.
//
// Each lane holds one 32-bit element of a 64-byte block. The ALU watches the
// heads of input queues A and B and, whenever the operands it needs are there
// and output queue C has room, pops them and pushes the result into C in the
// same cycle, so it sustains one 64-byte result per clock.
//
//   ALU_PASS  GATHER: the block at the head of A is forwarded to C.
//   ALU_ADD/SUB/MUL  REDUCE: C = A op B, lane by lane (pops A and B together).
//   ALU_AVG   AVERAGE: avg_num consecutive blocks of A are summed in an
//             internal 64-byte accumulator; when the last one arrives the
//             lane sums are divided by avg_num and the mean is pushed to C.
//
// Element format: as in the published design, the ALU has a fixed-point
// datapath next to a single-precision FPU. The fixed-point datapath is
// written here; the floating-point one is the vector_fpu instance, used for
// ALU_FADD/FSUB/FMUL/FAVG, which pop and push exactly like their fixed-point
// counterparts. Fixed-point elements
// are 32-bit two's complement with FRAC_BITS fractional bits (0 = integers).
// Add, subtract and average do not depend on FRAC_BITS; multiply keeps the
// product bits [FRAC_BITS +: 32]. Overflow wraps, and division truncates
// toward zero; avg_num = 0 is treated as 1. These are choices of this design.
// `start` clears the accumulator state at the beginning of an instruction.
module vector_alu
  import tdimm_pkg::*;
#(
  parameter int unsigned FRAC_BITS = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  alu_op_t             op,
  input  logic [31:0]         avg_num,
  input  logic [BLOCK_W-1:0]  a_head,
  input  logic                a_empty,
  output logic                a_pop,
  input  logic [BLOCK_W-1:0]  b_head,
  input  logic                b_empty,
  output logic                b_pop,
  input  logic                c_full,
  output logic                c_push,
  output logic [BLOCK_W-1:0]  c_data,
  output logic                accumulating   // AVERAGE group partly summed
);
  logic [BLOCK_W-1:0] acc;
  logic [31:0]        acc_cnt;      // blocks already summed in acc
  logic [31:0]        avg_eff;
  logic               avg_last;
  logic [BLOCK_W-1:0] sum, mean, pair;
  logic [BLOCK_W-1:0] i_sum, i_mean, i_pair;   // fixed point
  logic [BLOCK_W-1:0] f_sum, f_mean, f_pair;   // floating point
  logic               is_fp;

  vector_fpu u_fpu (
    .op, .a(a_head), .b(b_head), .acc, .first(acc_cnt == 0), .avg_n(avg_eff),
    .pair(f_pair), .sum(f_sum), .mean(f_mean)
  );

  assign is_fp = alu_is_fp(op);
  assign sum   = is_fp ? f_sum  : i_sum;
  assign mean  = is_fp ? f_mean : i_mean;
  assign pair  = is_fp ? f_pair : i_pair;

  assign avg_eff  = (avg_num == 0) ? 32'd1 : avg_num;
  assign avg_last = (acc_cnt == avg_eff - 1);
  assign accumulating = (acc_cnt != 0);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ELEM_W-1:0]   ea, eb, es;
      logic signed [2*ELEM_W-1:0] prod;
      logic signed [ELEM_W:0]     q;
      ea = a_head[l*ELEM_W +: ELEM_W];
      eb = b_head[l*ELEM_W +: ELEM_W];
      es = ((acc_cnt == 0) ? '0 : acc[l*ELEM_W +: ELEM_W]) + ea;
      i_sum[l*ELEM_W +: ELEM_W] = es;
      q = $signed({es[ELEM_W-1], es}) / $signed({1'b0, avg_eff});
      i_mean[l*ELEM_W +: ELEM_W] = q[ELEM_W-1:0];
      prod = ea * eb;
      case (op)
        ALU_ADD: i_pair[l*ELEM_W +: ELEM_W] = ea + eb;
        ALU_SUB: i_pair[l*ELEM_W +: ELEM_W] = ea - eb;
        ALU_MUL: i_pair[l*ELEM_W +: ELEM_W] = prod[FRAC_BITS +: ELEM_W];
        default: i_pair[l*ELEM_W +: ELEM_W] = ea;
      endcase
    end
  end

  always_comb begin
    a_pop  = 1'b0;
    b_pop  = 1'b0;
    c_push = 1'b0;
    c_data = pair;
    case (op)
      ALU_PASS: begin
        a_pop  = !a_empty && !c_full;
        c_push = a_pop;
      end
      ALU_ADD, ALU_SUB, ALU_MUL, ALU_FADD, ALU_FSUB, ALU_FMUL: begin
        a_pop  = !a_empty && !b_empty && !c_full;
        b_pop  = a_pop;
        c_push = a_pop;
      end
      ALU_AVG, ALU_FAVG: begin
        c_data = mean;
        if (!a_empty) begin
          if (!avg_last) a_pop = 1'b1;
          else begin
            a_pop  = !c_full;
            c_push = a_pop;
          end
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      acc_cnt <= '0;
    end else if (start) begin
      acc_cnt <= '0;
    end else if ((op == ALU_AVG || op == ALU_FAVG) && a_pop) begin
      acc     <= sum;
      acc_cnt <= avg_last ? '0 : acc_cnt + 1'b1;
    end
  end
endmodule
