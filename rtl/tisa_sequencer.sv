// tisa_sequencer: TensorISA instruction decode and address generation of the
// NMP-local memory controller (the FSM control logic of the paper).
//
// One instruction is accepted at a time (instr_valid/instr_ready). Its
// pseudo code is then walked for this TensorDIMM, whose id is `tid`, in a
// node of NODE_DIM TensorDIMMs. All bases are 64-byte block numbers in the
// node-wide address space and the k-th block of a strided operand is at
// base + k*NODE_DIM + tid, so each DIMM only touches its own slice:
//
//   GATHER  (aux = idxBase): for every group of 16 indices, read the index
//           block into register X, then for each index x read
//           tableBase + x*NODE_DIM + tid into queue A; result e is written
//           to outputBase + e*NODE_DIM + tid.
//   REDUCE  (aux = inputBase2): for i < count read inputBase1 + i*NODE_DIM +
//           tid into A and inputBase2 + i*NODE_DIM + tid into B; result i
//           goes to outputBase + i*NODE_DIM + tid.
//   AVERAGE (aux = averageNum): read inputBase + (i*averageNum + j)*NODE_DIM
//           + tid into A for all i < count, j < averageNum; result i goes to
//           outputBase + i*NODE_DIM + tid.
//
// Writes drain queue C as soon as it holds a result and have priority over
// reads. A read is only issued when its queue has room for it counting the
// reads still in flight, so returning data never overflows a queue. The
// instruction starts and ends with a precharge-all so the host sees closed
// banks. `done` pulses when the last write has been issued and no read is
// left in flight.
//
// Choices of this design where the paper is silent: the index block is
// read at DIMM-local block idxBase + i (the pseudo code reads idxBase + i
// with no tid, so every DIMM is assumed to hold its own copy of the index
// list); a GATHER count that is not a multiple of 16 uses only the first
// indices of the last index block; indices are 32-bit; averageNum is taken
// from the low 32 bits of AUX and 0 counts as 1; bases must be multiples of
// NODE_DIM.
module tisa_sequencer
  import tdimm_pkg::*;
#(
  parameter int unsigned NODE_DIM = 32,
  parameter int unsigned DEPTH    = 8
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [$clog2(NODE_DIM)-1:0]      tid,
  // instruction
  input  logic                             instr_valid,
  output logic                             instr_ready,
  input  tisa_instr_t                      instr,
  output logic                             busy,
  output logic                             done,
  // vector ALU control
  output logic                             alu_start,
  output alu_op_t                          alu_op,
  output logic [31:0]                      avg_num,
  // queues
  input  logic [$clog2(DEPTH+1)-1:0]       qa_count,
  input  logic [$clog2(DEPTH+1)-1:0]       qb_count,
  output logic                             qa_push,
  output logic                             qb_push,
  input  logic                             qc_empty,
  input  logic [BLOCK_W-1:0]               qc_head,
  output logic                             qc_pop,
  // requests to the DRAM command controller
  output logic                             req_valid,
  input  logic                             req_ready,
  output logic                             req_write,
  output logic [FIELD_W+BYTE_OFF_BITS-1:0] req_addr,
  output logic [BLOCK_W-1:0]               req_wdata,
  output rd_tag_e                          req_tag,
  output logic                             prea_req,
  input  logic                             prea_done,
  input  logic                             rsp_valid,
  input  rd_tag_e                          rsp_tag,
  input  logic [BLOCK_W-1:0]               rsp_data,
  input  logic                             ctrl_idle
);
  localparam int unsigned RB = $clog2(NODE_DIM);
  localparam int unsigned CW = $clog2(DEPTH+1);

  typedef enum logic [2:0] {S_IDLE, S_OPEN, S_RUN, S_DRAIN, S_CLOSE} state_e;
  state_e state_q;

  tisa_instr_t        ins_q;
  logic [31:0]        avg_q;
  logic [63:0]        rd_total_q;     // reads into A (REDUCE: pairs)
  logic [63:0]        rd_k_q;         // reads into A issued
  logic               rd_b_phase_q;   // REDUCE: next read goes to B
  logic [FIELD_W-1:0] wr_k_q;         // writes issued
  logic [FIELD_W-1:0] gi_q;           // GATHER index block
  logic [3:0]         gj_q;           // GATHER position in X
  logic               x_valid_q, x_pend_q;
  logic [BLOCK_W-1:0] x_q;
  logic [CW:0]        qa_out_q, qb_out_q;   // reads in flight per queue

  logic credit_a, credit_b;
  logic want_wr, want_rd;
  logic [FIELD_W-1:0] rd_blk, wr_blk, x_idx;
  logic [FIELD_W+BYTE_OFF_BITS-1:0] rd_addr;
  rd_tag_e rd_tag;
  logic    rd_fire, wr_fire;
  logic    reads_done;

  assign credit_a = ((CW+1)'(qa_count) + qa_out_q) < (CW+1)'(DEPTH);
  assign credit_b = ((CW+1)'(qb_count) + qb_out_q) < (CW+1)'(DEPTH);
  assign x_idx    = FIELD_W'(x_q[gj_q*ELEM_W +: ELEM_W]);
  assign reads_done = (rd_k_q == rd_total_q);

  function automatic logic [FIELD_W-1:0] strided(logic [FIELD_W-1:0] base,
                                                 logic [FIELD_W-1:0] k);
    return base + (k << RB) + FIELD_W'(tid);
  endfunction

  // next read
  always_comb begin
    want_rd = 1'b0;
    rd_blk  = '0;
    rd_tag  = TAG_QA;
    if (state_q == S_RUN && !reads_done) begin
      case (base_opcode(ins_q.opcode))
        OP_GATHER: begin
          if (!x_valid_q) begin
            // index block gi lives at DIMM-local block idxBase + gi
            want_rd = !x_pend_q;
            rd_blk  = ((ins_q.aux + gi_q) << RB) | FIELD_W'(tid);
            rd_tag  = TAG_IDX;
          end else begin
            want_rd = credit_a;
            rd_blk  = strided(ins_q.input_base, x_idx);
          end
        end
        OP_AVERAGE: begin
          want_rd = credit_a;
          rd_blk  = strided(ins_q.input_base, rd_k_q[FIELD_W-1:0]);
        end
        default: begin   // REDUCE
          if (!rd_b_phase_q) begin
            want_rd = credit_a;
            rd_blk  = strided(ins_q.input_base, rd_k_q[FIELD_W-1:0]);
          end else begin
            want_rd = credit_b;
            rd_blk  = strided(ins_q.aux, rd_k_q[FIELD_W-1:0]);
            rd_tag  = TAG_QB;
          end
        end
      endcase
    end
  end

  assign rd_addr = {rd_blk, {BYTE_OFF_BITS{1'b0}}};
  assign wr_blk  = strided(ins_q.output_base, wr_k_q);
  assign want_wr = (state_q == S_RUN || state_q == S_DRAIN) && !qc_empty &&
                   (wr_k_q != ins_q.count);

  assign req_valid = want_wr || want_rd;
  assign req_write = want_wr;
  assign req_addr  = want_wr ? {wr_blk, {BYTE_OFF_BITS{1'b0}}} : rd_addr;
  assign req_wdata = qc_head;
  assign req_tag   = rd_tag;
  assign wr_fire   = want_wr && req_ready;
  assign rd_fire   = !want_wr && want_rd && req_ready;
  assign qc_pop    = wr_fire;

  assign prea_req    = (state_q == S_OPEN) || (state_q == S_CLOSE);
  assign instr_ready = (state_q == S_IDLE);
  assign busy        = (state_q != S_IDLE);
  assign alu_start   = instr_valid && instr_ready;
  assign alu_op      = alu_op_of(ins_q.opcode);
  assign avg_num     = avg_q;
  assign qa_push     = rsp_valid && rsp_tag == TAG_QA;
  assign qb_push     = rsp_valid && rsp_tag == TAG_QB;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      ins_q        <= '0;
      avg_q        <= 32'd1;
      rd_total_q   <= '0;
      rd_k_q       <= '0;
      rd_b_phase_q <= 1'b0;
      wr_k_q       <= '0;
      gi_q         <= '0;
      gj_q         <= '0;
      x_valid_q    <= 1'b0;
      x_pend_q     <= 1'b0;
      x_q          <= '0;
      qa_out_q     <= '0;
      qb_out_q     <= '0;
      done         <= 1'b0;
    end else begin
      done <= 1'b0;
      // reads in flight per queue
      qa_out_q <= qa_out_q + ((rd_fire && rd_tag == TAG_QA) ? 1'b1 : 1'b0)
                           - (qa_push ? 1'b1 : 1'b0);
      qb_out_q <= qb_out_q + ((rd_fire && rd_tag == TAG_QB) ? 1'b1 : 1'b0)
                           - (qb_push ? 1'b1 : 1'b0);
      if (rsp_valid && rsp_tag == TAG_IDX) begin
        x_q       <= rsp_data;
        x_valid_q <= 1'b1;
        x_pend_q  <= 1'b0;
      end
      if (wr_fire) wr_k_q <= wr_k_q + 1'b1;
      if (rd_fire) begin
        case (base_opcode(ins_q.opcode))
          OP_GATHER: begin
            if (rd_tag == TAG_IDX) x_pend_q <= 1'b1;
            else begin
              rd_k_q <= rd_k_q + 1'b1;
              gj_q   <= gj_q + 1'b1;
              if (gj_q == 4'd15 || rd_k_q + 1 == rd_total_q) begin
                x_valid_q <= 1'b0;
                gi_q      <= gi_q + 1'b1;
              end
            end
          end
          OP_AVERAGE: rd_k_q <= rd_k_q + 1'b1;
          default: begin
            rd_b_phase_q <= !rd_b_phase_q;
            if (rd_b_phase_q) rd_k_q <= rd_k_q + 1'b1;
          end
        endcase
      end
      case (state_q)
        S_IDLE: if (instr_valid) begin
          logic [31:0] a;
          a = (instr.aux[31:0] == 0) ? 32'd1 : instr.aux[31:0];
          ins_q        <= instr;
          // an opcode outside the ISA does nothing
          if (!(base_opcode(instr.opcode) inside {OP_GATHER, OP_REDUCE_ADD, OP_REDUCE_SUB,
                                     OP_REDUCE_MUL, OP_AVERAGE}))
            ins_q.count <= '0;
          avg_q        <= a;
          if (!(base_opcode(instr.opcode) inside {OP_GATHER, OP_REDUCE_ADD, OP_REDUCE_SUB,
                                     OP_REDUCE_MUL, OP_AVERAGE}))
            rd_total_q <= '0;
          else if (base_opcode(instr.opcode) == OP_AVERAGE)
            rd_total_q <= 64'(instr.count) * 64'(a);
          else
            rd_total_q <= 64'(instr.count);
          rd_k_q       <= '0;
          rd_b_phase_q <= 1'b0;
          wr_k_q       <= '0;
          gi_q         <= '0;
          gj_q         <= '0;
          x_valid_q    <= 1'b0;
          x_pend_q     <= 1'b0;
          state_q      <= S_OPEN;
        end
        S_OPEN:  if (prea_done) state_q <= S_RUN;
        S_RUN:   if (reads_done) state_q <= S_DRAIN;
        S_DRAIN: if (wr_k_q == ins_q.count && ctrl_idle) state_q <= S_CLOSE;
        S_CLOSE: if (prea_done) begin
          state_q <= S_IDLE;
          done    <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Operand bases must be aligned to the node size so that every strided
  // block of this DIMM really maps to rank `tid`.
  assert property (@(posedge clk) disable iff (!rst_n)
    (instr_valid && instr_ready && instr.opcode != OP_NOP) |->
      (instr.input_base[RB-1:0] == 0 && instr.output_base[RB-1:0] == 0 &&
       (!(base_opcode(instr.opcode) inside {OP_REDUCE_ADD, OP_REDUCE_SUB, OP_REDUCE_MUL}) ||
        instr.aux[RB-1:0] == 0)))
    else $error("tisa_sequencer: base not aligned to NODE_DIM");
endmodule
