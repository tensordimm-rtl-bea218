// tdimm_pkg: types and constants shared by the TensorDIMM near-memory
// processing (NMP) core and the TensorNode that holds many of them.
//
// Data unit: one 64-byte block, the burst of a x64 DIMM with burst length 8,
// seen by the vector ALU as sixteen 32-bit lanes. Addresses carried by
// TensorISA instructions count 64-byte blocks in the node-wide address space;
// consecutive blocks of an embedding are interleaved across the DIMMs (rank
// field), so block g lives in DIMM (g mod NODE_DIM).
//
// Instruction layout (OpCode | InputBase | AUX | OutputBase | Count) follows
// the paper's format table. The field widths, the opcode encoding and the
// split of REDUCE into one opcode per element-wise operation are choices of
// this design; the paper names the fields but gives no bit widths.
package tdimm_pkg;

  // Vector datapath: 16 lanes of 32 bits = one 64 B block.
  localparam int unsigned LANES   = 16;
  localparam int unsigned ELEM_W  = 32;
  localparam int unsigned BLOCK_W = LANES * ELEM_W;   // 512 bits
  localparam int unsigned BYTE_OFF_BITS = 6;          // 64 B within a block

  // DRAM address fields of one TensorDIMM (address mapping figure).
  localparam int unsigned BANK_BITS   = 4;   // bits 13..10 for 16 ranks
  localparam int unsigned COLHI_BITS  = 6;   // bits 19..14 for 16 ranks
  localparam int unsigned BURST_BITS  = 3;   // low column bits of a burst
  localparam int unsigned COL_BITS    = COLHI_BITS + BURST_BITS;
  localparam int unsigned ROW_BITS    = 21;  // 2^31 blocks = 128 GB per DIMM
  localparam int unsigned LOCAL_BLK_BITS = ROW_BITS + COLHI_BITS + BANK_BITS;

  // Instruction fields.
  localparam int unsigned FIELD_W = 40;

  typedef enum logic [7:0] {
    OP_NOP        = 8'h00,
    OP_GATHER     = 8'h01,   // embedding lookup
    OP_REDUCE_ADD = 8'h02,   // element-wise C = A + B
    OP_REDUCE_SUB = 8'h03,   // element-wise C = A - B
    OP_REDUCE_MUL = 8'h04,   // element-wise C = A * B
    OP_AVERAGE    = 8'h05,   // element-wise mean of averageNum blocks
    // bit 4 set: the same operation on single-precision floating point
    OP_FREDUCE_ADD = 8'h12,
    OP_FREDUCE_SUB = 8'h13,
    OP_FREDUCE_MUL = 8'h14,
    OP_FAVERAGE    = 8'h15
  } opcode_t;

  localparam logic [7:0] OP_FP_BIT = 8'h10;

  typedef struct packed {
    opcode_t            opcode;
    logic [FIELD_W-1:0] input_base;   // tableBase / inputBase1 / inputBase
    logic [FIELD_W-1:0] aux;          // idxBase / inputBase2 / averageNum
    logic [FIELD_W-1:0] output_base;  // outputBase
    logic [FIELD_W-1:0] count;        // count
  } tisa_instr_t;

  // Operation selected in the vector ALU.
  typedef enum logic [3:0] {
    ALU_PASS = 4'd0,   // GATHER: forward queue A to queue C
    ALU_ADD  = 4'd1,   // fixed point
    ALU_SUB  = 4'd2,
    ALU_MUL  = 4'd3,
    ALU_AVG  = 4'd4,
    ALU_FADD = 4'd5,   // single-precision floating point
    ALU_FSUB = 4'd6,
    ALU_FMUL = 4'd7,
    ALU_FAVG = 4'd8
  } alu_op_t;

  // DRAM command bus (one command per clock, data travels with RD/WR).
  typedef enum logic [2:0] {
    DDR_NOP  = 3'd0,
    DDR_ACT  = 3'd1,
    DDR_RD   = 3'd2,
    DDR_WR   = 3'd3,
    DDR_PRE  = 3'd4,
    DDR_PREA = 3'd5
  } ddr_cmd_e;

  typedef struct packed {
    ddr_cmd_e              cmd;
    logic [BANK_BITS-1:0]  bank;
    logic [ROW_BITS-1:0]   row;
    logic [COL_BITS-1:0]   col;
  } ddr_cmd_t;

  // Destination of a read issued by the NMP memory controller.
  typedef enum logic [1:0] {
    TAG_IDX = 2'd0,    // index block of a GATHER (register X)
    TAG_QA  = 2'd1,    // input queue A
    TAG_QB  = 2'd2     // input queue B
  } rd_tag_e;

  function automatic alu_op_t alu_op_of(opcode_t op);
    case (op)
      OP_REDUCE_ADD: return ALU_ADD;
      OP_REDUCE_SUB: return ALU_SUB;
      OP_REDUCE_MUL: return ALU_MUL;
      OP_AVERAGE:    return ALU_AVG;
      OP_FREDUCE_ADD: return ALU_FADD;
      OP_FREDUCE_SUB: return ALU_FSUB;
      OP_FREDUCE_MUL: return ALU_FMUL;
      OP_FAVERAGE:    return ALU_FAVG;
      default:       return ALU_PASS;
    endcase
  endfunction

  // The memory access pattern of an opcode does not depend on the element
  // format: the sequencer decodes the opcode with the format bit cleared.
  function automatic opcode_t base_opcode(opcode_t op);
    return opcode_t'(op & ~OP_FP_BIT);
  endfunction

  function automatic logic alu_is_fp(alu_op_t op);
    return op inside {ALU_FADD, ALU_FSUB, ALU_FMUL, ALU_FAVG};
  endfunction

endpackage
