// nmp_core: the near-memory processing core in the buffer device of one
// TensorDIMM.
//
// Wires together the DDR protocol engine, the NMP-local memory controller
// (TensorISA sequencer, DRAM command controller, SRAM queues A/B/C) and the
// 16-wide vector ALU. The host memory controller reaches the DIMM's DRAM
// through the protocol engine as on a plain buffered DIMM; a TensorISA
// instruction makes the protocol engine stall the host and give the DRAM
// bus to the NMP controller until the instruction is done.
//
// Interface: `tid` is the DIMM's position in the TensorNode (its rank in
// the address map). host_* is the digital side of the DDR PHY, isa_* the
// instruction port, dram_* the command bus to the DRAM chips. busy is high
// from the moment an instruction is handed to the NMP controller until its
// done pulse. The composition is the paper's (NMP core figure); the port
// protocol is this design's choice.
module nmp_core
  import tdimm_pkg::*;
#(
  parameter int unsigned NODE_DIM  = 32,
  parameter int unsigned DEPTH     = 8,
  parameter int unsigned FRAC_BITS = 0,
  parameter int unsigned T_RCD     = 4,
  parameter int unsigned T_RP      = 4,
  parameter int unsigned T_RAS     = 9,
  parameter int unsigned T_WR      = 4,
  parameter int unsigned T_RTP     = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [$clog2(NODE_DIM)-1:0] tid,
  // host DDR side
  input  ddr_cmd_t                    host_cmd,
  input  logic [BLOCK_W-1:0]          host_wdata,
  output logic                        host_ready,
  output logic                        host_rvalid,
  output logic [BLOCK_W-1:0]          host_rdata,
  // TensorISA instruction
  input  logic                        isa_valid,
  output logic                        isa_ready,
  input  tisa_instr_t                 isa_instr,
  output logic                        busy,
  output logic                        done,
  output logic                        nmp_mode,
  // local DRAM
  output ddr_cmd_t                    dram_cmd,
  output logic [BLOCK_W-1:0]          dram_wdata,
  input  logic                        dram_rvalid,
  input  logic [BLOCK_W-1:0]          dram_rdata
);
  logic        nmp_instr_valid, nmp_instr_ready;
  tisa_instr_t nmp_instr;
  ddr_cmd_t    nmp_cmd;
  logic [BLOCK_W-1:0] nmp_wdata, nmp_rdata;
  logic        nmp_rvalid;

  logic               alu_start, accumulating;
  alu_op_t            alu_op;
  logic [31:0]        avg_num;
  logic [BLOCK_W-1:0] qa_head, qb_head, qc_data;
  logic               qa_empty, qb_empty, qa_pop, qb_pop, qc_push, qc_full;

  ddr_protocol_engine #(.T_SWITCH(T_RAS)) u_pe (
    .clk, .rst_n,
    .host_cmd, .host_wdata, .host_ready, .host_rvalid, .host_rdata,
    .isa_valid, .isa_ready, .isa_instr,
    .nmp_instr_valid, .nmp_instr_ready, .nmp_instr, .nmp_done(done),
    .nmp_cmd, .nmp_wdata, .nmp_rvalid, .nmp_rdata,
    .dram_cmd, .dram_wdata, .dram_rvalid, .dram_rdata, .nmp_mode
  );

  nmp_mem_ctrl #(
    .NODE_DIM(NODE_DIM), .DEPTH(DEPTH), .T_RCD(T_RCD), .T_RP(T_RP),
    .T_RAS(T_RAS), .T_WR(T_WR), .T_RTP(T_RTP)
  ) u_mc (
    .clk, .rst_n, .tid,
    .instr_valid(nmp_instr_valid), .instr_ready(nmp_instr_ready), .instr(nmp_instr),
    .busy, .done,
    .alu_start, .alu_op, .avg_num,
    .qa_head, .qa_empty, .qa_pop, .qb_head, .qb_empty, .qb_pop,
    .qc_push, .qc_data, .qc_full,
    .dram_cmd(nmp_cmd), .dram_wdata(nmp_wdata),
    .dram_rvalid(nmp_rvalid), .dram_rdata(nmp_rdata)
  );

  vector_alu #(.FRAC_BITS(FRAC_BITS)) u_alu (
    .clk, .rst_n, .start(alu_start), .op(alu_op), .avg_num,
    .a_head(qa_head), .a_empty(qa_empty), .a_pop(qa_pop),
    .b_head(qb_head), .b_empty(qb_empty), .b_pop(qb_pop),
    .c_full(qc_full), .c_push(qc_push), .c_data(qc_data),
    .accumulating
  );
endmodule
