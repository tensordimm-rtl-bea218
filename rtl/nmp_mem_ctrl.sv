// nmp_mem_ctrl: the NMP-local memory controller of a TensorDIMM.
//
// Holds the TensorISA sequencer, the DRAM command controller and the three
// SRAM queues: input queues A and B, filled by DRAM reads, and output queue
// C, drained into DRAM by writes. The vector ALU sits outside, between the
// queue heads (qa_*, qb_*) and the tail of C (qc_*), as in the paper's NMP
// core diagram. Read data returning from DRAM is steered by its tag into the
// index register of the sequencer, queue A or queue B.
//
// Interface: a TensorISA instruction port (valid/ready, busy, done pulse),
// the ALU control outputs, the queue ports for the ALU, and the DRAM command
// bus of the local DIMM (one command per clock, 64-byte data with RD/WR).
// The structure follows the paper; how the pieces hand data to each other
// is this design's choice.
module nmp_mem_ctrl
  import tdimm_pkg::*;
#(
  parameter int unsigned NODE_DIM = 32,
  parameter int unsigned DEPTH    = 8,
  parameter int unsigned T_RCD    = 4,
  parameter int unsigned T_RP     = 4,
  parameter int unsigned T_RAS    = 9,
  parameter int unsigned T_WR     = 4,
  parameter int unsigned T_RTP    = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [$clog2(NODE_DIM)-1:0] tid,
  input  logic                        instr_valid,
  output logic                        instr_ready,
  input  tisa_instr_t                 instr,
  output logic                        busy,
  output logic                        done,
  // vector ALU side
  output logic                        alu_start,
  output alu_op_t                     alu_op,
  output logic [31:0]                 avg_num,
  output logic [BLOCK_W-1:0]          qa_head,
  output logic                        qa_empty,
  input  logic                        qa_pop,
  output logic [BLOCK_W-1:0]          qb_head,
  output logic                        qb_empty,
  input  logic                        qb_pop,
  input  logic                        qc_push,
  input  logic [BLOCK_W-1:0]          qc_data,
  output logic                        qc_full,
  // DRAM command bus
  output ddr_cmd_t                    dram_cmd,
  output logic [BLOCK_W-1:0]          dram_wdata,
  input  logic                        dram_rvalid,
  input  logic [BLOCK_W-1:0]          dram_rdata
);
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [CW-1:0] qa_count, qb_count, qc_count;
  logic          qa_push, qb_push, qa_full, qb_full;
  logic          qc_empty, qc_pop;
  logic [BLOCK_W-1:0] qc_head;

  logic req_valid, req_ready, req_write, prea_req, prea_done;
  logic [FIELD_W+BYTE_OFF_BITS-1:0] req_addr;
  logic [BLOCK_W-1:0] req_wdata, rsp_data;
  rd_tag_e req_tag, rsp_tag;
  logic rsp_valid, ctrl_idle;

  tisa_sequencer #(.NODE_DIM(NODE_DIM), .DEPTH(DEPTH)) u_seq (
    .clk, .rst_n, .tid,
    .instr_valid, .instr_ready, .instr, .busy, .done,
    .alu_start, .alu_op, .avg_num,
    .qa_count, .qb_count, .qa_push, .qb_push,
    .qc_empty, .qc_head, .qc_pop,
    .req_valid, .req_ready, .req_write, .req_addr, .req_wdata, .req_tag,
    .prea_req, .prea_done, .rsp_valid, .rsp_tag, .rsp_data, .ctrl_idle
  );

  dram_cmd_ctrl #(
    .RANK_BITS($clog2(NODE_DIM)), .T_RCD(T_RCD), .T_RP(T_RP),
    .T_RAS(T_RAS), .T_WR(T_WR), .T_RTP(T_RTP), .MAX_RD(2*DEPTH)
  ) u_cmd (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_write, .req_addr, .req_wdata, .req_tag,
    .prea_req, .prea_done,
    .dram_cmd, .dram_wdata, .dram_rvalid, .dram_rdata,
    .rsp_valid, .rsp_tag, .rsp_data, .idle(ctrl_idle)
  );

  sram_queue #(.WIDTH(BLOCK_W), .DEPTH(DEPTH)) u_qa (
    .clk, .rst_n, .push(qa_push), .push_data(rsp_data), .pop(qa_pop),
    .head(qa_head), .empty(qa_empty), .full(qa_full), .count(qa_count)
  );
  sram_queue #(.WIDTH(BLOCK_W), .DEPTH(DEPTH)) u_qb (
    .clk, .rst_n, .push(qb_push), .push_data(rsp_data), .pop(qb_pop),
    .head(qb_head), .empty(qb_empty), .full(qb_full), .count(qb_count)
  );
  sram_queue #(.WIDTH(BLOCK_W), .DEPTH(DEPTH)) u_qc (
    .clk, .rst_n, .push(qc_push), .push_data(qc_data), .pop(qc_pop),
    .head(qc_head), .empty(qc_empty), .full(qc_full), .count(qc_count)
  );

  // The read credits of the sequencer must keep returning data from
  // overflowing the input queues.
  assert property (@(posedge clk) disable iff (!rst_n) !(qa_push && qa_full && !qa_pop))
    else $error("nmp_mem_ctrl: queue A overflow");
  assert property (@(posedge clk) disable iff (!rst_n) !(qb_push && qb_full && !qb_pop))
    else $error("nmp_mem_ctrl: queue B overflow");
endmodule
