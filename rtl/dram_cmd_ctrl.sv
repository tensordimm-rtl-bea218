// dram_cmd_ctrl: DRAM command generation of the NMP-local memory controller.
//
// Takes 64-byte read and write requests (node-wide byte address, one request
// at a time, valid/ready) and issues the DDR commands that serve them on the
// DIMM-local DRAM: ACT to open a row, RD or WR for the burst, PRE to close a
// bank holding another row, and PREA (precharge all) on request at the start
// and the end of an instruction so that the host finds every bank closed.
// Rows stay open after an access (open-page policy) and requests are served
// strictly in order. Per bank it keeps the open row and counters for tRCD
// (ACT to RD/WR), tRAS (ACT to PRE), tRP (PRE to ACT), write recovery and
// read-to-precharge. At most one command goes out per clock; a request is
// accepted (req_ready) in the cycle its RD or WR is issued.
//
// Timing model: one controller clock per 64-byte burst, write data travels
// with the WR command and read data returns on dram_rvalid some cycles
// later; the tags of issued reads wait in an in-order FIFO and are paired
// with the returning data (rsp_*). The paper says only that the controller
// generates RAS/CAS/activate/precharge commands; the policy, the timing
// values (in controller clocks) and the lack of refresh are this design's
// choices.
module dram_cmd_ctrl
  import tdimm_pkg::*;
#(
  parameter int unsigned RANK_BITS = 5,
  parameter int unsigned T_RCD = 4,
  parameter int unsigned T_RP  = 4,
  parameter int unsigned T_RAS = 9,
  parameter int unsigned T_WR  = 4,
  parameter int unsigned T_RTP = 2,
  parameter int unsigned MAX_RD = 16     // reads in flight
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // request
  input  logic                             req_valid,
  output logic                             req_ready,
  input  logic                             req_write,
  input  logic [FIELD_W+BYTE_OFF_BITS-1:0] req_addr,
  input  logic [BLOCK_W-1:0]               req_wdata,
  input  rd_tag_e                          req_tag,
  // precharge-all request
  input  logic                             prea_req,
  output logic                             prea_done,
  // DRAM command bus
  output ddr_cmd_t                         dram_cmd,
  output logic [BLOCK_W-1:0]               dram_wdata,
  input  logic                             dram_rvalid,
  input  logic [BLOCK_W-1:0]               dram_rdata,
  // read response
  output logic                             rsp_valid,
  output rd_tag_e                          rsp_tag,
  output logic [BLOCK_W-1:0]               rsp_data,
  output logic                             idle          // no read in flight
);
  localparam int unsigned NB = 1 << BANK_BITS;
  localparam int unsigned TW = 4;

  logic [RANK_BITS-1:0]      m_rank;
  logic [BANK_BITS-1:0]      m_bank;
  logic [ROW_BITS-1:0]       m_row;
  logic [COL_BITS-1:0]       m_col;
  logic [LOCAL_BLK_BITS-1:0] m_local;

  addr_map #(.RANK_BITS(RANK_BITS)) u_map (
    .byte_addr(req_addr), .rank(m_rank), .bank(m_bank), .row(m_row),
    .col(m_col), .local_blk(m_local)
  );

  logic [NB-1:0]       open_q;
  logic [ROW_BITS-1:0] row_q   [NB];
  logic [TW-1:0]       t_cas_q [NB];   // cycles until RD/WR allowed
  logic [TW-1:0]       t_pre_q [NB];   // cycles until PRE allowed
  logic [TW-1:0]       t_act_q [NB];   // cycles until ACT allowed

  // in-order tag FIFO of reads in flight
  localparam int unsigned FW = $clog2(MAX_RD);
  rd_tag_e          tag_fifo [MAX_RD];
  logic [FW-1:0]    tf_wr, tf_rd;
  logic [FW:0]      tf_cnt;

  logic all_pre_ok, all_act_idle;
  ddr_cmd_t cmd;
  logic     issue_rw;

  always_comb begin
    all_pre_ok = 1'b1;
    for (int b = 0; b < NB; b++)
      if (open_q[b] && t_pre_q[b] != 0) all_pre_ok = 1'b0;
  end

  always_comb begin
    cmd       = '{cmd: DDR_NOP, bank: m_bank, row: m_row, col: m_col};
    issue_rw  = 1'b0;
    prea_done = 1'b0;
    if (prea_req) begin
      // finish reads in flight first; PREA waits for tRAS/tWR/tRTP
      if (all_pre_ok) begin
        cmd.cmd   = DDR_PREA;
        prea_done = 1'b1;
      end
    end else if (req_valid) begin
      if (open_q[m_bank] && row_q[m_bank] == m_row) begin
        if (t_cas_q[m_bank] == 0 && (req_write || tf_cnt != (FW+1)'(MAX_RD))) begin
          cmd.cmd  = req_write ? DDR_WR : DDR_RD;
          issue_rw = 1'b1;
        end
      end else if (open_q[m_bank]) begin
        if (t_pre_q[m_bank] == 0) cmd.cmd = DDR_PRE;
      end else if (t_act_q[m_bank] == 0) begin
        cmd.cmd = DDR_ACT;
      end
    end
  end

  assign req_ready  = issue_rw;
  assign dram_cmd   = cmd;
  assign dram_wdata = req_wdata;
  assign rsp_valid  = dram_rvalid;
  assign rsp_data   = dram_rdata;
  assign rsp_tag    = tag_fifo[tf_rd];
  assign idle       = (tf_cnt == 0);

  function automatic logic [TW-1:0] dec(logic [TW-1:0] t);
    return (t == 0) ? '0 : t - 1'b1;
  endfunction
  function automatic logic [TW-1:0] maxt(logic [TW-1:0] a, logic [TW-1:0] b);
    return (a > b) ? a : b;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q <= '0;
      for (int b = 0; b < NB; b++) begin
        row_q[b]   <= '0;
        t_cas_q[b] <= '0;
        t_pre_q[b] <= '0;
        t_act_q[b] <= '0;
      end
    end else begin
      for (int b = 0; b < NB; b++) begin
        t_cas_q[b] <= dec(t_cas_q[b]);
        t_pre_q[b] <= dec(t_pre_q[b]);
        t_act_q[b] <= dec(t_act_q[b]);
      end
      case (cmd.cmd)
        DDR_ACT: begin
          open_q[cmd.bank]  <= 1'b1;
          row_q[cmd.bank]   <= cmd.row;
          t_cas_q[cmd.bank] <= TW'(T_RCD - 1);
          t_pre_q[cmd.bank] <= TW'(T_RAS - 1);
        end
        DDR_RD: t_pre_q[cmd.bank] <= maxt(dec(t_pre_q[cmd.bank]), TW'(T_RTP - 1));
        DDR_WR: t_pre_q[cmd.bank] <= maxt(dec(t_pre_q[cmd.bank]), TW'(T_WR - 1));
        DDR_PRE: begin
          open_q[cmd.bank]  <= 1'b0;
          t_act_q[cmd.bank] <= TW'(T_RP - 1);
        end
        DDR_PREA: begin
          for (int b = 0; b < NB; b++) begin
            open_q[b]  <= 1'b0;
            t_act_q[b] <= TW'(T_RP - 1);
          end
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tf_wr  <= '0;
      tf_rd  <= '0;
      tf_cnt <= '0;
    end else begin
      if (cmd.cmd == DDR_RD) tf_wr <= tf_wr + 1'b1;
      if (dram_rvalid)       tf_rd <= tf_rd + 1'b1;
      tf_cnt <= tf_cnt + ((cmd.cmd == DDR_RD) ? 1'b1 : 1'b0) - (dram_rvalid ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) begin
    if (cmd.cmd == DDR_RD) tag_fifo[tf_wr] <= req_tag;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(dram_rvalid && tf_cnt == 0))
    else $error("dram_cmd_ctrl: read data without a read in flight");
endmodule
