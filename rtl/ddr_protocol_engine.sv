// ddr_protocol_engine: the protocol engine of the TensorDIMM DDR interface.
//
// The DIMM's DRAM command bus has two masters: the host memory controller,
// which uses the TensorDIMM as an ordinary buffered DIMM, and the NMP-local
// memory controller, which runs TensorISA instructions. The engine owns
// the bus and switches it between them:
//
//   HOST     host commands (host_cmd, cmd != NOP) are repeated to the DRAM
//            and read data goes back to the host.
//   QUIESCE  an instruction is waiting: host commands are stalled
//            (host_ready low), the engine waits until no host read is in
//            flight and T_SWITCH cycles have passed since the last host
//            command (so the NMP controller's first precharge-all respects
//            the host's bank timing), then hands the instruction over.
//   NMP      the NMP controller drives the bus and gets the read data; the
//            host stays stalled until the NMP controller pulses nmp_done,
//            and for T_SWITCH more cycles, so the host's first command
//            respects tRP after the NMP controller's final precharge-all.
//
// The paper states that the host drives the DRAM through this interface
// for non-DL use and that TensorISA instructions are forwarded to the NMP
// controller; the paper does not say how instructions arrive or how the two
// are arbitrated. Here instructions come on their own valid/ready port and
// take priority over host traffic; a host command waiting while host_ready
// is low must be held. The PHY itself is outside this module.
module ddr_protocol_engine
  import tdimm_pkg::*;
#(
  parameter int unsigned T_SWITCH = 9
) (
  input  logic               clk,
  input  logic               rst_n,
  // host memory controller (through the DDR PHY)
  input  ddr_cmd_t           host_cmd,
  input  logic [BLOCK_W-1:0] host_wdata,
  output logic               host_ready,
  output logic               host_rvalid,
  output logic [BLOCK_W-1:0] host_rdata,
  // TensorISA instructions
  input  logic               isa_valid,
  output logic               isa_ready,
  input  tisa_instr_t        isa_instr,
  // NMP-local memory controller
  output logic               nmp_instr_valid,
  input  logic               nmp_instr_ready,
  output tisa_instr_t        nmp_instr,
  input  logic               nmp_done,
  input  ddr_cmd_t           nmp_cmd,
  input  logic [BLOCK_W-1:0] nmp_wdata,
  output logic               nmp_rvalid,
  output logic [BLOCK_W-1:0] nmp_rdata,
  // local DRAM
  output ddr_cmd_t           dram_cmd,
  output logic [BLOCK_W-1:0] dram_wdata,
  input  logic               dram_rvalid,
  input  logic [BLOCK_W-1:0] dram_rdata,
  output logic               nmp_mode
);
  typedef enum logic [1:0] {M_HOST, M_QUIESCE, M_NMP} mode_e;
  mode_e mode_q;

  localparam int unsigned GW = $clog2(T_SWITCH + 1) + 1;
  logic [GW-1:0] guard_q;        // cycles since the last host command
  logic [GW-1:0] ret_q;          // cycles left before the host may resume
  logic [7:0]    host_rd_q;      // host reads in flight
  logic          host_fire, handover;

  assign host_ready = (mode_q == M_HOST) && !isa_valid && ret_q == 0;
  assign host_fire  = host_ready && host_cmd.cmd != DDR_NOP;
  assign nmp_mode   = (mode_q == M_NMP);

  assign nmp_instr       = isa_instr;
  assign nmp_instr_valid = (mode_q == M_QUIESCE) && isa_valid && host_rd_q == 0 &&
                           guard_q >= GW'(T_SWITCH);
  assign handover        = nmp_instr_valid && nmp_instr_ready;
  assign isa_ready       = handover;

  always_comb begin
    if (mode_q == M_NMP) begin
      dram_cmd   = nmp_cmd;
      dram_wdata = nmp_wdata;
    end else begin
      dram_cmd   = host_fire ? host_cmd : '0;
      dram_wdata = host_wdata;
    end
  end

  assign nmp_rvalid  = dram_rvalid && (mode_q == M_NMP);
  assign nmp_rdata   = dram_rdata;
  assign host_rvalid = dram_rvalid && (mode_q != M_NMP);
  assign host_rdata  = dram_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q    <= M_HOST;
      guard_q   <= GW'(T_SWITCH);
      ret_q     <= '0;
      host_rd_q <= '0;
    end else begin
      if (mode_q == M_NMP && nmp_done) ret_q <= GW'(T_SWITCH);
      else if (ret_q != 0) ret_q <= ret_q - 1'b1;
      if (host_fire) guard_q <= '0;
      else if (guard_q < GW'(T_SWITCH)) guard_q <= guard_q + 1'b1;
      host_rd_q <= host_rd_q + ((host_fire && host_cmd.cmd == DDR_RD) ? 1'b1 : 1'b0)
                             - (host_rvalid ? 1'b1 : 1'b0);
      case (mode_q)
        M_HOST:    if (isa_valid) mode_q <= M_QUIESCE;
        M_QUIESCE: if (handover)  mode_q <= M_NMP;
                   else if (!isa_valid) mode_q <= M_HOST;
        M_NMP:     if (nmp_done)  mode_q <= M_HOST;
        default:   mode_q <= M_HOST;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(host_rvalid && host_rd_q == 0))
    else $error("ddr_protocol_engine: read data for the host without a host read");
endmodule
