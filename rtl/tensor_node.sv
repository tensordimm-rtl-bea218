// tensor_node: a TensorNode, the disaggregated memory node built from
// NODE_DIM TensorDIMMs (32 by default), each with its own NMP core and its
// own DRAM.
//
// A TensorISA instruction received on the node's instruction port (from
// the GPU side of the interconnect) is broadcast to every NMP core. Cores
// may take it in different cycles, because each first waits for its own
// host traffic to settle; the node remembers which cores have it and
// acknowledges the instruction (isa_ready) once all have. It then tracks
// which cores are still working and pulses `done` when the last finishes.
// Because the address map puts consecutive 64-byte blocks of an embedding
// in consecutive DIMMs, every core works on its own slice of every vector
// and the node's DRAM bandwidth grows with NODE_DIM.
//
// The interconnect link and its PHY are outside this module: the per-DIMM
// host DDR ports (host_*) and the instruction port are where they connect,
// and the per-DIMM DRAM command buses (dram_*) are where the DRAM chips
// connect. Broadcast and completion tracking are described in the paper;
// the handshake used for them is this design's choice.
module tensor_node
  import tdimm_pkg::*;
#(
  parameter int unsigned NODE_DIM = 32,
  parameter int unsigned DEPTH    = 8
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // instruction port
  input  logic                              isa_valid,
  output logic                              isa_ready,
  input  tisa_instr_t                       isa_instr,
  output logic                              busy,
  output logic                              done,
  // per-DIMM host DDR ports
  input  ddr_cmd_t                          host_cmd    [NODE_DIM],
  input  logic [BLOCK_W-1:0]                host_wdata  [NODE_DIM],
  output logic [NODE_DIM-1:0]               host_ready,
  output logic [NODE_DIM-1:0]               host_rvalid,
  output logic [BLOCK_W-1:0]                host_rdata  [NODE_DIM],
  output logic [NODE_DIM-1:0]               nmp_mode,
  // per-DIMM DRAM command buses
  output ddr_cmd_t                          dram_cmd    [NODE_DIM],
  output logic [BLOCK_W-1:0]                dram_wdata  [NODE_DIM],
  input  logic [NODE_DIM-1:0]               dram_rvalid,
  input  logic [BLOCK_W-1:0]                dram_rdata  [NODE_DIM]
);
  logic [NODE_DIM-1:0] core_valid, core_ready, core_busy, core_done;
  logic [NODE_DIM-1:0] taken_q;     // cores that already hold the instruction
  logic [NODE_DIM-1:0] pending_q;   // cores still executing it
  logic                all_taken;

  assign core_valid = {NODE_DIM{isa_valid}} & ~taken_q;
  assign all_taken  = &(taken_q | core_ready);
  assign isa_ready  = isa_valid && all_taken;
  assign busy       = |pending_q || |taken_q;

  for (genvar d = 0; d < NODE_DIM; d++) begin : g_dimm
    nmp_core #(.NODE_DIM(NODE_DIM), .DEPTH(DEPTH)) u_core (
      .clk, .rst_n, .tid(($clog2(NODE_DIM))'(d)),
      .host_cmd(host_cmd[d]), .host_wdata(host_wdata[d]),
      .host_ready(host_ready[d]), .host_rvalid(host_rvalid[d]),
      .host_rdata(host_rdata[d]),
      .isa_valid(core_valid[d]), .isa_ready(core_ready[d]), .isa_instr,
      .busy(core_busy[d]), .done(core_done[d]), .nmp_mode(nmp_mode[d]),
      .dram_cmd(dram_cmd[d]), .dram_wdata(dram_wdata[d]),
      .dram_rvalid(dram_rvalid[d]), .dram_rdata(dram_rdata[d])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      taken_q   <= '0;
      pending_q <= '0;
      done      <= 1'b0;
    end else begin
      taken_q   <= isa_ready ? '0 : (taken_q | (core_valid & core_ready));
      pending_q <= (pending_q | (core_valid & core_ready)) & ~core_done;
      done      <= (pending_q != 0) && ((pending_q & ~core_done) == 0) &&
                   ((taken_q | (core_valid & core_ready)) == 0 || isa_ready) &&
                   !(|(core_valid & core_ready));
    end
  end
endmodule
