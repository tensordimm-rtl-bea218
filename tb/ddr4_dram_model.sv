// ddr4_dram_model: behavioural model of the DRAM chips of one TensorDIMM,
// seen through the command bus of the buffer device. Not synthesizable; for
// testbenches only.
//
// Storage is sparse: a block never written reads as init_block(TID, block).
// Commands (one per clock): ACT opens a row, RD returns the 64-byte block
// CL cycles later on rvalid/rdata, WR stores wdata at once, PRE closes a
// bank, PREA closes all. Every protocol rule the controller must respect is
// checked and counted in `violations`: ACT to an open bank or before tRP,
// RD/WR to a closed bank, another row or before tRCD, PRE before tRAS or
// before write recovery / read-to-precharge.
module ddr4_dram_model
  import tdimm_pkg::*;
  import tdimm_tb_pkg::*;
#(
  parameter int unsigned TID   = 0,
  parameter int unsigned CL    = 5,
  parameter int unsigned T_RCD = 4,
  parameter int unsigned T_RP  = 4,
  parameter int unsigned T_RAS = 9,
  parameter int unsigned T_WR  = 4,
  parameter int unsigned T_RTP = 2
) (
  input  logic               clk,
  input  ddr_cmd_t           cmd,
  input  logic [BLOCK_W-1:0] wdata,
  output logic               rvalid,
  output logic [BLOCK_W-1:0] rdata
);
  localparam int unsigned NB = 1 << BANK_BITS;
  logic [BLOCK_W-1:0] mem [longint unsigned];
  logic               open_b [NB];
  logic [ROW_BITS-1:0] row_b [NB];
  longint             t_act [NB], t_pre [NB], t_rdwr [NB];
  longint             now;
  int                 violations;
  int                 n_act, n_rd, n_wr, n_pre, n_prea;
  logic               pv [CL];
  logic [BLOCK_W-1:0] pd [CL];

  initial begin
    now = 0; violations = 0; n_act = 0; n_rd = 0; n_wr = 0; n_pre = 0; n_prea = 0;
    for (int b = 0; b < NB; b++) begin
      open_b[b] = 1'b0; row_b[b] = '0;
      t_act[b] = -100; t_pre[b] = -100; t_rdwr[b] = -100;
    end
    for (int i = 0; i < CL; i++) begin pv[i] = 1'b0; pd[i] = '0; end
  end

  function automatic longint unsigned blk_of(logic [BANK_BITS-1:0] bank,
                                             logic [ROW_BITS-1:0] row,
                                             logic [COL_BITS-1:0] col);
    return {row, col[COL_BITS-1 -: COLHI_BITS], bank};
  endfunction

  function automatic logic [BLOCK_W-1:0] peek(longint unsigned b);
    if (mem.exists(b)) return mem[b];
    return init_block(TID, b);
  endfunction

  task automatic poke(longint unsigned b, logic [BLOCK_W-1:0] d);
    mem[b] = d;
  endtask

  task automatic violation(string what);
    violations++;
    $display("DRAM%0d protocol violation at %0d: %s", TID, now, what);
  endtask

  assign rvalid = pv[CL-1];
  assign rdata  = pd[CL-1];

  always @(posedge clk) begin
    for (int i = CL-1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= 1'b0;
    case (cmd.cmd)
      DDR_ACT: begin
        n_act++;
        if (open_b[cmd.bank]) violation("ACT to open bank");
        if (now - t_pre[cmd.bank] < T_RP) violation("ACT before tRP");
        open_b[cmd.bank] = 1'b1; row_b[cmd.bank] = cmd.row; t_act[cmd.bank] = now;
      end
      DDR_RD, DDR_WR: begin
        if (!open_b[cmd.bank] || row_b[cmd.bank] != cmd.row) violation("RD/WR to closed row");
        if (now - t_act[cmd.bank] < T_RCD) violation("RD/WR before tRCD");
        if (cmd.col[BURST_BITS-1:0] != 0) violation("unaligned burst");
        if (cmd.cmd == DDR_RD) begin
          n_rd++;
          pv[0] <= 1'b1;
          pd[0] <= peek(blk_of(cmd.bank, cmd.row, cmd.col));
          t_rdwr[cmd.bank] = now + T_RTP;
        end else begin
          n_wr++;
          mem[blk_of(cmd.bank, cmd.row, cmd.col)] = wdata;
          t_rdwr[cmd.bank] = now + T_WR;
        end
      end
      DDR_PRE: begin
        n_pre++;
        if (open_b[cmd.bank] && now - t_act[cmd.bank] < T_RAS) violation("PRE before tRAS");
        if (now < t_rdwr[cmd.bank]) violation("PRE before tWR/tRTP");
        open_b[cmd.bank] = 1'b0; t_pre[cmd.bank] = now;
      end
      DDR_PREA: begin
        n_prea++;
        for (int b = 0; b < NB; b++) begin
          if (open_b[b] && now - t_act[b] < T_RAS) violation("PREA before tRAS");
          if (now < t_rdwr[b]) violation("PREA before tWR/tRTP");
          open_b[b] = 1'b0; t_pre[b] = now;
        end
      end
      default: ;
    endcase
    now++;
  end
endmodule
