// tb_nmp_core: self-checking test of one NMP core (TensorDIMM buffer
// device) with its behavioural DRAM. The host first uses the DIMM as a
// plain buffered DIMM to store the index list (ACT/WR/PRE through the host
// port). Then GATHER, REDUCE (sub) and AVERAGE instructions are sent on the
// instruction port while the host keeps issuing reads, so the host is
// stalled and resumed around each instruction. Finally the host reads the
// results back through the host port and the testbench compares them with
// values computed from the pseudo code. The DRAM model must see no protocol
// violation over the whole run, host and NMP traffic together.
module tb_nmp_core;
  import tdimm_pkg::*;
  import tdimm_tb_pkg::*;
  localparam int ND = 4, RB = 2, TID = 1;
  logic clk = 0, rst_n = 0;
  ddr_cmd_t host_cmd, dram_cmd;
  logic [BLOCK_W-1:0] host_wdata, host_rdata, dram_wdata, dram_rdata;
  logic host_ready, host_rvalid, isa_valid, isa_ready, busy, done, nmp_mode, dram_rvalid;
  tisa_instr_t isa_instr;
  int checks = 0, failures = 0;
  int host_stalls = 0;

  nmp_core #(.NODE_DIM(ND)) dut (.clk, .rst_n, .tid(RB'(TID)), .host_cmd, .host_wdata,
    .host_ready, .host_rvalid, .host_rdata, .isa_valid, .isa_ready, .isa_instr,
    .busy, .done, .nmp_mode, .dram_cmd, .dram_wdata, .dram_rvalid, .dram_rdata);
  ddr4_dram_model #(.TID(TID)) dram (.clk, .cmd(dram_cmd), .wdata(dram_wdata),
    .rvalid(dram_rvalid), .rdata(dram_rdata));

  always #5 clk = ~clk;
  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n && host_cmd.cmd != DDR_NOP && !host_ready) host_stalls++;

  // one host command, then enough idle cycles for any DRAM timing
  task automatic hcmd(ddr_cmd_e c, longint unsigned lblk, logic [BLOCK_W-1:0] d);
    @(negedge clk);
    host_cmd = '{cmd: c, bank: lblk[3:0], row: ROW_BITS'(lblk >> 10), col: {lblk[9:4], 3'b000}};
    host_wdata = d;
    @(posedge clk); while (!host_ready) @(posedge clk);
    #1 host_cmd = '0;
    repeat (12) @(posedge clk);
  endtask

  task automatic host_write(longint unsigned lblk, logic [BLOCK_W-1:0] d);
    hcmd(DDR_ACT, lblk, '0); hcmd(DDR_WR, lblk, d); hcmd(DDR_PRE, lblk, '0);
  endtask

  logic [BLOCK_W-1:0] rd_last;
  always @(posedge clk) if (host_rvalid) rd_last <= host_rdata;
  task automatic host_read(longint unsigned lblk, output logic [BLOCK_W-1:0] d);
    hcmd(DDR_ACT, lblk, '0); hcmd(DDR_RD, lblk, '0);
    d = rd_last;
    hcmd(DDR_PRE, lblk, '0);
  endtask

  // send an instruction while the host keeps trying to read
  task automatic instr(tisa_instr_t ins);
    @(negedge clk);
    isa_instr = ins; isa_valid = 1;
    @(posedge clk); while (!isa_ready) @(posedge clk);
    #1 isa_valid = 0;
    fork
      begin @(posedge clk); while (!done) @(posedge clk); end
      begin hcmd(DDR_ACT, 64'h3FFFF0, '0); end
    join
    hcmd(DDR_PRE, 64'h3FFFF0, '0);
  endtask

  initial begin
    int unsigned idx [16];
    logic [BLOCK_W-1:0] x, r;
    host_cmd = '0; host_wdata = '0; isa_valid = 0; isa_instr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // host stores the index list at DIMM-local block 0x20
    foreach (idx[k]) idx[k] = $urandom_range(0, 1 << 20);
    for (int j = 0; j < 16; j++) x[j*32 +: 32] = idx[j];
    host_write(64'h20, x);
    check(dram.peek(64'h20) == x, "host write reached DRAM");
    // GATHER 11 embeddings into global block 0x4000
    instr('{opcode: OP_GATHER, input_base: FIELD_W'(64'h100000), aux: FIELD_W'(64'h20),
            output_base: FIELD_W'(64'h4000), count: 11});
    for (int e = 0; e < 11; e++) begin
      host_read((64'h4000 >> RB) + e, r);
      check(r == init_block(TID, (64'h100000 >> RB) + idx[e]), $sformatf("GATHER %0d via host read", e));
    end
    // REDUCE sub: gathered tensor minus a second tensor
    instr('{opcode: OP_REDUCE_SUB, input_base: FIELD_W'(64'h4000), aux: FIELD_W'(64'h8000),
            output_base: FIELD_W'(64'hC000), count: 11});
    for (int e = 0; e < 11; e++) begin
      host_read((64'hC000 >> RB) + e, r);
      check(r == ref_op(ALU_SUB, init_block(TID, (64'h100000 >> RB) + idx[e]),
                        init_block(TID, (64'h8000 >> RB) + e)), $sformatf("REDUCE %0d via host read", e));
    end
    // AVERAGE of groups of 2 (NCF-like reduction width)
    instr('{opcode: OP_AVERAGE, input_base: FIELD_W'(64'hC000), aux: 2,
            output_base: FIELD_W'(64'h10000), count: 5});
    for (int i = 0; i < 5; i++) begin
      longint sums [LANES];
      foreach (sums[l]) sums[l] = 0;
      for (int j = 0; j < 2; j++) begin
        logic [BLOCK_W-1:0] a;
        a = dram.peek((64'hC000 >> RB) + i * 2 + j);
        foreach (sums[l]) sums[l] += longint'($signed(a[l*32 +: 32]));
      end
      host_read((64'h10000 >> RB) + i, r);
      check(r == ref_mean(sums, 2), $sformatf("AVERAGE %0d via host read", i));
    end
    check(host_stalls > 0, "host stalled by NMP execution");
    check(dram.violations == 0, "no DRAM protocol violations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
