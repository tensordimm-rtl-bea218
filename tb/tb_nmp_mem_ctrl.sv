// tb_nmp_mem_ctrl: self-checking test of the NMP-local memory controller
// with the vector ALU and the behavioural DRAM model attached. It runs
// GATHER, REDUCE (add) and AVERAGE on a 4-DIMM node as DIMM 2, then reads
// the DRAM model back and compares every output block with values worked
// out from the pseudo code. It also checks that the DRAM saw no protocol
// violation and that a long REDUCE keeps the DRAM bus busy: three bursts
// (two reads, one write) per result, plus row switches.
module tb_nmp_mem_ctrl;
  import tdimm_pkg::*;
  import tdimm_tb_pkg::*;
  localparam int ND = 4, RB = 2, TID = 2;
  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, busy, done, alu_start, accumulating;
  tisa_instr_t instr;
  alu_op_t alu_op;
  logic [31:0] avg_num;
  logic [BLOCK_W-1:0] qa_head, qb_head, qc_data, dram_wdata, dram_rdata;
  logic qa_empty, qb_empty, qa_pop, qb_pop, qc_push, qc_full, dram_rvalid;
  ddr_cmd_t dram_cmd;
  int checks = 0, failures = 0;

  nmp_mem_ctrl #(.NODE_DIM(ND)) dut (.clk, .rst_n, .tid(RB'(TID)), .instr_valid, .instr_ready,
    .instr, .busy, .done, .alu_start, .alu_op, .avg_num, .qa_head, .qa_empty, .qa_pop,
    .qb_head, .qb_empty, .qb_pop, .qc_push, .qc_data, .qc_full,
    .dram_cmd, .dram_wdata, .dram_rvalid, .dram_rdata);
  vector_alu alu (.clk, .rst_n, .start(alu_start), .op(alu_op), .avg_num,
    .a_head(qa_head), .a_empty(qa_empty), .a_pop(qa_pop),
    .b_head(qb_head), .b_empty(qb_empty), .b_pop(qb_pop),
    .c_full(qc_full), .c_push(qc_push), .c_data(qc_data), .accumulating);
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

  // global block of a strided operand -> this DIMM's local block
  function automatic longint unsigned loc(longint unsigned g);
    return g >> RB;
  endfunction

  task automatic run(tisa_instr_t ins, output int cycles);
    longint t0;
    @(negedge clk);
    instr = ins; instr_valid = 1;
    @(posedge clk); while (!instr_ready) @(posedge clk);
    t0 = $time;
    #1 instr_valid = 0;
    @(posedge clk); while (!done) @(posedge clk);
    cycles = int'(($time - t0) / 10);
    @(negedge clk);
  endtask

  initial begin
    int cyc;
    instr_valid = 0; instr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // GATHER 20 embeddings (index list at DIMM-local block 0x10)
    begin
      int unsigned idx [32];
      longint unsigned tbl = 64'h4000, ob = 64'h100000;
      foreach (idx[k]) idx[k] = $urandom_range(0, 100000);
      for (int i = 0; i < 2; i++) begin
        logic [BLOCK_W-1:0] x;
        for (int j = 0; j < 16; j++) x[j*32 +: 32] = idx[i*16 + j];
        dram.poke(64'h10 + i, x);
      end
      run('{opcode: OP_GATHER, input_base: FIELD_W'(tbl), aux: FIELD_W'(64'h10),
            output_base: FIELD_W'(ob), count: 20}, cyc);
      for (int e = 0; e < 20; e++)
        check(dram.peek(loc(ob + e * ND + TID)) == init_block(TID, loc(tbl + idx[e] * ND + TID)),
              $sformatf("GATHER output %0d", e));
    end

    // REDUCE add of 64 pairs
    begin
      // operands share one DRAM row per bank, so the run is all row hits
      longint unsigned i1 = 64'h1000, i2 = 64'h1400, ob = 64'h1800;
      run('{opcode: OP_REDUCE_ADD, input_base: FIELD_W'(i1), aux: FIELD_W'(i2),
            output_base: FIELD_W'(ob), count: 64}, cyc);
      for (int i = 0; i < 64; i++)
        check(dram.peek(loc(ob + i * ND + TID)) ==
              ref_op(ALU_ADD, init_block(TID, loc(i1 + i * ND + TID)), init_block(TID, loc(i2 + i * ND + TID))),
              $sformatf("REDUCE output %0d", i));
      $display("REDUCE of 64 pairs: %0d cycles", cyc);
      // first touch of each of the 16 banks costs ACT + tRCD
      check(cyc <= 64 * 3 + 16 * 5 + 40, $sformatf("REDUCE keeps the DRAM bus busy (%0d cycles)", cyc));
    end

    // AVERAGE: 6 outputs of 25 inputs (YouTube/Fox-like reduction width)
    begin
      longint unsigned ib = 64'h500000, ob = 64'h600000;
      run('{opcode: OP_AVERAGE, input_base: FIELD_W'(ib), aux: 25, output_base: FIELD_W'(ob), count: 6}, cyc);
      for (int i = 0; i < 6; i++) begin
        longint sums [LANES];
        foreach (sums[l]) sums[l] = 0;
        for (int j = 0; j < 25; j++) begin
          logic [BLOCK_W-1:0] a;
          a = init_block(TID, loc(ib + (i * 25 + j) * ND + TID));
          foreach (sums[l]) sums[l] += longint'($signed(a[l*32 +: 32]));
        end
        check(dram.peek(loc(ob + i * ND + TID)) == ref_mean(sums, 25), $sformatf("AVERAGE output %0d", i));
      end
    end
    check(dram.violations == 0, "no DRAM protocol violations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
