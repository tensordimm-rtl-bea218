// tb_tensor_node: end-to-end test of a TensorNode at its default size
// (32 TensorDIMMs, each with a behavioural DRAM), and the full-size test.
//
// The embedding layer of the paper's example is run on it: the host side
// stores a 20-entry index list in every DIMM through the plain DIMM port,
// then a GATHER builds a 20 x 2 KB embedding tensor from a table, REDUCE
// add/sub/mul combine it with a second tensor, and an AVERAGE of 50 inputs
// (the largest reduction of the evaluated recommender models) produces two
// means. The single-precision versions then run on floating-point data
// written straight into the DRAM models: REDUCE mul and sub, and an
// AVERAGE of 5 inputs. After each instruction every DIMM's output slice is compared with
// values computed from the pseudo code, and DIMM 7 is also read back
// through its host port. While an instruction is being broadcast, DIMM 5
// still has a host read in flight, so the cores take the instruction in
// different cycles. Every mechanism is counted and must occur at least
// once: each opcode, host access, host stall by the NMP, staggered
// broadcast acceptance, queue back-pressure (read credits exhausted), row conflicts
// (PRE from the NMP controller), and a partly
// used index block. No DRAM may see a protocol violation.
module tb_tensor_node;
  import tdimm_pkg::*;
  import tdimm_tb_pkg::*;
  localparam int ND = 32, RB = 5;
  logic clk = 0, rst_n = 0;
  logic isa_valid, isa_ready, busy, done;
  tisa_instr_t isa_instr;
  ddr_cmd_t host_cmd [ND];
  logic [BLOCK_W-1:0] host_wdata [ND], host_rdata [ND], dram_wdata [ND], dram_rdata [ND];
  logic [ND-1:0] host_ready, host_rvalid, nmp_mode, dram_rvalid;
  ddr_cmd_t dram_cmd [ND];
  int checks = 0, failures = 0;

  tensor_node dut (.*);

  always #5 clk = ~clk;
  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---- what is being verified ------------------------------------------
  localparam int NIDX = 20;
  int unsigned idx [NIDX];
  typedef enum {V_NONE, V_GATHER, V_REDUCE, V_AVERAGE, V_FAVERAGE} vkind_e;
  vkind_e v_kind;
  alu_op_t v_op;
  longint unsigned v_in1, v_in2, v_out;
  int v_count, v_avg;
  logic [ND-1:0] v_req;
  logic [ND-1:0] v_fin;
  logic [ND-1:0] fill_fp;
  longint unsigned fp_base;
  int fp_blocks;

  // single-precision test data: normal floats of both signs whose sums and
  // products are exact in double precision
  function automatic logic [BLOCK_W-1:0] fp_block(int unsigned t, longint unsigned b);
    logic [BLOCK_W-1:0] r;
    for (int l = 0; l < LANES; l++) begin
      logic [31:0] h;
      h = 32'(t * 2654435761 + b * 40503 + l * 97);
      r[l*32 +: 32] = {h[31], 8'(120 + (t + b + l) % 16), h[22:0] ^ 23'(h >> 9)};
    end
    return r;
  endfunction

  for (genvar d = 0; d < ND; d++) begin : g_mem
    // DIMM 0's DRAM answers later than the queues can cover, so its read
    // credits run out and back-pressure shows
    ddr4_dram_model #(.TID(d), .CL(d == 0 ? 12 : 5)) dram (.clk, .cmd(dram_cmd[d]), .wdata(dram_wdata[d]),
      .rvalid(dram_rvalid[d]), .rdata(dram_rdata[d]));
    // the expected value of every output block of this DIMM's slice
    always @(posedge clk) if (v_req[d]) begin
      for (int i = 0; i < v_count; i++) begin
        logic [BLOCK_W-1:0] e;
        case (v_kind)
          V_GATHER: e = dram.peek((v_in1 >> RB) + idx[i]);
          V_REDUCE: e = ref_op(v_op, dram.peek((v_in1 >> RB) + i), dram.peek((v_in2 >> RB) + i));
          V_FAVERAGE: begin
            logic [31:0] acc [LANES];
            for (int j = 0; j < v_avg; j++) begin
              logic [BLOCK_W-1:0] a;
              a = dram.peek((v_in1 >> RB) + i * v_avg + j);
              foreach (acc[l]) acc[l] = (j == 0) ? a[l*32 +: 32] : r2f(f2r(acc[l]) + f2r(a[l*32 +: 32]));
            end
            foreach (acc[l]) e[l*32 +: 32] = r2f(f2r(acc[l]) / real'(v_avg));
          end
          default: begin
            longint sums [LANES];
            foreach (sums[l]) sums[l] = 0;
            for (int j = 0; j < v_avg; j++) begin
              logic [BLOCK_W-1:0] a;
              a = dram.peek((v_in1 >> RB) + i * v_avg + j);
              foreach (sums[l]) sums[l] += longint'($signed(a[l*32 +: 32]));
            end
            e = ref_mean(sums, v_avg);
          end
        endcase
        check(dram.peek((v_out >> RB) + i) == e, $sformatf("DIMM %0d output %0d (kind %0d)", d, i, v_kind));
      end
      v_req[d] <= 1'b0;
    end
    always @(posedge clk) if (fill_fp[d]) begin
      for (int k = 0; k < fp_blocks; k++) dram.poke((fp_base >> RB) + k, fp_block(d, (fp_base >> RB) + k));
      fill_fp[d] <= 1'b0;
    end
    always @(posedge clk) if (v_fin[d]) begin
      check(dram.violations == 0, $sformatf("DIMM %0d: no DRAM protocol violations", d));
      v_fin[d] <= 1'b0;
    end
  end

  // ---- mechanism counters ----------------------------------------------
  int n_ops [7];
  int n_host_cmd, n_host_stall, n_stagger, n_credit_stall, n_qc_full, n_nmp_pre, n_partial_idx;
  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < ND; d++) begin
      if (host_cmd[d].cmd != DDR_NOP && host_ready[d]) n_host_cmd++;
      if (host_cmd[d].cmd != DDR_NOP && !host_ready[d] && nmp_mode[d]) n_host_stall++;
      if (nmp_mode[d] && dram_cmd[d].cmd == DDR_PRE) n_nmp_pre++;
    end
    if (dut.taken_q != 0 && !(&dut.taken_q)) n_stagger++;
    if (dut.g_dimm[0].u_core.u_mc.u_seq.state_q == 3'd2 &&
        !dut.g_dimm[0].u_core.u_mc.u_seq.credit_a) n_credit_stall++;
    if (dut.g_dimm[0].u_core.u_mc.qc_full) n_qc_full++;
  end

  // ---- host port drivers (all DIMMs at once, or one DIMM) --------------
  task automatic hcmd(int dimm, ddr_cmd_e c, longint unsigned lblk, logic [BLOCK_W-1:0] d);
    @(negedge clk);
    for (int k = 0; k < ND; k++) if (dimm < 0 || dimm == k) begin
      host_cmd[k] = '{cmd: c, bank: lblk[3:0], row: ROW_BITS'(lblk >> 10), col: {lblk[9:4], 3'b000}};
      host_wdata[k] = d;
    end
    @(posedge clk);
    while (dimm >= 0 ? !host_ready[dimm] : !(&host_ready)) @(posedge clk);
    #1 foreach (host_cmd[k]) host_cmd[k] = '0;
    repeat (12) @(posedge clk);
  endtask

  logic [BLOCK_W-1:0] rd7;
  always @(posedge clk) if (host_rvalid[7]) rd7 <= host_rdata[7];

  task automatic run(tisa_instr_t ins, vkind_e k, alu_op_t op, int avg, bit stagger);
    @(negedge clk);
    if (stagger) begin
      // DIMM 5's host opens a row and starts a read just before the broadcast
      hcmd(5, DDR_ACT, 64'h1C00, '0);   // bank 0, row 7
      @(negedge clk);
      host_cmd[5] = '{cmd: DDR_RD, bank: 4'd0, row: ROW_BITS'(7), col: '0};
      @(posedge clk); while (!host_ready[5]) @(posedge clk);
      #1 host_cmd[5] = '0;
    end
    isa_instr = ins; isa_valid = 1;
    @(posedge clk); while (!isa_ready) @(posedge clk);
    #1 isa_valid = 0;
    // DIMM 9's host wants the bus while the NMP cores run
    fork
      hcmd(9, DDR_ACT, 64'h7000, '0);
      begin @(posedge clk); while (!done) @(posedge clk); end
    join
    hcmd(9, DDR_PRE, 64'h7000, '0);
    n_ops[ins.opcode == OP_GATHER ? 0 : ins.opcode == OP_AVERAGE ? 4 : ins.opcode == OP_FAVERAGE ? 6 :
          (ins.opcode & OP_FP_BIT) != 0 ? 5 : int'(ins.opcode) - 1]++;
    v_kind = k; v_op = op; v_in1 = ins.input_base; v_in2 = ins.aux; v_out = ins.output_base;
    v_count = int'(ins.count); v_avg = avg;
    @(negedge clk) v_req = '1;
    @(negedge clk) wait (v_req == 0);
    check(!busy, "node idle after done");
  endtask

  initial begin
    logic [BLOCK_W-1:0] x;
    longint unsigned tbl = 64'h200000, g_out = 64'h40000, t2 = 64'h60000;
    longint unsigned r_add = 64'h80000, r_sub = 64'hA0000, r_mul = 64'hC0000, a_out = 64'hE0000;
    isa_valid = 0; isa_instr = '0; v_req = '0; v_fin = '0; fill_fp = '0;
    foreach (host_cmd[k]) begin host_cmd[k] = '0; host_wdata[k] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // index list (20 indices: one full and one partly used index block)
    foreach (idx[k]) idx[k] = $urandom_range(0, 1 << 22);
    for (int b = 0; b < 2; b++) begin
      x = '0;
      for (int j = 0; j < 16 && b*16 + j < NIDX; j++) x[j*32 +: 32] = idx[b*16 + j];
      hcmd(-1, DDR_ACT, 64'h30 + b, '0);
      hcmd(-1, DDR_WR,  64'h30 + b, x);
      hcmd(-1, DDR_PRE, 64'h30 + b, '0);
    end
    if (NIDX % 16 != 0) n_partial_idx++;

    run('{opcode: OP_GATHER, input_base: FIELD_W'(tbl), aux: FIELD_W'(64'h30),
          output_base: FIELD_W'(g_out), count: NIDX}, V_GATHER, ALU_PASS, 1, 1);
    // DIMM 7's first gathered slice through its host port
    begin
      longint unsigned lb = g_out >> RB;
      hcmd(7, DDR_ACT, lb, '0); hcmd(7, DDR_RD, lb, '0);
      check(rd7 == init_block(7, (tbl >> RB) + idx[0]), "host read of a gathered slice");
      hcmd(7, DDR_PRE, lb, '0);
    end
    run('{opcode: OP_REDUCE_ADD, input_base: FIELD_W'(g_out), aux: FIELD_W'(t2),
          output_base: FIELD_W'(r_add), count: NIDX}, V_REDUCE, ALU_ADD, 1, 0);
    run('{opcode: OP_REDUCE_SUB, input_base: FIELD_W'(g_out), aux: FIELD_W'(t2),
          output_base: FIELD_W'(r_sub), count: NIDX}, V_REDUCE, ALU_SUB, 1, 1);
    run('{opcode: OP_REDUCE_MUL, input_base: FIELD_W'(r_add), aux: FIELD_W'(r_sub),
          output_base: FIELD_W'(r_mul), count: NIDX}, V_REDUCE, ALU_MUL, 1, 0);
    run('{opcode: OP_AVERAGE, input_base: FIELD_W'(tbl), aux: 50,
          output_base: FIELD_W'(a_out), count: 2}, V_AVERAGE, ALU_AVG, 50, 0);

    // single precision: two input tensors of 8 blocks per DIMM
    fp_base = 64'h100000; fp_blocks = 16;
    @(negedge clk) fill_fp = '1;
    @(negedge clk) wait (fill_fp == 0);
    run('{opcode: OP_FREDUCE_MUL, input_base: FIELD_W'(64'h100000), aux: FIELD_W'(64'h100100),
          output_base: FIELD_W'(64'h140000), count: 8}, V_REDUCE, ALU_FMUL, 1, 0);
    run('{opcode: OP_FREDUCE_SUB, input_base: FIELD_W'(64'h100000), aux: FIELD_W'(64'h100100),
          output_base: FIELD_W'(64'h160000), count: 8}, V_REDUCE, ALU_FSUB, 1, 1);
    run('{opcode: OP_FAVERAGE, input_base: FIELD_W'(64'h100000), aux: 5,
          output_base: FIELD_W'(64'h180000), count: 3}, V_FAVERAGE, ALU_FAVG, 5, 0);

    @(negedge clk) v_fin = '1;
    @(negedge clk) wait (v_fin == 0);
    $display("ops G/ADD/SUB/MUL/AVG/FREDUCE/FAVG = %0d/%0d/%0d/%0d/%0d/%0d/%0d host_cmd=%0d host_stall=%0d stagger=%0d credit_stall=%0d qc_full=%0d nmp_pre=%0d partial_idx=%0d",
             n_ops[0], n_ops[1], n_ops[2], n_ops[3], n_ops[4], n_ops[5], n_ops[6], n_host_cmd, n_host_stall,
             n_stagger, n_credit_stall, n_qc_full, n_nmp_pre, n_partial_idx);
    for (int i = 0; i < 7; i++) check(n_ops[i] > 0, $sformatf("opcode %0d executed", i));
    check(n_host_cmd > 0, "host access as a plain DIMM");
    check(n_host_stall > 0, "host stalled by the NMP");
    check(n_stagger > 0, "cores took a broadcast instruction in different cycles");
    check(n_credit_stall > 0, "read credits exhausted (queue back-pressure)");
    check(n_nmp_pre > 0, "row conflicts served with PRE");
    check(n_partial_idx > 0, "partly used index block");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
