// tb_tisa_sequencer: self-checking test of TensorISA decode and address
// generation. The testbench stands in for the DRAM command controller (a
// memory that accepts requests with random back-pressure and answers reads
// in order a few cycles later), for the three SRAM queues and for the
// vector ALU. For GATHER, REDUCE (add, sub, mul) and AVERAGE it compares
// the exact stream of read addresses and of write addresses and data with
// lists built from the paper's pseudo code for this DIMM's tid, and checks
// that the input queues never overflow and that every instruction starts
// and ends with a precharge-all.
module tb_tisa_sequencer;
  import tdimm_pkg::*;
  import tdimm_tb_pkg::*;
  localparam int ND = 8, RB = 3, DEPTH = 8, TID = 5, LAT = 4;
  logic clk = 0, rst_n = 0;
  logic [RB-1:0] tid = RB'(TID);
  logic instr_valid, instr_ready, busy, done, alu_start;
  tisa_instr_t instr;
  alu_op_t alu_op;
  logic [31:0] avg_num;
  logic [$clog2(DEPTH+1)-1:0] qa_count, qb_count;
  logic qa_push, qb_push, qc_empty, qc_pop;
  logic [BLOCK_W-1:0] qc_head, req_wdata, rsp_data;
  logic req_valid, req_ready, req_write, prea_req, prea_done, rsp_valid, ctrl_idle;
  logic [FIELD_W+BYTE_OFF_BITS-1:0] req_addr;
  rd_tag_e req_tag, rsp_tag;
  int checks = 0, failures = 0;

  tisa_sequencer #(.NODE_DIM(ND), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---- memory: global block -> data -------------------------------------
  logic [BLOCK_W-1:0] mem [longint unsigned];
  function automatic logic [BLOCK_W-1:0] mem_rd(longint unsigned g);
    if (mem.exists(g)) return mem[g];
    return init_block(TID, g >> RB);
  endfunction

  typedef struct { longint due; rd_tag_e tag; logic [BLOCK_W-1:0] d; } rsp_t;
  rsp_t pend [$];
  longint cyc = 0;
  longint unsigned got_rd [$], got_wr [$];
  logic [BLOCK_W-1:0] got_wd [$];
  int n_prea;

  assign rsp_valid = pend.size() != 0 && pend[0].due <= cyc;
  assign rsp_tag   = pend.size() != 0 ? pend[0].tag : TAG_QA;
  assign rsp_data  = pend.size() != 0 ? pend[0].d : '0;
  assign ctrl_idle = pend.size() == 0;

  bit rdy_rand;
  assign req_ready = req_valid && rdy_rand && !prea_req;
  bit prea_d;
  assign prea_done = prea_req && prea_d;

  // ---- queues and ALU stand-in -----------------------------------------
  logic [BLOCK_W-1:0] qa [$], qb [$], qc [$];
  logic [BLOCK_W-1:0] acc; int acc_n;
  assign qa_count = ($clog2(DEPTH+1))'(qa.size());
  assign qb_count = ($clog2(DEPTH+1))'(qb.size());
  assign qc_empty = qc.size() == 0;
  assign qc_head  = qc.size() != 0 ? qc[0] : '0;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    rdy_rand <= $urandom_range(0, 3) != 0;
    prea_d   <= $urandom_range(0, 1);
    if (prea_done) n_prea++;
    if (req_valid && req_ready) begin
      if (req_write) begin
        got_wr.push_back(req_addr >> 6); got_wd.push_back(req_wdata);
        mem[req_addr >> 6] = req_wdata;
      end else begin
        rsp_t r;
        got_rd.push_back(req_addr >> 6);
        r.due = cyc + LAT + 1; r.tag = req_tag; r.d = mem_rd(req_addr >> 6);
        pend.push_back(r);
      end
    end
    if (rsp_valid) void'(pend.pop_front());
    if (qc_pop) void'(qc.pop_front());
    // ALU stand-in, one step per cycle, only when queue C has room
    if (qc.size() < DEPTH && $urandom_range(0, 4) != 0) begin
      case (alu_op)
        ALU_PASS: if (qa.size() > 0) qc.push_back(qa.pop_front());
        ALU_ADD, ALU_SUB, ALU_MUL:
          if (qa.size() > 0 && qb.size() > 0) qc.push_back(ref_op(alu_op, qa.pop_front(), qb.pop_front()));
        default: if (qa.size() > 0) begin
          acc = (acc_n == 0) ? qa[0] : ref_op(ALU_ADD, acc, qa[0]);
          void'(qa.pop_front());
          acc_n++;
          if (acc_n == int'(avg_num)) begin
            logic [BLOCK_W-1:0] m;
            for (int l = 0; l < LANES; l++) m[l*32 +: 32] = 32'(int'(acc[l*32 +: 32]) / int'(avg_num));
            qc.push_back(m); acc_n = 0;
          end
        end
      endcase
    end
    if (qa_push) qa.push_back(rsp_data);
    if (qb_push) qb.push_back(rsp_data);
    check(qa.size() <= DEPTH && qb.size() <= DEPTH, "input queue within DEPTH");
  end

  // ---- one instruction --------------------------------------------------
  task automatic run(tisa_instr_t ins, longint unsigned exp_rd [$], longint unsigned exp_wr [$],
                     logic [BLOCK_W-1:0] exp_wd [$], string name);
    got_rd.delete(); got_wr.delete(); got_wd.delete(); n_prea = 0; acc_n = 0;
    @(negedge clk);
    instr = ins; instr_valid = 1;
    @(posedge clk); while (!instr_ready) @(posedge clk);
    #1 instr_valid = 0;
    @(posedge clk); while (!done) @(posedge clk);
    @(negedge clk);
    check(got_rd.size() == exp_rd.size(), $sformatf("%s read count %0d/%0d", name, got_rd.size(), exp_rd.size()));
    for (int i = 0; i < exp_rd.size() && i < got_rd.size(); i++)
      check(got_rd[i] == exp_rd[i], $sformatf("%s read %0d address", name, i));
    check(got_wr.size() == exp_wr.size(), $sformatf("%s write count", name));
    for (int i = 0; i < exp_wr.size() && i < got_wr.size(); i++) begin
      check(got_wr[i] == exp_wr[i], $sformatf("%s write %0d address", name, i));
      check(got_wd[i] == exp_wd[i], $sformatf("%s write %0d data", name, i));
    end
    check(n_prea == 2, $sformatf("%s precharge-all at start and end", name));
    check(!busy, "idle after done");
  endtask

  initial begin
    tisa_instr_t ins;
    longint unsigned er [$], ew [$];
    logic [BLOCK_W-1:0] ed [$];
    int unsigned idx [];
    instr_valid = 0; instr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // GATHER of 37 indices (3 index blocks, the last one partly used)
    begin
      longint unsigned tbl = 64'h1000, ib = 64'h40, ob = 64'h8000;
      int cnt = 37;
      idx = new[48];
      foreach (idx[k]) idx[k] = $urandom_range(0, 5000);
      for (int i = 0; i < 3; i++) begin
        logic [BLOCK_W-1:0] x;
        for (int j = 0; j < 16; j++) x[j*32 +: 32] = idx[i*16 + j];
        mem[((ib + i) << RB) | TID] = x;   // the DIMM's copy of the index list
      end
      er.delete(); ew.delete(); ed.delete();
      for (int i = 0; i < (cnt + 15) / 16; i++) begin
        er.push_back(((ib + i) << RB) | TID);
        for (int j = 0; j < 16 && i*16 + j < cnt; j++) begin
          er.push_back(tbl + idx[i*16 + j] * ND + TID);
          ew.push_back(ob + (i*16 + j) * ND + TID);
          ed.push_back(mem_rd(tbl + idx[i*16 + j] * ND + TID));
        end
      end
      ins = '{opcode: OP_GATHER, input_base: FIELD_W'(tbl), aux: FIELD_W'(ib),
              output_base: FIELD_W'(ob), count: FIELD_W'(cnt)};
      run(ins, er, ew, ed, "GATHER");
    end

    // REDUCE add/sub/mul of 20 embedding pairs
    for (int o = 0; o < 3; o++) begin
      opcode_t opc; alu_op_t aop;
      longint unsigned i1 = 64'h8000, i2 = 64'h20000, ob = 64'h40000;
      int cnt = 20;
      opc = (o == 0) ? OP_REDUCE_ADD : (o == 1) ? OP_REDUCE_SUB : OP_REDUCE_MUL;
      aop = alu_op_of(opc);
      er.delete(); ew.delete(); ed.delete();
      for (int i = 0; i < cnt; i++) begin
        er.push_back(i1 + i * ND + TID);
        er.push_back(i2 + i * ND + TID);
        ew.push_back(ob + i * ND + TID + o * 64'h1000);
        ed.push_back(ref_op(aop, mem_rd(i1 + i * ND + TID), mem_rd(i2 + i * ND + TID)));
      end
      ins = '{opcode: opc, input_base: FIELD_W'(i1), aux: FIELD_W'(i2),
              output_base: FIELD_W'(ob + o * 64'h1000), count: FIELD_W'(cnt)};
      run(ins, er, ew, ed, "REDUCE");
    end

    // AVERAGE: 4 outputs of 5 inputs each
    begin
      longint unsigned ib = 64'h60000, ob = 64'h70000;
      int cnt = 4, na = 5;
      er.delete(); ew.delete(); ed.delete();
      for (int i = 0; i < cnt; i++) begin
        longint sums [LANES];
        foreach (sums[l]) sums[l] = 0;
        for (int j = 0; j < na; j++) begin
          logic [BLOCK_W-1:0] a;
          er.push_back(ib + (i * na + j) * ND + TID);
          a = mem_rd(ib + (i * na + j) * ND + TID);
          foreach (sums[l]) sums[l] += longint'($signed(a[l*32 +: 32]));
        end
        ew.push_back(ob + i * ND + TID);
        ed.push_back(ref_mean(sums, na));
      end
      ins = '{opcode: OP_AVERAGE, input_base: FIELD_W'(ib), aux: FIELD_W'(na),
              output_base: FIELD_W'(ob), count: FIELD_W'(cnt)};
      run(ins, er, ew, ed, "AVERAGE");
    end

    // an instruction with count 0 completes with no traffic
    begin
      er.delete(); ew.delete(); ed.delete();
      ins = '{opcode: OP_REDUCE_ADD, input_base: '0, aux: '0, output_base: '0, count: '0};
      run(ins, er, ew, ed, "EMPTY");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
