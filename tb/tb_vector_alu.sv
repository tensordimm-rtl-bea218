// tb_vector_alu: self-checking test of the 16-wide vector ALU.
// The testbench plays queues A, B (sources) and C (sink) with random
// stalls, runs PASS, ADD, SUB, MUL and AVERAGE (several averageNum values,
// including 0 which counts as 1) and their single-precision versions and compares every result with a
// lane-by-lane reference. With all queues ready the ALU must deliver one
// result per clock, which is checked for each pairwise operation.
module tb_vector_alu;
  import tdimm_pkg::*;
  import tdimm_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start;
  alu_op_t op;
  logic [31:0] avg_num;
  logic [BLOCK_W-1:0] a_head, b_head, c_data;
  logic a_empty, b_empty, a_pop, b_pop, c_full, c_push, accumulating;
  int checks = 0, failures = 0;
  logic [BLOCK_W-1:0] qa [$], qb [$], exp_q [$];
  bit stall_en;

  vector_alu dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [BLOCK_W-1:0] rnd_block();
    logic [BLOCK_W-1:0] r;
    for (int l = 0; l < LANES; l++) r[l*32 +: 32] = $urandom;
    return r;
  endfunction

  // queue heads seen by the ALU, with random bubbles
  bit a_hide, b_hide, c_block;
  always_comb begin
    a_empty = (qa.size() == 0) || a_hide;
    b_empty = (qb.size() == 0) || b_hide;
    a_head  = (qa.size() != 0) ? qa[0] : '0;
    b_head  = (qb.size() != 0) ? qb[0] : '0;
    c_full  = c_block;
  end

  int n_results;
  always @(posedge clk) if (rst_n) begin
    if (c_push) begin
      check(exp_q.size() != 0, "unexpected result");
      if (exp_q.size() != 0) begin
        check(c_data == exp_q[0], "result value");
        void'(exp_q.pop_front());
      end
      n_results++;
    end
    if (a_pop) void'(qa.pop_front());
    if (b_pop) void'(qb.pop_front());
  end

  always @(negedge clk) begin
    a_hide  <= stall_en && ($urandom_range(0, 3) == 0);
    b_hide  <= stall_en && ($urandom_range(0, 3) == 0);
    c_block <= stall_en && ($urandom_range(0, 3) == 0);
  end

  task automatic run_pair(alu_op_t o, int n, bit stalls);
    int t0;
    op = o; stall_en = stalls; n_results = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < n; i++) begin
      logic [BLOCK_W-1:0] a, b;
      a = rnd_block(); b = rnd_block();
      if (alu_is_fp(o)) for (int l = 0; l < LANES; l++) begin
        // normal floats whose exact sum/product fits in a double
        a[l*32 +: 23] = 23'($urandom); a[l*32+23 +: 8] = 8'(110 + $urandom_range(0, 30));
        b[l*32 +: 23] = 23'($urandom); b[l*32+23 +: 8] = 8'(110 + $urandom_range(0, 30));
      end
      if (o == ALU_MUL) for (int l = 0; l < LANES; l++) begin
        a[l*32 +: 32] = 32'($signed(a[l*32 +: 16]));
        b[l*32 +: 32] = 32'($signed(b[l*32 +: 16]));
      end
      qa.push_back(a);
      if (o != ALU_PASS) qb.push_back(b);
      exp_q.push_back(ref_op(o, a, b));
    end
    t0 = $time;
    wait (exp_q.size() == 0);
    @(negedge clk);
    if (!stalls) check(($time - t0) / 10 <= n + 1, $sformatf("one result per clock (%0d for %0d)", ($time - t0) / 10, n));
    check(n_results == n, "result count");
    stall_en = 0;
  endtask

  task automatic run_avg(int unsigned navg, int groups, bit stalls);
    int unsigned eff;
    eff = (navg == 0) ? 1 : navg;
    op = ALU_AVG; avg_num = navg; stall_en = stalls; n_results = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int g = 0; g < groups; g++) begin
      longint sums [LANES];
      for (int l = 0; l < LANES; l++) sums[l] = 0;
      for (int j = 0; j < eff; j++) begin
        logic [BLOCK_W-1:0] a;
        a = rnd_block();
        for (int l = 0; l < LANES; l++) begin
          a[l*32 +: 32] = 32'($signed(a[l*32 +: 20]));
          sums[l] += longint'($signed(a[l*32 +: 32]));
        end
        qa.push_back(a);
      end
      exp_q.push_back(ref_mean(sums, eff));
    end
    wait (exp_q.size() == 0);
    @(negedge clk);
    check(n_results == groups, "average result count");
    check(!accumulating, "accumulator empty after last group");
    stall_en = 0;
  endtask

  // Floating-point AVERAGE over small whole numbers: every partial sum is
  // exact in single precision, so the expected mean is the exact quotient
  // rounded once.
  task automatic run_favg(int unsigned navg, int groups, bit stalls);
    op = ALU_FAVG; avg_num = navg; stall_en = stalls; n_results = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int g = 0; g < groups; g++) begin
      int sums [LANES];
      logic [BLOCK_W-1:0] e;
      for (int l = 0; l < LANES; l++) sums[l] = 0;
      for (int j = 0; j < navg; j++) begin
        logic [BLOCK_W-1:0] a;
        for (int l = 0; l < LANES; l++) begin
          int v;
          v = $urandom_range(0, 2000) - 1000;
          sums[l] += v;
          a[l*32 +: 32] = r2f(real'(v));
        end
        qa.push_back(a);
      end
      for (int l = 0; l < LANES; l++) e[l*32 +: 32] = r2f(real'(sums[l]) / real'(navg));
      exp_q.push_back(e);
    end
    wait (exp_q.size() == 0);
    @(negedge clk);
    check(n_results == groups, "fp average result count");
    check(!accumulating, "accumulator empty after last fp group");
    stall_en = 0;
  endtask

  initial begin
    start = 0; op = ALU_PASS; avg_num = 1; stall_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_pair(ALU_PASS, 20, 0);
    run_pair(ALU_ADD, 20, 0);
    run_pair(ALU_SUB, 20, 0);
    run_pair(ALU_MUL, 20, 0);
    run_pair(ALU_PASS, 40, 1);
    run_pair(ALU_ADD, 40, 1);
    run_pair(ALU_SUB, 40, 1);
    run_pair(ALU_MUL, 40, 1);
    run_avg(1, 10, 0);
    run_avg(2, 10, 1);
    run_avg(25, 4, 1);
    run_avg(50, 3, 1);
    run_avg(0, 5, 0);
    run_avg(7, 6, 1);
    run_pair(ALU_FADD, 20, 0);
    run_pair(ALU_FSUB, 30, 1);
    run_pair(ALU_FMUL, 30, 1);
    run_favg(1, 4, 0);
    run_favg(3, 5, 1);
    run_favg(50, 3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
