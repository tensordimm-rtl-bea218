// tb_dram_cmd_ctrl: self-checking test of the DRAM command controller
// against the behavioural DRAM model, which flags every timing or protocol
// violation. Random reads and writes over a few banks and rows give row
// hits, misses and conflicts; each read's data and tag are compared with a
// reference memory. A run of row-hit reads must be accepted one per clock
// after the activate (tRCD), and PREA must close every bank.
module tb_dram_cmd_ctrl;
  import tdimm_pkg::*;
  import tdimm_tb_pkg::*;
  localparam int RB = 5, TID = 3;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_write, prea_req, prea_done;
  logic [FIELD_W+BYTE_OFF_BITS-1:0] req_addr;
  logic [BLOCK_W-1:0] req_wdata, dram_wdata, dram_rdata, rsp_data;
  rd_tag_e req_tag, rsp_tag;
  ddr_cmd_t dram_cmd;
  logic dram_rvalid, rsp_valid, idle;
  int checks = 0, failures = 0;
  logic [BLOCK_W-1:0] ref_mem [longint unsigned];
  logic [BLOCK_W-1:0] exp_data [$];
  rd_tag_e exp_tag [$];
  int n_act, n_pre, n_hits;

  dram_cmd_ctrl #(.RANK_BITS(RB)) dut (.*);
  ddr4_dram_model #(.TID(TID)) dram (.clk, .cmd(dram_cmd), .wdata(dram_wdata),
    .rvalid(dram_rvalid), .rdata(dram_rdata));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n && rsp_valid) begin
    check(exp_data.size() != 0, "response without read");
    if (exp_data.size() != 0) begin
      check(rsp_data == exp_data[0], "read data");
      check(rsp_tag == exp_tag[0], "read tag");
      void'(exp_data.pop_front()); void'(exp_tag.pop_front());
    end
  end

  function automatic logic [FIELD_W+BYTE_OFF_BITS-1:0] addr_of(longint unsigned lblk);
    return {FIELD_W'((lblk << RB) | TID), 6'b0};
  endfunction

  task automatic access(bit wr, longint unsigned lblk, rd_tag_e tag);
    logic [BLOCK_W-1:0] d;
    for (int l = 0; l < LANES; l++) d[l*32 +: 32] = $urandom;
    req_valid = 1; req_write = wr; req_addr = addr_of(lblk); req_wdata = d; req_tag = tag;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    if (wr) ref_mem[lblk] = d;
    else begin
      exp_data.push_back(ref_mem.exists(lblk) ? ref_mem[lblk] : init_block(TID, lblk));
      exp_tag.push_back(tag);
    end
    #1 req_valid = 0;
  endtask

  task automatic prea();
    prea_req = 1;
    @(posedge clk);
    while (!prea_done) @(posedge clk);
    #1 prea_req = 0;
  endtask

  initial begin
    int t0;
    req_valid = 0; req_write = 0; req_addr = '0; req_wdata = '0; req_tag = TAG_QA; prea_req = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    prea();
    // random traffic: 4 banks x 3 rows x 4 columns
    for (int i = 0; i < 1500; i++) begin
      longint unsigned lblk;
      lblk = longint'($urandom_range(0, 3)) | (longint'($urandom_range(0, 3)) << 4) |
             (longint'($urandom_range(0, 2)) << 10);
      access($urandom_range(0, 2) == 0, lblk, rd_tag_e'($urandom_range(0, 2)));
      if ($urandom_range(0, 99) == 0) prea();
    end
    wait (idle);
    // streaming row hits: 8 reads of one row after PREA
    prea();
    repeat (5) @(posedge clk);
    #1 t0 = $time;
    for (int k = 0; k < 8; k++) access(0, 64'h400 | (k << 4), TAG_QB);
    check(($time - t0) / 10 <= 1 + 4 + 8, $sformatf("row-hit reads one per clock (%0d cycles)", ($time - t0) / 10));
    wait (idle);
    repeat (10) @(posedge clk);
    check(exp_data.size() == 0, "all reads answered");
    check(dram.violations == 0, "no DRAM protocol violations");
    check(dram.n_act > 10 && dram.n_pre > 10, "row misses and conflicts exercised");
    check(dram.n_rd > 500 && dram.n_wr > 200, "reads and writes exercised");
    $display("ACT=%0d PRE=%0d PREA=%0d RD=%0d WR=%0d", dram.n_act, dram.n_pre, dram.n_prea, dram.n_rd, dram.n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
