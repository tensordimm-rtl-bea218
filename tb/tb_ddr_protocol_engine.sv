// tb_ddr_protocol_engine: self-checking test of the host/NMP bus switch.
// Checks that in host mode every host command reaches the DRAM bus
// unchanged and read data returns to the host; that an arriving
// instruction stalls the host, is handed over only after the host's reads
// have returned and T_SWITCH quiet cycles have passed; that in NMP mode the
// NMP controller owns the bus and gets the read data while host commands
// are held; and that the done pulse returns the bus to the host.
module tb_ddr_protocol_engine;
  import tdimm_pkg::*;
  localparam int TS = 9, LAT = 12;   // read latency above T_SWITCH
  logic clk = 0, rst_n = 0;
  ddr_cmd_t host_cmd, nmp_cmd, dram_cmd;
  logic [BLOCK_W-1:0] host_wdata, host_rdata, nmp_wdata, nmp_rdata, dram_wdata, dram_rdata;
  logic host_ready, host_rvalid, isa_valid, isa_ready, nmp_instr_valid, nmp_instr_ready;
  logic nmp_done, nmp_rvalid, dram_rvalid, nmp_mode;
  tisa_instr_t isa_instr, nmp_instr;
  int checks = 0, failures = 0;

  ddr_protocol_engine #(.T_SWITCH(TS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // DRAM stand-in: read data LAT cycles after RD, data = row/col pattern
  logic [LAT-1:0] rv_pipe;
  logic [BLOCK_W-1:0] rd_pipe [LAT];
  assign dram_rvalid = rv_pipe[LAT-1];
  assign dram_rdata  = rd_pipe[LAT-1];
  always @(posedge clk) begin
    rv_pipe <= {rv_pipe[LAT-2:0], dram_cmd.cmd == DDR_RD};
    rd_pipe[0] <= {16{dram_cmd.row[15:0], 16'(dram_cmd.col)}};
    for (int i = 1; i < LAT; i++) rd_pipe[i] <= rd_pipe[i-1];
  end

  int host_rd_seen, nmp_rd_seen;
  logic [31:0] host_last, nmp_last;
  always @(posedge clk) if (rst_n) begin
    if (host_rvalid) begin host_rd_seen++; host_last = host_rdata[31:0]; end
    if (nmp_rvalid) begin nmp_rd_seen++; nmp_last = nmp_rdata[31:0]; end
    check(!(host_rvalid && nmp_rvalid), "read data goes to one master");
    if (nmp_mode) check(dram_cmd == nmp_cmd, "NMP owns the bus in NMP mode");
    if (!nmp_mode && host_cmd.cmd != DDR_NOP && host_ready) check(dram_cmd == host_cmd, "host command repeated");
    if (!nmp_mode && !(host_cmd.cmd != DDR_NOP && host_ready)) check(dram_cmd.cmd == DDR_NOP, "bus idle when host holds");
  end

  task automatic host(ddr_cmd_e c, int row, int col);
    @(negedge clk);
    host_cmd = '{cmd: c, bank: 4'(row), row: ROW_BITS'(row), col: COL_BITS'(col)};
    host_wdata = {16{32'(row * 7 + col)}};
    @(posedge clk); while (!host_ready) @(posedge clk);
    #1 host_cmd = '0;
  endtask

  initial begin
    longint t_last, t_hand;
    host_cmd = '0; host_wdata = '0; isa_valid = 0; isa_instr = '0; nmp_instr_ready = 1;
    nmp_done = 0; nmp_cmd = '0; nmp_wdata = '0; rv_pipe = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // plain buffered-DIMM traffic
    host(DDR_ACT, 3, 0);
    for (int i = 0; i < 5; i++) host(DDR_RD, 3, i * 8);
    host(DDR_WR, 3, 64);
    repeat (LAT + 2) @(posedge clk);
    check(host_rd_seen == 5, "host reads returned to host");
    check(host_last == {16'd3, 16'd32}, $sformatf("host read data %h", host_last));
    // a host read in flight, then an instruction arrives
    host(DDR_RD, 3, 80);
    t_last = $time;
    isa_instr = '{opcode: OP_GATHER, input_base: 40'h100, aux: 40'h2, output_base: 40'h200, count: 40'd5};
    isa_valid = 1;
    #1;
    @(posedge clk); while (!isa_ready) begin
      #1 host_cmd = '{cmd: DDR_RD, bank: 4'd3, row: ROW_BITS'(3), col: 9'd88};
      check(!host_ready, "host stalled while instruction waits");
      @(posedge clk);
    end
    t_hand = $time;
    check(nmp_instr == isa_instr, "instruction forwarded unchanged");
    check(host_rd_seen == 6, $sformatf("handover after the host read returned (%0d)", host_rd_seen));
    check((t_hand - t_last) / 10 >= TS, $sformatf("handover after T_SWITCH quiet cycles (%0d)", (t_hand - t_last) / 10));
    #1 isa_valid = 0;
    @(negedge clk);
    check(nmp_mode, "NMP mode after handover");
    // NMP traffic; the held host read must not reach the bus
    for (int i = 0; i < 4; i++) begin
      @(negedge clk) nmp_cmd = '{cmd: (i == 0) ? DDR_ACT : DDR_RD, bank: 4'd1, row: ROW_BITS'(9), col: COL_BITS'(i * 8)};
      check(!host_ready, "host stalled in NMP mode");
    end
    @(negedge clk) nmp_cmd = '0;
    repeat (LAT + 2) @(posedge clk);
    check(nmp_rd_seen == 3, "NMP reads returned to NMP");
    check(nmp_last == {16'd9, 16'd24}, $sformatf("NMP read data %h", nmp_last));
    check(host_rd_seen == 6, $sformatf("no NMP data to the host (%0d)", host_rd_seen));
    @(negedge clk) nmp_done = 1;
    @(negedge clk) nmp_done = 0;
    check(!nmp_mode, "host mode after done");
    // the held host read goes out now
    @(posedge clk); while (!host_ready) @(posedge clk);
    #1 host_cmd = '0;
    repeat (LAT + 2) @(posedge clk);
    check(host_rd_seen == 7, "held host read completed after the switch back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
