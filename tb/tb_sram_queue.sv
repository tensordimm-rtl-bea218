// tb_sram_queue: self-checking test of the SRAM queue. Random pushes and
// pops (also pushes into a full queue that is popped in the same cycle) are
// compared with a reference queue: head, count, empty and full every cycle.
module tb_sram_queue;
  localparam int W = 64, D = 8;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full;
  logic [W-1:0] push_data, head;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, n_full_pushpop = 0;
  logic [W-1:0] model [$];

  sram_queue #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    push = 0; pop = 0; push_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      check(count == model.size(), "count");
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == D), "full");
      if (model.size() > 0) check(head == model[0], "head");
      // bias phases: fill, drain, mixed
      case ((cyc / 200) % 3)
        0: begin push = ($urandom_range(0, 3) != 0); pop = ($urandom_range(0, 3) == 0); end
        1: begin push = ($urandom_range(0, 3) == 0); pop = ($urandom_range(0, 3) != 0); end
        default: begin push = $urandom_range(0, 1); pop = $urandom_range(0, 1); end
      endcase
      if (model.size() == 0) pop = 0;
      if (model.size() == D && !pop) push = 0;
      if (model.size() == D && pop && push) n_full_pushpop++;
      push_data = {$urandom, $urandom};
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(push_data);
    end
    check(n_full_pushpop > 0, "push and pop on a full queue exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
