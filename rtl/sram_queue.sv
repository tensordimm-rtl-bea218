// sram_queue: one of the SRAM queues of the NMP core (input queues A and B,
// output queue C).
//
// A synchronous FIFO of DEPTH entries, each one 64-byte block. Entries are
// written at the tail with push and read from the head, which is always
// visible on `head` while `empty` is low; pop removes it. Push and pop may
// happen in the same cycle, also when the queue is full (the pop frees the
// slot). The storage is a plain array so synthesis can map it to an SRAM or
// block RAM; the head is read combinationally from it.
//
// Size: the paper sizes each queue to the bandwidth-delay product of the
// local DIMM, 25.6 GB/s x 20 ns = 0.5 KB = 8 blocks, which is the default.
// The flow control (push/pop/full/empty) is this design's choice.
module sram_queue #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           push_data,
  input  logic                       pop,
  output logic [WIDTH-1:0]           head,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign head    = mem[rd_ptr];

  function automatic logic [PW-1:0] next_ptr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + (do_push ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
    end
  end

  // A producer must not push into a full queue that is not being popped.
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("sram_queue: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("sram_queue: pop while empty");
endmodule
