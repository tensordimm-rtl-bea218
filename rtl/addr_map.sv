// addr_map: the TensorDIMM DRAM address mapping (combinational).
//
// A node-wide byte address is cut into fields, from the least significant
// bit up:
//   [5:0]                 column, low part: 3 byte-in-word bits and the 3
//                          column bits a burst of 8 walks through (64 B)
//   [6 +: RANK_BITS]      rank = the TensorDIMM holding the block
//   next BANK_BITS (4)    bank
//   next COLHI_BITS (6)   column, high part
//   rest (ROW_BITS)       row
// Because the rank sits right above the 64-byte offset, consecutive 64-byte
// pieces of one embedding land in consecutive TensorDIMMs, and a 2 KB
// embedding of 512 fp32/int32 elements is spread one block per DIMM over 32
// DIMMs. The field order and widths are the paper's (drawn there for 16
// ranks, i.e. 4 rank bits); RANK_BITS follows the number of DIMMs.
// The DRAM column sent with RD/WR is {column high, burst bits}; the byte
// bits are not sent. The outputs also give the DIMM-local block number
// (address without byte offset and rank), which is what a TensorDIMM stores.
module addr_map
  import tdimm_pkg::*;
#(
  parameter int unsigned RANK_BITS = 5
) (
  input  logic [FIELD_W+BYTE_OFF_BITS-1:0] byte_addr,
  output logic [RANK_BITS-1:0]             rank,
  output logic [BANK_BITS-1:0]             bank,
  output logic [ROW_BITS-1:0]              row,
  output logic [COL_BITS-1:0]              col,
  output logic [LOCAL_BLK_BITS-1:0]        local_blk
);
  localparam int unsigned RANK_LSB  = BYTE_OFF_BITS;
  localparam int unsigned BANK_LSB  = RANK_LSB + RANK_BITS;
  localparam int unsigned COLHI_LSB = BANK_LSB + BANK_BITS;
  localparam int unsigned ROW_LSB   = COLHI_LSB + COLHI_BITS;

  assign rank      = byte_addr[RANK_LSB  +: RANK_BITS];
  assign bank      = byte_addr[BANK_LSB  +: BANK_BITS];
  assign row       = byte_addr[ROW_LSB   +: ROW_BITS];
  assign col       = {byte_addr[COLHI_LSB +: COLHI_BITS], byte_addr[3 +: BURST_BITS]};
  assign local_blk = byte_addr[BANK_LSB  +: LOCAL_BLK_BITS];
endmodule
