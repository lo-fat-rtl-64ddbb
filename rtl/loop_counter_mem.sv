// loop_counter_mem -- path_ID-indexed iteration counter memory of one loop level.
//
// 2^AW words of DW bits (8 x 2^16 bits = 512 Kbit at the defaults; three
// levels give the 1.5 Mbit of the described configuration).  A word holds how
// many times the loop path with that path_ID has completed; zero means the
// path has not been seen yet in the current loop.  One synchronous read port
// and one write port (simple dual-port block RAM): read data appear the cycle
// after the address; a read of the address written in the same cycle returns
// the old word.  The loop monitor uses both ports while its loop runs
// (read the count, write back the incremented count); after the loop exits
// the metadata generator uses them to read every count and write it back to
// zero, so the memory is clean for the next loop.  The contents start at
// zero (block-RAM initial value) because a reset sweep would take 2^AW cycles.
// Size and indexing follow the design description; the port arrangement is
// this implementation's choice.
module loop_counter_mem
  import lofat_pkg::*;
#(
  parameter int unsigned AW = ID_W,
  parameter int unsigned DW = CNT_W
) (
  input  logic          clk,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data
);

  logic [DW-1:0] mem [2**AW];

  initial for (int i = 0; i < 2**AW; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
