// branches_memory -- on-chip store of the (src, dest) pairs of loop paths.
//
// While a loop path executes, each of its branches is written here; whether
// the pairs are hashed is decided only when the path completes (hashed if the
// path is new, dropped if it was seen before).  The memory is organised as
// DEPTH levels x NB banks x NE entries of 64 bits: each loop level fills one
// bank while a completed path waits in, or is read out of, another.  Write
// data come from the branch filter, the write address from the loop monitor;
// the hash engine controller reads with a combinational (register-file)
// read.  The banked organisation is this implementation's choice; only the
// role of the memory is given by the design description.
module branches_memory
  import lofat_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_DEPTH,
  parameter int unsigned NB    = NBANK,
  parameter int unsigned NE    = MAX_BR,
  localparam int unsigned LW = $clog2(DEPTH + 1),
  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned EW = $clog2(NE)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [LW-1:0] w_level,    // 1..DEPTH
  input  logic [BW-1:0] w_bank,
  input  logic [EW-1:0] w_idx,
  input  pair_t         w_pair,
  input  logic [LW-1:0] r_level,
  input  logic [BW-1:0] r_bank,
  input  logic [EW-1:0] r_idx,
  output pair_t         r_pair
);

  pair_t mem [DEPTH][NB][NE];

  always_ff @(posedge clk)
    if (we && w_level != '0) mem[w_level - 1'b1][w_bank][w_idx] <= w_pair;

  always_comb begin
    r_pair = '0;
    if (r_level != '0) r_pair = mem[r_level - 1'b1][r_bank][r_idx];
  end

endmodule
