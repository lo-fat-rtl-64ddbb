// indirect_target_cam -- run-time re-encoding of indirect branch targets.
//
// Inside a loop the full 32-bit target of an indirect branch (jalr: indirect
// calls and returns) is replaced in the path encoding by an N_CODE-bit code.
// The block keeps up to 2^N_CODE-1 targets in a register file built as two
// interleaved CAMs: CAM 0 holds the targets with odd codes (1, 3, 5, ...),
// CAM 1 those with even codes (2, 4, ...).  Both are searched in parallel.
// A lookup of a known target returns its code.  An unknown target is stored
// in the CAM whose turn it is and gets the next code (codes are 1, 2, ... in
// order of first appearance).  When all entries are used the code is 0, the
// all-zero "limit exceeded" code.  Lookup is combinational and the insertion
// happens at the clock edge, so one target per cycle is encoded in constant
// time.  `clear` empties the table when its loop ends; `tgts`/`ntgt` expose
// the table in code order for the loop metadata (code k+1 at index k).
// The code assignment, the all-zero overflow code and the two interleaved
// CAMs follow the design description; interleaving by code parity is this
// implementation's choice.
module indirect_target_cam
  import lofat_pkg::*;
#(
  parameter int unsigned CODE_W = N_CODE,
  localparam int unsigned NT = (1 << CODE_W) - 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     lookup,     // encode `target` this cycle
  input  logic [XLEN-1:0]          target,
  output logic [CODE_W-1:0]        code,
  output logic [$clog2(NT+1)-1:0]  ntgt,
  output logic [NT-1:0][XLEN-1:0]  tgts
);

  localparam int unsigned NA = (NT + 1) / 2;   // entries of CAM 0 (odd codes)
  localparam int unsigned NB = NT / 2;         // entries of CAM 1 (even codes)
  localparam int unsigned CW = $clog2(NT + 1);

  logic [NA-1:0][XLEN-1:0] cam0;
  logic [NB-1:0][XLEN-1:0] cam1;
  logic [NA-1:0]           hit0;
  logic [NB-1:0]           hit1;
  logic                    full;

  assign full = (ntgt == CW'(NT));

  always_comb begin
    code = '0;
    for (int i = 0; i < NA; i++) begin
      hit0[i] = (2 * i < int'(ntgt)) && (cam0[i] == target);
      if (hit0[i]) code = CODE_W'(2 * i + 1);
    end
    for (int i = 0; i < NB; i++) begin
      hit1[i] = (2 * i + 1 < int'(ntgt)) && (cam1[i] == target);
      if (hit1[i]) code = CODE_W'(2 * i + 2);
    end
    if (hit0 == '0 && hit1 == '0 && !full) code = CODE_W'(ntgt + 1'b1);
    for (int k = 0; k < NT; k++)
      tgts[k] = (k % 2 == 0) ? cam0[k / 2] : cam1[k / 2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ntgt <= '0;
      cam0 <= '0;
      cam1 <= '0;
    end else if (clear) begin
      ntgt <= '0;
    end else if (lookup && hit0 == '0 && hit1 == '0 && !full) begin
      if (ntgt[0] == 1'b0) cam0[ntgt[CW-1:1]] <= target;
      else                 cam1[ntgt[CW-1:1]] <= target;
      ntgt <= ntgt + 1'b1;
    end
  end

endmodule
