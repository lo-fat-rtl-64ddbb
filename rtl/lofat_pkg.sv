// lofat_pkg -- types and constants shared by the control-flow attestation unit.
//
// The unit watches the instructions a RISC-V core retires, hashes the
// (source, destination) address pair of every control-flow transfer with
// SHA3-512, and compresses loops: each distinct path through a loop body is
// hashed once and afterwards only counted.  This package holds the sizes
// (defaults are the configuration described for the design: 3 nesting levels,
// 16-bit path identifiers, 8-bit iteration counters, 4-bit indirect-target
// codes) and the structs that travel between the blocks:
//   branch_status_t  branch filter -> loop monitor / hash controller
//   loops_status_t   branch filter -> loop monitor (loop entry, exit, depth)
//   new_path_t       loop monitor  -> hash controller (which stored paths to hash)
//   loop_end_t       loop monitor  -> metadata generator (one exiting loop)
// The struct layouts, the metadata word format and the bank/buffer sizes are
// this implementation's choices.
// Lint note: a block compiled on its own uses only part of this package, so
// unused-parameter warnings for the other constants are expected there.
package lofat_pkg;

  localparam int unsigned XLEN      = 32;
  localparam int unsigned MAX_DEPTH = 3;            // nested loops tracked
  localparam int unsigned ID_W      = 16;           // path_ID width (l)
  localparam int unsigned CNT_W     = 8;            // iteration counter width
  localparam int unsigned N_CODE    = 4;            // indirect target code width (n)
  localparam int unsigned N_TGT     = (1 << N_CODE) - 1;  // targets per loop
  localparam int unsigned MAX_BR    = 16;           // pairs stored per loop path
  localparam int unsigned NBANK     = 2;            // path buffers per level
  localparam int unsigned MAX_PATHS = 16;           // distinct paths listed per loop
  localparam int unsigned LVL_W     = $clog2(MAX_DEPTH + 1);
  localparam int unsigned BCNT_W    = $clog2(MAX_BR + 1);
  localparam int unsigned BANK_W    = (NBANK > 1) ? $clog2(NBANK) : 1;
  localparam int unsigned NP_W      = $clog2(MAX_PATHS + 1);
  localparam int unsigned NT_W      = $clog2(N_TGT + 1);

  // RV32I opcodes of control-transfer instructions
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;

  typedef enum logic [1:0] {
    BR_COND = 2'd0,   // conditional branch (beq, bne, blt, ...)
    BR_JAL  = 2'd1,   // direct jump / call
    BR_JALR = 2'd2    // indirect jump / call / return
  } br_type_e;

  // A control-flow transfer.  As a hash input word the pair is {dest, src},
  // i.e. little-endian bytes of src followed by those of dest.
  typedef struct packed {
    logic [XLEN-1:0] dest;
    logic [XLEN-1:0] src;
  } pair_t;

  typedef struct packed {
    logic     valid;      // a branch was executed
    br_type_e btype;
    logic     taken;      // conditional taken; always 1 for jumps
    logic     linking;    // writes the link register (call)
    logic     ret;        // return (jalr x0, 0(ra/t0))
    pair_t    pair;
  } branch_status_t;

  typedef struct packed {
    logic [LVL_W-1:0] depth_before;  // loop depth before this event
    logic [LVL_W-1:0] level;         // level the branch belongs to (0: no loop)
    logic             path_end;      // branch returns to the entry of `level`
    logic             push;          // a new loop starts at level+1
    logic [XLEN-1:0]  entry;         // entry node of the new loop
    logic [XLEN-1:0]  exit_addr;     // exit node of the new loop
  } loops_status_t;

  // Hash work for one event, issued by the loop monitor one cycle after it.
  // Stored paths are hashed from the highest level downwards, then the
  // event's own pair if `direct` (or if it was outside every loop).
  typedef struct packed {
    logic                                 valid;
    logic                                 direct;
    logic [MAX_DEPTH-1:0]                 commit;
    logic [MAX_DEPTH-1:0][BANK_W-1:0]     bank;
    logic [MAX_DEPTH-1:0][BCNT_W-1:0]     cnt;
  } new_path_t;

  // Snapshot of one exiting loop for the metadata generator.
  typedef struct packed {
    logic [XLEN-1:0]                      entry;
    logic                                 untracked;  // paths were hashed, not counted
    logic [NP_W-1:0]                      npaths;
    logic [MAX_PATHS-1:0][ID_W-1:0]       ids;        // in order of first occurrence
    logic [NT_W-1:0]                      ntgt;
    logic [N_TGT-1:0][XLEN-1:0]           tgts;       // code k+1 <-> tgts[k]
  } loop_end_t;

  // Metadata words (64 bit), tag in [63:60]
  localparam logic [3:0] MD_LOOP   = 4'h1;  // [57:56] level [55] untracked [52:48] npaths [44:40] ntgt [31:0] entry
  localparam logic [3:0] MD_PATH   = 4'h2;  // [47:32] path_ID [7:0] iterations
  localparam logic [3:0] MD_TARGET = 4'h3;  // [35:32] code [31:0] target address

endpackage
