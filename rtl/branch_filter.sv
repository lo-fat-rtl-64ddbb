// branch_filter -- picks control-flow transfers out of the retired
// instruction stream and detects loops.
//
// Every cycle the core may present one executed instruction (pc, instr).
// Conditional branches, jal and jalr are held until the next executed
// instruction arrives; its pc is the destination, which also tells whether a
// conditional branch was taken.  The resolved branch is reported one cycle
// later, so a branch followed directly by another instruction is reported two
// cycles after it executed.
//
// Loop detection uses the link-register heuristic: a backward transfer that
// does not write the link register (not a call) and is not a return marks its
// target as a loop entry node, and the instruction after the branch as the
// loop exit node.  Entry/exit addresses are kept in registers for up to
// MAX_DEPTH nested loops.  A branch whose destination is the entry of the
// innermost loop ends one iteration (path_end).  A loop is left when a
// branch's destination lies outside [entry, exit) of the loop -- at or past
// the exit node, or before the entry.  Calls made from inside a loop are
// counted per level, and the range test is skipped for the call itself and
// suspended until it returns, so a subroutine placed elsewhere in memory
// stays part of the loop body.  A
// backward branch found at the deepest level is treated as an ordinary branch.
// The branch that opens a loop belongs to the enclosing level.
//
// Outputs per event: branch_status (type, taken, (src, dest)), loops_status
// (depth before, level of the branch, path_end, push and the new loop's
// entry/exit), and non_loops, high for a branch outside every loop.  A `stop`
// pulse closes all open loops with an event that carries no branch.
// The heuristic and the entry/exit rule follow the design description; the
// call-depth bookkeeping, the range test and the 32-bit-only decode (no
// compressed instructions) are this implementation's choices.
// Lint note: only the opcode, rd and rs1 fields of `instr` are decoded; the
// other instruction bits are not needed (the destination comes from the next
// pc) and are left unread.
module branch_filter
  import lofat_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_DEPTH,
  localparam int unsigned LW = $clog2(DEPTH + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,        // begin attestation: clear state
  input  logic            stop,         // end attestation: close open loops
  input  logic            instr_valid,
  input  logic [XLEN-1:0] pc,
  input  logic [31:0]     instr,
  output branch_status_t  branch_status,
  output loops_status_t   loops_status,
  output logic            ev_valid,     // branch_status/loops_status valid
  output logic            non_loops,    // branch outside every loop: hash it
  output logic [LW-1:0]   depth         // current loop depth
);

  // ---------------- decode and pending branch ----------------
  logic       is_br;
  br_type_e   dec_type;
  logic [4:0] rd, rs1;
  logic       dec_link, dec_ret;

  assign rd  = instr[11:7];
  assign rs1 = instr[19:15];
  always_comb begin
    is_br    = 1'b1;
    dec_type = BR_COND;
    unique case (instr[6:0])
      OP_BRANCH: dec_type = BR_COND;
      OP_JAL:    dec_type = BR_JAL;
      OP_JALR:   dec_type = BR_JALR;
      default:   is_br = 1'b0;
    endcase
    dec_link = is_br && (dec_type != BR_COND) && (rd == 5'd1 || rd == 5'd5);
    dec_ret  = is_br && (dec_type == BR_JALR) && (rd == 5'd0) && (rs1 == 5'd1 || rs1 == 5'd5);
  end

  logic            pend;
  logic [XLEN-1:0] pend_pc;
  br_type_e        pend_type;
  logic            pend_link, pend_ret;
  logic            resolve;

  assign resolve = pend && instr_valid;

  // ---------------- loop stack ----------------
  logic [XLEN-1:0] entry_q [DEPTH+1];
  logic [XLEN-1:0] exit_q  [DEPTH+1];
  logic [3:0]      calls_q [DEPTH+1];
  logic [LW-1:0]   depth_q;

  // combinational processing of the resolved branch
  logic [XLEN-1:0] src, dst;
  logic            taken, backward, loop_cand;
  logic [LW-1:0]   lvl;
  logic            p_end, p_push;
  logic [XLEN-1:0] entry_n [DEPTH+1];
  logic [XLEN-1:0] exit_n  [DEPTH+1];
  logic [3:0]      calls_n [DEPTH+1];
  logic [LW-1:0]   depth_n;
  logic            stopping;

  always_comb begin
    src       = pend_pc;
    dst       = pc;
    taken     = (pend_type != BR_COND) || (pc != pend_pc + 32'd4);
    backward  = taken && (dst < src);
    loop_cand = backward && !pend_link && !pend_ret;
    for (int l = 0; l <= DEPTH; l++) begin
      entry_n[l] = entry_q[l];
      exit_n[l]  = exit_q[l];
      calls_n[l] = calls_q[l];
    end
    // leave every innermost loop whose range no longer holds the destination
    lvl = depth_q;
    for (int l = DEPTH; l >= 1; l--)
      if (LW'(l) == lvl && !pend_link && calls_q[l] == 4'd0
          && (dst < entry_q[l] || dst >= exit_q[l]))
        lvl = lvl - LW'(1);
    p_end   = 1'b0;
    p_push  = 1'b0;
    depth_n = lvl;
    if (loop_cand) begin
      if (lvl != '0 && dst == entry_q[lvl]) p_end = 1'b1;
      else if (lvl < LW'(DEPTH)) begin
        p_push            = 1'b1;
        depth_n           = lvl + LW'(1);
        entry_n[lvl + 1'b1] = dst;
        exit_n[lvl + 1'b1]  = src + 32'd4;
        calls_n[lvl + 1'b1] = '0;
      end
    end
    if (lvl != '0) begin
      if (pend_link && calls_q[lvl] != 4'hF) calls_n[lvl] = calls_q[lvl] + 4'd1;
      else if (pend_ret && calls_q[lvl] != 4'd0) calls_n[lvl] = calls_q[lvl] - 4'd1;
    end
    stopping = stop && !resolve;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend      <= 1'b0;
      pend_pc   <= '0;
      pend_type <= BR_COND;
      pend_link <= 1'b0;
      pend_ret  <= 1'b0;
      depth_q   <= '0;
      ev_valid  <= 1'b0;
      non_loops <= 1'b0;
      branch_status <= '0;
      loops_status  <= '0;
      for (int l = 0; l <= DEPTH; l++) begin
        entry_q[l] <= '0; exit_q[l] <= '0; calls_q[l] <= '0;
      end
    end else if (start) begin
      pend     <= 1'b0;
      depth_q  <= '0;
      ev_valid <= 1'b0;
      non_loops <= 1'b0;
      for (int l = 0; l <= DEPTH; l++) calls_q[l] <= '0;
    end else begin
      ev_valid  <= 1'b0;
      non_loops <= 1'b0;
      if (instr_valid) begin
        pend      <= is_br;
        pend_pc   <= pc;
        pend_type <= dec_type;
        pend_link <= dec_link;
        pend_ret  <= dec_ret;
      end
      if (resolve) begin
        ev_valid  <= 1'b1;
        non_loops <= (lvl == '0);
        branch_status.valid   <= 1'b1;
        branch_status.btype   <= pend_type;
        branch_status.taken   <= taken;
        branch_status.linking <= pend_link;
        branch_status.ret     <= pend_ret;
        branch_status.pair    <= '{dest: dst, src: src};
        loops_status.depth_before <= LVL_W'(depth_q);
        loops_status.level        <= LVL_W'(lvl);
        loops_status.path_end     <= p_end;
        loops_status.push         <= p_push;
        loops_status.entry        <= dst;
        loops_status.exit_addr    <= src + 32'd4;
        depth_q <= depth_n;
        for (int l = 0; l <= DEPTH; l++) begin
          entry_q[l] <= entry_n[l]; exit_q[l] <= exit_n[l]; calls_q[l] <= calls_n[l];
        end
      end else if (stopping) begin
        pend      <= 1'b0;
        ev_valid  <= 1'b1;
        branch_status <= '0;
        loops_status  <= '0;
        loops_status.depth_before <= LVL_W'(depth_q);
        depth_q <= '0;
      end
    end
  end

  assign depth = depth_q;

endmodule
