// loop_monitor -- encodes loop paths, counts their iterations and decides
// which stored branch pairs are hashed.
//
// For every loop level that is open the monitor builds a path_ID while an
// iteration runs.  Each branch of the iteration appends bits: a conditional
// branch its taken (1) / not-taken (0) bit, a direct jump a 1, an indirect
// branch the N_CODE-bit code of its target (see indirect_target_cam).  The
// iteration ends with the branch back to the loop entry node; that last
// branch always adds a 1 and is left implicit.  The ID carries a leading 1
// (sentinel) so that paths of different length differ: with the example
// while-loop of the design description the path encoded "011" has
// path_ID 0b101 and the path "0011" has path_ID 0b1001.  ID_W = 16 bits thus
// hold 15 explicit bits, i.e. up to 16 branches per path including the
// closing one.  A path that needs more bits is an overflow path: it gets
// path_ID 0 and its pairs are hashed directly.
//
// While an iteration runs its (src, dest) pairs are written to a bank of the
// branches memory.  At the end of the iteration the path_ID addresses the
// level's loop counter memory (read in the cycle of the event, decided and
// written back in the next cycle, with forwarding of the previous write):
//   count 0  -> new path: the bank is handed to the hash engine controller
//               (new_path), the count becomes 1 and the ID is appended to the
//               level's list of paths in order of first occurrence;
//   count >0 -> repeated path: the bank is released, the count incremented
//               (saturating at 2^CNT_W-1).
// When a loop exits the pairs of its incomplete iteration are hashed, and a
// snapshot (entry, path list, indirect targets) goes to the metadata
// generator (loop_end), which then owns that level's counter memory until it
// has read and cleared every listed count.  If a loop completes its first
// iteration while its level's memory is still being cleared, the loop is
// not counted from then on: its stored pairs and all later pairs are hashed
// as if outside a loop ("untracked").  Once MAX_PATHS distinct paths are
// listed, further new paths are hashed every time they occur and not counted.
//
// Timing: events arrive from the branch filter; all hash work of an event is
// issued one cycle later as one new_path word, aligned with the hash
// controller's one-cycle delayed copy of the event's pair.
// The encoding rule and the counter memory use follow the design
// description; the sentinel, the implicit closing bit, the banks, the
// overflow/untracked fall-backs and the snapshot interface are this
// implementation's choices.
// Lint note: the status fields bs.linking, bs.ret and ls.exit_addr are not
// needed here (the filter has already applied them) and are left unread.
// bm_level is the branch's level passed straight from loops_status.
module loop_monitor
  import lofat_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_DEPTH,
  localparam int unsigned LW = $clog2(DEPTH + 1),
  localparam int unsigned EW = $clog2(MAX_BR)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  // from the branch filter
  input  logic            ev_valid,
  input  branch_status_t  bs,
  input  loops_status_t   ls,
  // branches memory write address (data come from the branch filter)
  output logic            bm_we,
  output logic [LW-1:0]   bm_level,
  output logic [BANK_W-1:0] bm_bank,
  output logic [EW-1:0]   bm_idx,
  // loop counter memories, one per level
  output logic [DEPTH-1:0][ID_W-1:0]  cm_rd_addr,
  input  logic [DEPTH-1:0][CNT_W-1:0] cm_rd_data,
  output logic [DEPTH-1:0]            cm_we,
  output logic [DEPTH-1:0][ID_W-1:0]  cm_wr_addr,
  output logic [DEPTH-1:0][CNT_W-1:0] cm_wr_data,
  // hash engine controller
  output new_path_t       new_path,
  input  logic [DEPTH-1:0]             rel_valid,   // bank released, per level
  input  logic [DEPTH-1:0][BANK_W-1:0] rel_bank,
  // metadata generator
  input  logic [DEPTH-1:0] gen_busy,
  output logic [DEPTH-1:0] loop_end_valid,
  output loop_end_t [DEPTH-1:0] loop_end,
  // event pulses (for status / test)
  output logic            st_new_path,
  output logic            st_repeat_path,
  output logic            st_overflow,
  output logic            st_direct,
  output logic            st_no_bank,
  output logic            st_untracked,     // a loop becomes untracked
  output logic            st_tgt_lookup,    // an indirect target is encoded
  output logic            st_tgt_full       // ... with code 0 (table full)
);

  // ---------------- per-level state (index 0 = level 1) ----------------
  logic [ID_W-1:0]    pbits   [DEPTH];
  logic [4:0]         plen    [DEPTH];
  logic               povf    [DEPTH];
  logic               untr    [DEPTH];
  logic [BANK_W-1:0]  cbank   [DEPTH];
  logic [BCNT_W-1:0]  widx    [DEPTH];
  logic [NBANK-1:0]   sealed  [DEPTH];
  logic [MAX_PATHS-1:0][ID_W-1:0] ids [DEPTH];
  logic [NP_W-1:0]    npaths  [DEPTH];
  logic [XLEN-1:0]    entry   [DEPTH];

  // CAMs
  logic [DEPTH-1:0]            cam_lookup, cam_clear;
  logic [N_CODE-1:0]           cam_code [DEPTH];
  logic [NT_W-1:0]             cam_ntgt [DEPTH];
  logic [N_TGT-1:0][XLEN-1:0]  cam_tgts [DEPTH];

  for (genvar g = 0; g < DEPTH; g++) begin : g_cam
    indirect_target_cam #(.CODE_W(N_CODE)) u_cam (
      .clk, .rst_n, .clear(cam_clear[g]), .lookup(cam_lookup[g]),
      .target(bs.pair.dest), .code(cam_code[g]), .ntgt(cam_ntgt[g]), .tgts(cam_tgts[g]));
  end

  // ---------------- M2 pipeline registers ----------------
  typedef struct packed {
    logic                 valid;
    logic                 direct;
    logic [DEPTH-1:0]     commit;       // commits decided in M1 (exit, overflow)
    logic [DEPTH-1:0][BANK_W-1:0] bank;
    logic [DEPTH-1:0][BCNT_W-1:0] cnt;
    logic                 pend;         // path completion awaiting the count
    logic [LW-1:0]        plevel;
    logic [ID_W-1:0]      pid;
    logic [BANK_W-1:0]    pbank;
    logic [BCNT_W-1:0]    pcnt;
    logic                 ptracked;     // the ID is not 0
  } m2_t;
  m2_t m2;

  logic [DEPTH-1:0]        pop_q;       // loop_end registers
  loop_end_t [DEPTH-1:0]   snap_q;

  // last counter write, for read-after-write forwarding
  logic                wl_valid;
  logic [LW-1:0]       wl_level;
  logic [ID_W-1:0]     wl_id;
  logic [CNT_W-1:0]    wl_val;

  // ---------------- M2: decide on completed path ----------------
  logic [CNT_W-1:0] m2_cnt;
  logic             m2_new, m2_rep, m2_append;
  logic [DEPTH-1:0] m2_rel;             // release of m2.pbank at that level
  int unsigned      m2_li;

  always_comb begin
    m2_li  = (m2.plevel == '0) ? 0 : int'(m2.plevel) - 1;
    m2_cnt = cm_rd_data[m2_li];
    if (wl_valid && wl_level == m2.plevel && wl_id == m2.pid) m2_cnt = wl_val;
    m2_new    = m2.valid && m2.pend && (m2_cnt == '0);
    m2_rep    = m2.valid && m2.pend && (m2_cnt != '0);
    m2_append = m2_new && (npaths[m2_li] != NP_W'(MAX_PATHS));
    m2_rel    = '0;
    if (m2_rep && m2.ptracked) m2_rel[m2_li] = 1'b1;
    cm_we      = '0;
    cm_wr_addr = '0;
    cm_wr_data = '0;
    if (m2_append || m2_rep) begin
      cm_we[m2_li]      = 1'b1;
      cm_wr_addr[m2_li] = m2.pid;
      cm_wr_data[m2_li] = (m2_cnt == '1) ? m2_cnt : m2_cnt + 1'b1;
    end
    new_path        = '0;
    new_path.valid  = m2.valid;
    new_path.direct = m2.direct;
    new_path.commit = m2.commit;
    new_path.bank   = m2.bank;
    new_path.cnt    = m2.cnt;
    if (m2_new && m2.ptracked) begin
      new_path.commit[m2_li] = 1'b1;
      new_path.bank[m2_li]   = m2.pbank;
      new_path.cnt[m2_li]    = m2.pcnt;
    end
    loop_end_valid = pop_q;
    loop_end       = snap_q;
  end

  // ids list after this cycle's append (used for snapshots taken in M1)
  logic [MAX_PATHS-1:0][ID_W-1:0] ids_n   [DEPTH];
  logic [NP_W-1:0]                npaths_n[DEPTH];
  always_comb begin
    for (int l = 0; l < DEPTH; l++) begin
      ids_n[l]    = ids[l];
      npaths_n[l] = npaths[l];
    end
    if (m2_append) begin
      ids_n[m2_li][npaths[m2_li]] = m2.pid;
      npaths_n[m2_li]             = npaths[m2_li] + 1'b1;
    end
  end

  // ---------------- M1: the event ----------------
  int unsigned     k;          // index of the branch's level (level-1)
  logic            in_loop;
  logic [1:0]      how;        // 0 none, 1 append, 2 path end, 3 direct
  logic            mk_untr;    // first path end while the counters are busy
  logic [4:0]      w;
  logic [N_CODE-1:0] bits;
  logic [DEPTH-1:0] pop_now;
  logic [NBANK-1:0] free [DEPTH];

  // banks free this cycle, counting releases that happen in this cycle
  always_comb begin
    for (int l = 0; l < DEPTH; l++) begin
      free[l] = ~sealed[l];
      if (m2_rel[l]) free[l][m2.pbank] = 1'b1;
      if (rel_valid[l]) free[l][rel_bank[l]] = 1'b1;
    end
  end

  function automatic logic [BANK_W:0] pick(input logic [NBANK-1:0] f, input logic [BANK_W-1:0] not_this,
                                           input logic excl);
    // returns {found, bank}
    for (int b = 0; b < NBANK; b++)
      if (f[b] && !(excl && BANK_W'(b) == not_this)) return {1'b1, BANK_W'(b)};
    return '0;
  endfunction

  always_comb begin
    in_loop = ev_valid && bs.valid && (ls.level != '0);
    k       = (ls.level == '0) ? 0 : int'(ls.level) - 1;
    pop_now = '0;
    if (ev_valid)
      for (int l = 0; l < DEPTH; l++)
        if (LW'(l + 1) <= ls.depth_before && LW'(l + 1) > ls.level) pop_now[l] = 1'b1;
    w    = (bs.btype == BR_JALR) ? 5'(N_CODE) : 5'd1;
    bits = (bs.btype == BR_JALR) ? cam_code[k]
         : (bs.btype == BR_COND) ? N_CODE'(bs.taken) : N_CODE'(1);
    mk_untr = in_loop && !untr[k] && ls.path_end && (gen_busy[k] || pop_q[k]);
    how = 2'd0;
    if (in_loop) begin
      if (untr[k] || povf[k] || mk_untr)        how = 2'd3;
      else if (ls.path_end)                     how = 2'd2;
      else if (plen[k] + w > 5'(ID_W - 1))      how = 2'd3;   // becomes an overflow path
      else                                      how = 2'd1;
    end
    cam_lookup = '0;
    if (how == 2'd1 && bs.btype == BR_JALR) cam_lookup[k] = 1'b1;
    cam_clear = pop_now | {DEPTH{start}};
    bm_we    = (how == 2'd1) || (how == 2'd2);
    bm_level = ls.level;
    bm_bank  = cbank[k];
    bm_idx   = EW'(widx[k]);
    cm_rd_addr = '0;
    for (int l = 0; l < DEPTH; l++) cm_rd_addr[l] = (povf[l] || untr[l]) ? '0 : pbits[l];
  end

  // bank choices for a completed path, a completed overflow path and a new loop
  logic [BANK_W:0]  nb_end, nb_ovf, nb_push;
  logic [NBANK-1:0] f_ovf;
  logic [LW-1:0]    pl;               // index of a newly opened level
  always_comb begin
    pl     = (int'(ls.level) < DEPTH) ? LW'(ls.level) : '0;
    nb_end = pick(free[k], cbank[k], 1'b1);
    f_ovf  = free[k];
    if (!povf[k] && widx[k] != '0) f_ovf[cbank[k]] = 1'b0;
    nb_ovf  = pick(f_ovf, cbank[k], 1'b0);
    nb_push = pick(free[pl], cbank[pl],
                   pop_now[pl] && widx[pl] != '0 && !povf[pl] && !untr[pl]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m2       <= '0;
      pop_q    <= '0;
      snap_q   <= '0;
      wl_valid <= 1'b0;
      wl_level <= '0;
      wl_id    <= '0;
      wl_val   <= '0;
      for (int l = 0; l < DEPTH; l++) begin
        pbits[l] <= ID_W'(1); plen[l] <= '0; povf[l] <= 1'b0; untr[l] <= 1'b0;
        cbank[l] <= '0; widx[l] <= '0; sealed[l] <= '0; ids[l] <= '0;
        npaths[l] <= '0; entry[l] <= '0;
      end
    end else if (start) begin
      m2       <= '0;
      pop_q    <= '0;
      wl_valid <= 1'b0;
      for (int l = 0; l < DEPTH; l++) begin
        pbits[l] <= ID_W'(1); plen[l] <= '0; povf[l] <= 1'b0; untr[l] <= 1'b0;
        cbank[l] <= '0; widx[l] <= '0; sealed[l] <= '0; npaths[l] <= '0;
      end
    end else begin
      // ---- M2 bookkeeping ----
      wl_valid <= |cm_we;
      wl_level <= m2.plevel;
      wl_id    <= m2.pid;
      wl_val   <= cm_wr_data[m2_li];
      for (int l = 0; l < DEPTH; l++) begin
        ids[l]    <= ids_n[l];
        npaths[l] <= npaths_n[l];
      end
      // ---- bank releases ----
      for (int l = 0; l < DEPTH; l++) sealed[l] <= ~free[l];
      // ---- M1 -> M2 ----
      m2        <= '0;
      m2.valid  <= ev_valid;
      m2.direct <= (how == 2'd3);
      pop_q     <= pop_now;
      for (int l = 0; l < DEPTH; l++) begin
        if (pop_now[l]) begin
          // hash the incomplete iteration of the exiting loop
          if (!povf[l] && !untr[l] && widx[l] != '0) begin
            m2.commit[l] <= 1'b1;
            m2.bank[l]   <= cbank[l];
            m2.cnt[l]    <= widx[l];
            sealed[l][cbank[l]] <= 1'b1;
          end
          snap_q[l].entry     <= entry[l];
          snap_q[l].untracked <= untr[l];
          snap_q[l].npaths    <= untr[l] ? '0 : npaths_n[l];
          snap_q[l].ids       <= ids_n[l];
          snap_q[l].ntgt      <= cam_ntgt[l];
          snap_q[l].tgts      <= cam_tgts[l];
          npaths[l] <= '0;
          povf[l]   <= 1'b0;
          widx[l]   <= '0;
        end
      end
      // ---- the branch itself ----
      case (how)
        2'd1: begin                                   // append to the path
          pbits[k] <= (pbits[k] << w) | ID_W'(bits);
          plen[k]  <= plen[k] + w;
          widx[k]  <= widx[k] + 1'b1;
        end
        2'd2: begin                                   // iteration completed
          sealed[k][cbank[k]] <= 1'b1;
          m2.pend     <= 1'b1;
          m2.plevel   <= ls.level;
          m2.pid      <= pbits[k];
          m2.pbank    <= cbank[k];
          m2.pcnt     <= widx[k] + 1'b1;
          m2.ptracked <= 1'b1;
          pbits[k] <= ID_W'(1);
          plen[k]  <= '0;
          widx[k]  <= '0;
          cbank[k] <= nb_end[BANK_W-1:0];
          povf[k]  <= !nb_end[BANK_W];
        end
        2'd3: begin                                   // hashed directly
          if (!untr[k] && !povf[k] && widx[k] != '0) begin
            // path just overflowed: hash what was stored so far
            m2.commit[k] <= 1'b1;
            m2.bank[k]   <= cbank[k];
            m2.cnt[k]    <= widx[k];
            sealed[k][cbank[k]] <= 1'b1;
          end
          if (!untr[k]) povf[k] <= 1'b1;
          if (mk_untr) untr[k] <= 1'b1;
          else if (ls.path_end && !untr[k]) begin
            // overflow path completed: count it under path_ID 0
            m2.pend     <= 1'b1;
            m2.plevel   <= ls.level;
            m2.pid      <= '0;
            m2.ptracked <= 1'b0;
            pbits[k] <= ID_W'(1);
            plen[k]  <= '0;
            widx[k]  <= '0;
            cbank[k] <= nb_ovf[BANK_W-1:0];
            povf[k]  <= !nb_ovf[BANK_W];
          end
        end
        default: ;
      endcase
      // ---- a new loop opens at level+1 ----
      if (ev_valid && ls.push) begin
        entry[pl]  <= ls.entry;
        pbits[pl]  <= ID_W'(1);
        plen[pl]   <= '0;
        widx[pl]   <= '0;
        npaths[pl] <= '0;
        cbank[pl]  <= nb_push[BANK_W-1:0];
        povf[pl]   <= !nb_push[BANK_W];
        untr[pl]   <= 1'b0;
      end
    end
  end

  // status pulses
  assign st_new_path    = m2_new && m2.ptracked;
  assign st_repeat_path = m2_rep && m2.ptracked;
  assign st_overflow    = m2.valid && m2.pend && !m2.ptracked;
  assign st_direct      = m2.valid && m2.direct;
  assign st_no_bank     = ev_valid && (how == 2'd2) && !nb_end[BANK_W];
  assign st_untracked   = mk_untr;
  assign st_tgt_lookup  = |cam_lookup;
  assign st_tgt_full    = |cam_lookup && (cam_code[k] == '0);

endmodule
