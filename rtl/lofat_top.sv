// lofat_top -- hardware control-flow attestation unit.
//
// Sits beside a RISC-V core and observes, without stalling it, the
// instructions the core executes (instr_valid, pc, instr).  Between `start`
// and `stop` it builds the attestation measurement of the executed code:
//   hash  -- SHA3-512 over the (src, dest) pairs of the control-flow
//            transfers, where each distinct path through a loop body is
//            hashed only the first time it runs;
//   metadata -- per executed loop: its entry, the path_IDs of its paths in
//            order of first occurrence with their iteration counts, and the
//            indirect branch targets seen in it (read out word by word).
// Hash and metadata together are the program path P that the prover signs
// with a verifier's nonce; the signature unit is outside this block.
//
// Data flow (one branch event per cycle at most):
//   branch_filter -> loops/branch status -> loop_monitor
//                 -> non_loops            -> hash_controller -> sha3_512
//   branch_filter pair + loop_monitor address -> branches_memory
//   loop_monitor <-> loop_counter_mem (one per level) <-> metadata_generator
//   loop_monitor new_path -> hash_controller; loop_end -> metadata_generator
//   metadata_generator -> metadata_storage
// `stop` closes all open loops; `done` rises when the digest is ready and
// all metadata are written.  The sticky `lost` flag reports any buffer that
// overflowed (a measurement with `lost` set is incomplete).
// The st_* pulses, cbuf_fill, meta_we, lost_src and the hash_in_* word
// stream are observation outputs for status counters and test; they do not
// affect operation.
// Block structure and signal roles follow the described architecture; the
// handshakes and the stop sequence are this implementation's choices.
module lofat_top
  import lofat_pkg::*;
#(
  parameter int unsigned CBUF     = 16,     // hash input cache buffer entries
  parameter int unsigned MD_WORDS = 1024,   // metadata storage words
  localparam int unsigned MDW = $clog2(MD_WORDS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            stop,
  // executed instruction from the core
  input  logic            instr_valid,
  input  logic [XLEN-1:0] pc,
  input  logic [31:0]     instr,
  // results
  output logic            done,
  output logic [511:0]    hash,
  input  logic [MDW-1:0]  meta_raddr,
  output logic [63:0]     meta_rdata,
  output logic [MDW:0]    meta_count,
  output logic            lost,
  // activity (for status and test)
  output logic [LVL_W-1:0] depth,
  output logic            st_loop_enter,
  output logic            st_loop_exit,
  output logic            st_new_path,
  output logic            st_repeat_path,
  output logic            st_overflow,
  output logic            st_direct,
  output logic            st_no_bank,
  output logic [31:0]     n_hashed,
  output logic            st_untracked,
  output logic            st_tgt_lookup,
  output logic            st_tgt_full,
  output logic            st_blocked,      // a word waits for the hash engine
  output logic [$clog2(CBUF):0] cbuf_fill,
  output logic            meta_we,         // a metadata word is stored
  output logic [2:0]      lost_src,        // {cache buffer, generator, storage}
  // the word stream given to the hash engine
  output logic            hash_in_valid,
  output logic [63:0]     hash_in_data
);

  localparam int unsigned D  = MAX_DEPTH;
  localparam int unsigned EW = $clog2(MAX_BR);

  // branch filter
  branch_status_t bs;
  loops_status_t  ls;
  logic           ev_valid, non_loops;

  branch_filter #(.DEPTH(D)) u_bf (
    .clk, .rst_n, .start, .stop, .instr_valid, .pc, .instr,
    .branch_status(bs), .loops_status(ls), .ev_valid, .non_loops, .depth);

  // loop monitor
  logic               bm_we;
  logic [LVL_W-1:0]   bm_level;
  logic [BANK_W-1:0]  bm_bank;
  logic [EW-1:0]      bm_idx;
  logic [D-1:0][ID_W-1:0]  mon_rd_addr, mon_wr_addr, gen_rd_addr, gen_wr_addr;
  logic [D-1:0][CNT_W-1:0] cm_rd_data, mon_wr_data, gen_wr_data;
  logic [D-1:0]            mon_we, gen_we, own;
  new_path_t          new_path;
  logic [D-1:0]              rel_valid;
  logic [D-1:0][BANK_W-1:0]  rel_bank;
  logic [D-1:0]       loop_end_valid;
  loop_end_t [D-1:0]  loop_end;

  loop_monitor #(.DEPTH(D)) u_lm (
    .clk, .rst_n, .start, .ev_valid, .bs, .ls,
    .bm_we, .bm_level, .bm_bank, .bm_idx,
    .cm_rd_addr(mon_rd_addr), .cm_rd_data, .cm_we(mon_we), .cm_wr_addr(mon_wr_addr),
    .cm_wr_data(mon_wr_data),
    .new_path, .rel_valid, .rel_bank,
    .gen_busy(own), .loop_end_valid, .loop_end,
    .st_new_path, .st_repeat_path, .st_overflow, .st_direct, .st_no_bank,
    .st_untracked, .st_tgt_lookup, .st_tgt_full);

  assign st_loop_enter = ev_valid && ls.push;
  assign st_loop_exit  = |loop_end_valid;

  // branches memory
  logic [LVL_W-1:0]  r_level;
  logic [BANK_W-1:0] r_bank;
  logic [EW-1:0]     r_idx;
  pair_t             r_pair;

  branches_memory #(.DEPTH(D), .NB(NBANK), .NE(MAX_BR)) u_bm (
    .clk, .we(bm_we), .w_level(bm_level), .w_bank(bm_bank), .w_idx(bm_idx), .w_pair(bs.pair),
    .r_level, .r_bank, .r_idx, .r_pair);

  // loop counter memories: the metadata generator owns a level while it
  // reads out and clears that level after a loop exit
  for (genvar g = 0; g < D; g++) begin : g_cm
    loop_counter_mem #(.AW(ID_W), .DW(CNT_W)) u_cm (
      .clk,
      .rd_addr(own[g] ? gen_rd_addr[g] : mon_rd_addr[g]),
      .rd_data(cm_rd_data[g]),
      .we     (own[g] ? gen_we[g]      : mon_we[g]),
      .wr_addr(own[g] ? gen_wr_addr[g] : mon_wr_addr[g]),
      .wr_data(own[g] ? gen_wr_data[g] : mon_wr_data[g]));
  end

  // hash engine controller and hash engine
  logic        h_valid, h_ready, h_finish, h_done, hc_done, hc_idle, hc_lost;
  logic [63:0] h_data;
  logic [2:0]  stop_d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     stop_d <= '0;
    else if (start) stop_d <= '0;
    else            stop_d <= {stop_d[1:0], stop};

  hash_controller #(.DEPTH(D), .CBUF(CBUF)) u_hc (
    .clk, .rst_n, .start, .ev_valid, .non_loops, .ev_pair(bs.pair),
    .new_path, .rel_valid, .rel_bank,
    .r_level, .r_bank, .r_idx, .r_pair,
    .h_valid, .h_ready, .h_data, .h_finish, .h_done,
    .finish_req(stop_d[2]), .idle(hc_idle), .done(hc_done), .lost(hc_lost), .n_hashed,
    .fill(cbuf_fill));

  sha3_512 #(.PERM_CYCLES(3)) u_sha3 (
    .clk, .rst_n, .start, .in_valid(h_valid), .in_ready(h_ready), .in_data(h_data),
    .finish(h_finish), .hash_valid(h_done), .hash);

  // metadata generator and storage
  logic        md_we, gen_idle, gen_lost, ms_lost;
  logic [63:0] md_data;

  metadata_generator #(.DEPTH(D)) u_mg (
    .clk, .rst_n, .start, .loop_end_valid, .loop_end, .own,
    .cm_rd_addr(gen_rd_addr), .cm_rd_data, .cm_we(gen_we), .cm_wr_addr(gen_wr_addr),
    .cm_wr_data(gen_wr_data), .md_we, .md_data, .idle(gen_idle), .lost(gen_lost));

  metadata_storage #(.WORDS(MD_WORDS)) u_ms (
    .clk, .rst_n, .start, .we(md_we), .wdata(md_data), .raddr(meta_raddr),
    .rdata(meta_rdata), .count(meta_count), .full_lost(ms_lost));

  assign done = hc_done && gen_idle && hc_idle;
  assign lost = hc_lost || gen_lost || ms_lost;
  assign lost_src      = {hc_lost, gen_lost, ms_lost};
  assign meta_we       = md_we;
  assign st_blocked    = h_valid && !h_ready;
  assign hash_in_valid = h_valid && h_ready;
  assign hash_in_data  = h_data;

endmodule
