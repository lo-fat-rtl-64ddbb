// hash_controller -- orders and feeds the hash engine.
//
// Two sources of work arrive, one word per branch event: the branch filter's
// non_loops signal (the event's pair is outside every loop and is hashed at
// once) and the loop monitor's new_path word, issued one cycle after the
// event (stored loop paths that must be hashed, and whether the event's own
// pair is hashed directly).  The controller delays the filter's signal and
// pair by one cycle so both describe the same event, and writes the
// combined job into a small cache buffer (a FIFO of CBUF entries).  This
// buffer absorbs events that arrive while the hash engine is blocked (3 of
// every 12 cycles at full rate) or busy with a long stored path.
//
// Jobs are executed in order.  For each job, the stored paths are read from
// the branches memory level by level, highest level first, one pair per
// cycle, and the bank is released when its last pair has been accepted; then
// the event's own pair follows.  So the message hashed is the sequence of
// pairs in the order their hashing was decided.  When `finish_req` has been
// seen and the buffer is empty, the controller ends the message (the
// engine's finish input) and `done` rises with the engine's digest.
// A job that finds the buffer full is dropped, its banks are released at
// once and the sticky `lost` flag is set.
// The cache buffer and the two control inputs follow the design
// description; the job format, ordering rule and buffer depth are this
// implementation's choices.
module hash_controller
  import lofat_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_DEPTH,
  parameter int unsigned CBUF  = 16,
  localparam int unsigned LW = $clog2(DEPTH + 1),
  localparam int unsigned EW = $clog2(MAX_BR)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  // from the branch filter (same cycle as the event)
  input  logic            ev_valid,
  input  logic            non_loops,
  input  pair_t           ev_pair,
  // from the loop monitor (one cycle later)
  input  new_path_t       new_path,
  output logic [DEPTH-1:0]             rel_valid,
  output logic [DEPTH-1:0][BANK_W-1:0] rel_bank,
  // branches memory read port
  output logic [LW-1:0]     r_level,
  output logic [BANK_W-1:0] r_bank,
  output logic [EW-1:0]     r_idx,
  input  pair_t             r_pair,
  // hash engine
  output logic            h_valid,
  input  logic            h_ready,
  output logic [63:0]     h_data,
  output logic            h_finish,
  input  logic            h_done,
  // control / status
  input  logic            finish_req,
  output logic            idle,          // buffer empty, nothing in flight
  output logic            done,
  output logic            lost,
  output logic [31:0]     n_hashed,      // pairs given to the engine
  output logic [$clog2(CBUF):0] fill     // cache buffer entries in use
);

  typedef struct packed {
    logic                         pair_valid;
    pair_t                        pair;
    logic [DEPTH-1:0]             commit;
    logic [DEPTH-1:0][BANK_W-1:0] bank;
    logic [DEPTH-1:0][BCNT_W-1:0] cnt;
  } job_t;

  localparam int unsigned PW = $clog2(CBUF);

  // one-cycle delay of the filter's view of the event
  logic  d_valid, d_non_loops;
  pair_t d_pair;

  job_t            fifo [CBUF];
  logic [PW-1:0]   wp, rp;
  logic [PW:0]     cnt;
  job_t            in_job, head;
  logic            push, full, empty, pop;

  always_comb begin
    in_job            = '0;
    in_job.pair_valid = (d_valid && d_non_loops) || (new_path.valid && new_path.direct);
    in_job.pair       = d_pair;
    in_job.commit     = new_path.valid ? new_path.commit : '0;
    in_job.bank       = new_path.bank;
    in_job.cnt        = new_path.cnt;
  end
  assign full  = (cnt == (PW+1)'(CBUF));
  assign empty = (cnt == '0);
  assign push  = (in_job.pair_valid || in_job.commit != '0) && !full;
  assign head  = fifo[rp];

  // execution of the head job
  logic [DEPTH-1:0] done_mask;      // stored paths of the head already hashed
  logic [EW-1:0]    idx;
  logic [DEPTH-1:0] pend_lv;
  int unsigned      cur;            // level index being read
  logic             have_path;
  logic             fin_sent, finq;

  always_comb begin
    pend_lv      = empty ? '0 : (head.commit & ~done_mask);
    have_path = (pend_lv != '0);
    cur       = 0;
    for (int l = 0; l < DEPTH; l++) if (pend_lv[l]) cur = l;   // highest level wins
    r_level = LW'(cur + 1);
    r_bank  = head.bank[cur];
    r_idx   = idx;
  end

  always_comb begin
    h_valid = 1'b0;
    h_data  = '0;
    pop     = 1'b0;
    if (!empty) begin
      if (have_path) begin
        h_valid = 1'b1;
        h_data  = r_pair;
      end else if (head.pair_valid) begin
        h_valid = 1'b1;
        h_data  = head.pair;
        pop     = h_ready;
      end else pop = 1'b1;
    end
    rel_valid = '0;
    rel_bank  = '0;
    if (have_path && h_ready && (BCNT_W'(idx) + 1'b1 == head.cnt[cur])) begin
      rel_valid[cur] = 1'b1;
      rel_bank[cur]  = head.bank[cur];
    end
    // a dropped job gives its banks back at once
    if (!push && full && in_job.commit != '0)
      for (int l = 0; l < DEPTH; l++)
        if (in_job.commit[l]) begin
          rel_valid[l] = 1'b1;
          rel_bank[l]  = in_job.bank[l];
        end
    h_finish = finq && empty && !fin_sent && !d_valid && !new_path.valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0; d_non_loops <= 1'b0; d_pair <= '0;
      wp <= '0; rp <= '0; cnt <= '0;
      done_mask <= '0; idx <= '0;
      finq <= 1'b0; fin_sent <= 1'b0; lost <= 1'b0; n_hashed <= '0;
      for (int i = 0; i < CBUF; i++) fifo[i] <= '0;
    end else if (start) begin
      d_valid <= 1'b0; d_non_loops <= 1'b0;
      wp <= '0; rp <= '0; cnt <= '0;
      done_mask <= '0; idx <= '0;
      finq <= 1'b0; fin_sent <= 1'b0; lost <= 1'b0; n_hashed <= '0;
    end else begin
      d_valid     <= ev_valid;
      d_non_loops <= non_loops;
      d_pair      <= ev_pair;
      if (push) begin
        fifo[wp] <= in_job;
        wp       <= (wp == PW'(CBUF - 1)) ? '0 : wp + 1'b1;
      end
      if ((in_job.pair_valid || in_job.commit != '0) && full) lost <= 1'b1;
      if (have_path && h_ready) begin
        if (BCNT_W'(idx) + 1'b1 == head.cnt[cur]) begin
          idx <= '0;
          done_mask[cur] <= 1'b1;
        end else idx <= idx + 1'b1;
      end
      if (h_valid && h_ready) n_hashed <= n_hashed + 1;
      if (pop) begin
        rp        <= (rp == PW'(CBUF - 1)) ? '0 : rp + 1'b1;
        done_mask <= '0;
      end
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
      if (finish_req) finq <= 1'b1;
      if (h_finish && h_ready) fin_sent <= 1'b1;
    end
  end

  assign fill = cnt;
  assign idle = empty && !d_valid && !new_path.valid;
  assign done = fin_sent && h_done;

endmodule
