// metadata_generator -- assembles the loop metadata when a loop exits.
//
// The loop monitor hands over a snapshot of each exiting loop (loop_end):
// its entry address, the path_IDs seen in order of first occurrence and the
// indirect branch targets it encoded.  The generator queues up to QDEPTH
// exits (innermost first when several levels exit at once) and for each
// writes to the metadata storage:
//   one MD_LOOP word   {4'h1, level, untracked, npaths, ntgt, entry}
//   one MD_PATH word   {4'h2, path_ID, iteration count} per listed path
//   one MD_TARGET word {4'h3, code, target address} per encoded target
// Each count is read from the level's loop counter memory and written back
// as zero in the same step, so the memory is clean for the next loop at that
// level.  While a level has a queued or active job the generator owns that
// level's counter memory (`own`, also telling the loop monitor that a new
// loop at that level cannot be counted yet).  A path takes two cycles
// (read, then write record and clear), the header and each target one cycle,
// plus one cycle to accept the exit and one to retire the job.
// The content of the metadata follows the design description (paths in order
// of first occurrence, iteration counts, indirect targets); the word format,
// the loop header and the clearing scheme are this implementation's choices.
// Synthesis note: cm_wr_data is constant zero (the generator only clears
// counters) and md_data[59:58] are zero in every word format; these output
// bits are constant by design.
// Timing: a job takes 3 + 2*npaths + ntgt cycles from the exit to idle.
module metadata_generator
  import lofat_pkg::*;
#(
  parameter int unsigned DEPTH  = MAX_DEPTH,
  parameter int unsigned QDEPTH = 4,        // queued loop exits
  localparam int unsigned LW = $clog2(DEPTH + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [DEPTH-1:0]          loop_end_valid,
  input  loop_end_t [DEPTH-1:0]     loop_end,
  output logic [DEPTH-1:0]          own,
  output logic [DEPTH-1:0][ID_W-1:0]  cm_rd_addr,
  input  logic [DEPTH-1:0][CNT_W-1:0] cm_rd_data,
  output logic [DEPTH-1:0]            cm_we,
  output logic [DEPTH-1:0][ID_W-1:0]  cm_wr_addr,
  output logic [DEPTH-1:0][CNT_W-1:0] cm_wr_data,
  output logic            md_we,
  output logic [63:0]     md_data,
  output logic            idle,
  output logic            lost
);

  localparam int unsigned QW = $clog2(QDEPTH + 1);
  localparam int unsigned QI = $clog2(QDEPTH);

  // job queue (entry 0 is the head); each job is a level and its snapshot
  loop_end_t       slot [QDEPTH];
  logic [LW-1:0]   q    [QDEPTH];
  logic [QW-1:0]   qn;

  typedef enum logic [1:0] {S_HDR, S_RD, S_WR, S_TGT} st_e;
  st_e             st;
  logic [NP_W-1:0] i;
  logic [NT_W-1:0] j;
  int unsigned     h;              // level index of the head job
  loop_end_t       job;

  always_comb begin
    h   = int'(q[0]);
    job = slot[0];
    cm_rd_addr = '0;
    cm_we      = '0;
    cm_wr_addr = '0;
    cm_wr_data = '0;
    md_we      = 1'b0;
    md_data    = '0;
    if (qn != '0) begin
      unique case (st)
        S_HDR: begin
          md_we   = 1'b1;
          md_data = {MD_LOOP, 2'b00, 2'(h + 1), job.untracked, 2'b00,
                     5'(job.npaths), 3'b000, 5'(job.ntgt), 8'h00, job.entry};
        end
        S_RD: cm_rd_addr[h] = job.ids[i];
        S_WR: begin
          cm_rd_addr[h] = job.ids[i];
          md_we         = 1'b1;
          md_data       = {MD_PATH, 12'h000, job.ids[i], 24'h0, cm_rd_data[h]};
          cm_we[h]      = 1'b1;
          cm_wr_addr[h] = job.ids[i];
        end
        S_TGT: if (j != job.ntgt) begin
          md_we   = 1'b1;
          md_data = {MD_TARGET, 24'h0, 4'(j + 1'b1), job.tgts[j]};
        end
        default: ;
      endcase
    end
  end

  // queue update: retire the head job, then append new exits innermost first
  logic             fin;
  logic [DEPTH-1:0] accept;
  loop_end_t        s_n [QDEPTH];
  logic [LW-1:0]    q_n [QDEPTH];
  logic [QW-1:0]    n_n;
  always_comb begin
    fin = (qn != '0) && (st == S_TGT) && (j == job.ntgt);
    n_n = qn;
    for (int e = 0; e < QDEPTH; e++) begin s_n[e] = slot[e]; q_n[e] = q[e]; end
    if (fin) begin
      for (int e = 0; e < QDEPTH - 1; e++) begin s_n[e] = slot[e+1]; q_n[e] = q[e+1]; end
      n_n = n_n - 1'b1;
    end
    accept = '0;
    for (int l = DEPTH - 1; l >= 0; l--)
      if (loop_end_valid[l] && n_n != QW'(QDEPTH)) begin
        accept[l]   = 1'b1;
        s_n[QI'(n_n)] = loop_end[l];
        q_n[QI'(n_n)] = LW'(l);
        n_n         = n_n + 1'b1;
      end
    own = '0;
    for (int e = 0; e < QDEPTH; e++) if (QW'(e) < qn) own[q[e]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qn     <= '0;
      st     <= S_HDR;
      i      <= '0;
      j      <= '0;
      lost   <= 1'b0;
      for (int e = 0; e < QDEPTH; e++) begin slot[e] <= '0; q[e] <= '0; end
    end else if (start) begin
      qn     <= '0;
      st     <= S_HDR;
      i      <= '0;
      j      <= '0;
      lost   <= 1'b0;
    end else begin
      unique case (st)
        S_HDR: if (qn != '0) begin st <= S_RD; i <= '0; end
        S_RD:  if (qn != '0) begin
                 if (i == job.npaths) begin st <= S_TGT; j <= '0; end
                 else st <= S_WR;
               end
        S_WR:  begin i <= i + 1'b1; st <= S_RD; end
        S_TGT: if (fin) st <= S_HDR;
               else if (qn != '0) j <= j + 1'b1;
        default: ;
      endcase
      if (|(loop_end_valid & ~accept)) lost <= 1'b1;
      qn <= n_n;
      for (int e = 0; e < QDEPTH; e++) begin slot[e] <= s_n[e]; q[e] <= q_n[e]; end
    end
  end

  assign idle = (qn == '0);

endmodule
