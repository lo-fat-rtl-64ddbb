// tb_loop_monitor -- self-checking test of the loop monitor.
//
// The monitor is driven by the real branch filter (fed by a small
// instruction-set model) and uses real loop counter memories and a real
// branches memory; the test plays the hash engine controller (a committed
// bank is read out and released a few cycles later) and the metadata
// generator (`gen_busy`).  Checks:
//  1  the while loop with an if/else of the design description, iterations
//     A A B A A B: the loop is entered at the first back edge, path A gets
//     path_ID 0b1001 ("0011") and path B 0b101 ("011"); both are new once
//     (their stored pairs are committed with the right bank contents) and
//     repeated afterwards; the loop_end snapshot lists 9 then 5 and the
//     counter memory holds 3 and 2;
//  2  timing: new_path is issued exactly one cycle after the event, and a
//     new path is reported in that cycle; loop_end is issued exactly one
//     cycle after the event that leaves the loop (3 cycles after the exiting
//     branch executes; the design description quotes 5, this design's
//     pipeline is shorter);
//  3  a loop whose body has 17 conditional branches: overflow path (ID 0),
//     pairs hashed directly;
//  4  the same loop again while the generator still owns level 1: the loop
//     becomes untracked at its first completed iteration.
module tb_loop_monitor;
  import lofat_pkg::*;
  import tb_rv_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, stop = 0, instr_valid = 0;
  logic [31:0] pc = 0, instr = 0;
  branch_status_t bs;
  loops_status_t  ls;
  logic ev_valid, non_loops;
  logic [1:0] depth;

  branch_filter u_bf (.clk, .rst_n, .start, .stop, .instr_valid, .pc, .instr,
                      .branch_status(bs), .loops_status(ls), .ev_valid, .non_loops, .depth);

  logic bm_we;
  logic [1:0] bm_level;
  logic [0:0] bm_bank;
  logic [3:0] bm_idx;
  logic [2:0][15:0] cm_rd_addr, cm_wr_addr;
  logic [2:0][7:0]  cm_rd_data, cm_wr_data;
  logic [2:0] cm_we;
  new_path_t new_path;
  logic [2:0] rel_valid = 0;
  logic [2:0][0:0] rel_bank = 0;
  logic [2:0] gen_busy = 0;
  logic [2:0] loop_end_valid;
  loop_end_t [2:0] loop_end;
  logic st_new_path, st_repeat_path, st_overflow, st_direct, st_no_bank;
  logic st_untracked, st_tgt_lookup, st_tgt_full;

  loop_monitor dut (.*);

  for (genvar g = 0; g < 3; g++) begin : g_cm
    loop_counter_mem u_cm (.clk, .rd_addr(cm_rd_addr[g]), .rd_data(cm_rd_data[g]),
                           .we(cm_we[g]), .wr_addr(cm_wr_addr[g]), .wr_data(cm_wr_data[g]));
  end

  logic [1:0] r_level = 0;
  logic [0:0] r_bank = 0;
  logic [3:0] r_idx = 0;
  pair_t r_pair;
  branches_memory u_bm (.clk, .we(bm_we), .w_level(bm_level), .w_bank(bm_bank), .w_idx(bm_idx),
                        .w_pair(bs.pair), .r_level, .r_bank, .r_idx, .r_pair);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // event log and monitor outputs
  int n_new, n_rep, n_ovf, n_untr, n_direct, ev_cyc, n_np, exit_cyc, n_end;
  pair_t evq [$];                       // pairs of in-loop events since the last path end
  pair_t committed [$][$];
  loop_end_t last_end;
  bit got_end;
  always @(posedge clk) if (rst_n) begin
    if (ev_valid) ev_cyc = cyc;
    if (loop_end_valid != 0) begin
      n_end++;
      chk(cyc == exit_cyc + 1, "loop_end one cycle after the exit event");
    end
    if (ev_valid && ls.depth_before > ls.level) exit_cyc = cyc;
    if (new_path.valid) begin
      n_np++;
      chk(cyc == ev_cyc + 1, "new_path one cycle after the event");
    end
    n_new    += int'(st_new_path);
    n_rep    += int'(st_repeat_path);
    n_ovf    += int'(st_overflow);
    n_untr   += int'(st_untracked);
    n_direct += int'(st_direct);
    if (loop_end_valid[0]) begin last_end = loop_end[0]; got_end = 1; end
  end

  // controller model: read each committed bank, then release it
  typedef struct { int l; bit b; int cnt; } job_t;
  job_t jobs [$];
  always @(posedge clk) if (rst_n && new_path.valid)
    for (int l = 2; l >= 0; l--)
      if (new_path.commit[l]) jobs.push_back('{l: l, b: new_path.bank[l], cnt: int'(new_path.cnt[l])});
  initial forever begin
    job_t j;
    pair_t ps [$];
    @(negedge clk);
    rel_valid = 0;
    if (jobs.size() != 0) begin
      j = jobs.pop_front();
      ps.delete();
      for (int i = 0; i < j.cnt; i++) begin
        r_level = 2'(j.l + 1); r_bank = j.b; r_idx = 4'(i);
        #1 ps.push_back(r_pair);
        @(negedge clk);
      end
      committed.push_back(ps);
      rel_valid[j.l] = 1; rel_bank[j.l] = j.b;
    end
  end

  // instruction-set model
  logic [31:0] imem [logic [31:0]];
  int script [$];
  task automatic run(logic [31:0] from, int ninstr, int gap);
    logic [31:0] p, w;
    p = from;
    for (int n = 0; n < ninstr; n++) begin
      w = imem.exists(p) ? imem[p] : NOP;
      @(negedge clk); instr_valid = 1; pc = p; instr = w;
      if (w[6:0] == 7'b1100011 && script.pop_front() == 1)
        p = p + {{19{w[31]}}, w[31], w[7], w[30:25], w[11:8], 1'b0};
      else if (w[6:0] == 7'b1101111)
        p = p + {{11{w[31]}}, w[31], w[19:12], w[20], w[30:21], 1'b0};
      else p = p + 4;
      @(negedge clk); instr_valid = 0;
      repeat (gap) @(negedge clk);
    end
  endtask

  task automatic begin_run();
    n_new = 0; n_rep = 0; n_ovf = 0; n_untr = 0; n_direct = 0; n_np = 0; got_end = 0;
    n_end = 0;
    committed.delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // ---- 1/2: the two-path while loop ----
    imem[32'h108] = enc_b(32'h108, 32'h124);
    imem[32'h10C] = enc_b(32'h10C, 32'h118);
    imem[32'h114] = enc_jal(32'h114, 32'h11C, 5'd0);
    imem[32'h120] = enc_jal(32'h120, 32'h108, 5'd0);
    script = '{0,0, 0,0, 0,1, 0,0, 0,0, 0,1, 1};
    begin_run();
    run(32'h100, 40, 0);
    repeat (60) @(negedge clk);
    chk(n_new == 2 && n_rep == 3, $sformatf("new %0d repeated %0d, expected 2 and 3", n_new, n_rep));
    chk(got_end && last_end.npaths == 2 && last_end.ids[0] == 16'd9 && last_end.ids[1] == 16'd5
        && last_end.entry == 32'h108 && !last_end.untracked, "loop_end snapshot: entry 0x108, IDs 9 then 5");
    chk(committed.size() == 2, $sformatf("%0d banks committed, expected 2", committed.size()));
    if (committed.size() == 2) begin
      chk(committed[0].size() == 4 && committed[0][0] == '{dest: 32'h10C, src: 32'h108}
          && committed[0][2] == '{dest: 32'h11C, src: 32'h114}
          && committed[0][3] == '{dest: 32'h108, src: 32'h120}, "path A pairs");
      chk(committed[1].size() == 3 && committed[1][1] == '{dest: 32'h118, src: 32'h10C}
          && committed[1][2] == '{dest: 32'h108, src: 32'h120}, "path B pairs");
    end
    chk(g_cm[0].u_cm.mem[9] == 8'd3 && g_cm[0].u_cm.mem[5] == 8'd2, "counts 3 and 2 stored");
    chk(n_np > 0, "new_path words issued");
    chk(n_end == 1, $sformatf("%0d loop_end pulses, expected 1", n_end));
    // ---- 3: overflow path: 17 conditional branches in the body ----
    imem.delete();
    for (int i = 0; i < 17; i++) imem[32'h300 + 4 * i] = enc_b(32'h300 + 4 * i, 32'h400);
    imem[32'h344] = enc_jal(32'h344, 32'h300, 5'd0);
    script.delete();
    repeat (4 * 17 + 2) script.push_back(0);
    begin_run();
    run(32'h300, 4 * 18, 1);
    repeat (20) @(negedge clk);
    chk(n_ovf == 2, $sformatf("overflow paths %0d, expected 2", n_ovf));
    // per loop iteration: 15 pairs stored then committed at the overflow,
    // the last 2 branches and the back edge hashed directly
    chk(n_new == 0 && n_direct == 8 && committed.size() == 3,
        $sformatf("overflow: %0d direct events, %0d banks committed, expected 8 and 3",
                  n_direct, committed.size()));
    if (committed.size() == 3) chk(committed[0].size() == 15, "15 stored pairs hashed at overflow");
    // ---- 4: the generator still owns level 1 ----
    script.delete();
    repeat (4 * 17 + 2) script.push_back(0);
    begin_run();
    gen_busy = 3'b001;
    run(32'h300, 4 * 18, 1);
    gen_busy = 0;
    repeat (20) @(negedge clk);
    chk(n_untr == 1 && n_ovf == 0 && n_new == 0, $sformatf("untracked %0d", n_untr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
