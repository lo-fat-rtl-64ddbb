// tb_lofat_top -- end-to-end test of the attestation unit at its default size.
//
// A small instruction-set model stands in for the core: it executes RV32I
// control-transfer instructions placed in a sparse code memory (everything
// else is a nop), decides conditional branches and indirect-call targets
// from a script or from $urandom, and presents one executed instruction per
// cycle, optionally followed by idle cycles.  Every control-flow event it
// produces is also given to the untimed reference model (tb_rv_pkg), and the
// words the hash engine accepts and the metadata words read back are
// compared with the model.
//
// Scenarios
//  1  the while loop with an if/else (two paths) of the design description,
//     iterations A A B A A B: checks the stream, the path_IDs 0b1001 ("0011")
//     and 0b101 ("011"), their counts and the SHA3-512 digest (computed
//     with a reference SHA3 implementation from the expected pairs);
//  2  three nested loops, direct and indirect calls (up to 20 different
//     targets, so the 15-entry target table overflows), a loop inside a
//     called function and a 16-branch subroutine that overflows the path
//     encoding; random outcomes, 2 idle cycles per instruction;
//  3  stop while a loop is still open;
//  5  a loop whose indirect call reaches 20 targets: the 15-entry target
//     table overflows (code 0);
//  4  program 2 with back-to-back instructions: checks completion and that
//     nothing is lost, and drives the fall-backs (untracked loop, no free
//     bank) and the hash engine's blocked cycles.
// Every mechanism is counted; one that never happened is a failure.
module tb_lofat_top;
  import lofat_pkg::*;
  import tb_rv_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start = 0, stop = 0, instr_valid = 0;
  logic [31:0] pc = 0, instr = 0;
  logic done, lost;
  logic [511:0] hash;
  logic [9:0] meta_raddr = 0;
  logic [63:0] meta_rdata;
  logic [10:0] meta_count;
  logic [1:0] depth;
  logic st_loop_enter, st_loop_exit, st_new_path, st_repeat_path, st_overflow, st_direct, st_no_bank;
  logic [31:0] n_hashed;
  logic st_untracked, st_tgt_lookup, st_tgt_full, st_blocked, meta_we, hash_in_valid;
  logic [4:0] cbuf_fill;
  logic [2:0] lost_src;
  logic [63:0] hash_in_data;

  lofat_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int m_enter, m_exit, m_new, m_rep, m_ovf, m_direct, m_nobank, m_depth3, m_blocked,
      m_cbuf, m_code0, m_codes, m_untracked, m_meta;
  always @(posedge clk) if (rst_n) begin
    m_enter  += int'(st_loop_enter);
    m_exit   += int'(st_loop_exit);
    m_new    += int'(st_new_path);
    m_rep    += int'(st_repeat_path);
    m_ovf    += int'(st_overflow);
    m_direct += int'(st_direct);
    m_nobank += int'(st_no_bank);
    m_depth3 += int'(depth == 2'd3);
    m_blocked += int'(st_blocked);
    m_cbuf   += int'(cbuf_fill > 2);
    m_meta   += int'(meta_we);
    m_codes  += int'(st_tgt_lookup);
    m_code0  += int'(st_tgt_full);
    m_untracked += int'(st_untracked);
  end

  // ---------------- hash stream capture ----------------
  logic [63:0] got_hash [$];
  always @(posedge clk)
    if (rst_n && hash_in_valid) got_hash.push_back(hash_in_data);

  // ---------------- code memory and instruction-set model ----------------
  logic [31:0] imem [logic [31:0]];
  logic [31:0] ra, t1;
  int          gap;
  int          cond_script [$];
  logic [31:0] ind_script [$];
  bit          use_script;
  int          lc [logic [31:0]];      // per-branch counters for loop control
  lofat_ref    rm;

  function automatic logic [31:0] fetch(logic [31:0] a);
    return imem.exists(a) ? imem[a] : NOP;
  endfunction

  function automatic bit decide(logic [31:0] a);
    int limit;
    if (use_script) return bit'(cond_script.pop_front());
    // loop-closing branches: keep looping a random number of times
    limit = (a == 32'h21C) ? 4 : (a == 32'h218) ? 3 : (a == 32'h214) ? 5 : (a == 32'h404) ? 2 : 0;
    if (limit != 0) begin
      if (!lc.exists(a)) lc[a] = 0;
      if (lc[a] < limit && ($urandom_range(0, 3) != 0)) begin lc[a]++; return 1; end
      lc[a] = 0;
      return 0;
    end
    return bit'($urandom_range(0, 1));
  endfunction

  task automatic issue(logic [31:0] a);
    @(negedge clk);
    instr_valid = 1; pc = a; instr = fetch(a);
    @(negedge clk);
    instr_valid = 0;
    for (int g = 1; g < gap; g++) @(negedge clk);
    // note: the first cycle after the instruction is used by the next issue
  endtask

  // execute from `from` stop_pc pc == `stop_pc`
  task automatic run(logic [31:0] from, logic [31:0] stop_pc, int max_instr = 5000);
    logic [31:0] p, nx, w;
    ev_t e;
    int n;
    p = from; n = 0;
    while (p != stop_pc && n < max_instr) begin
      w = fetch(p);
      if (gap == 0) begin
        @(negedge clk); instr_valid = 1; pc = p; instr = w;
      end else issue(p);
      nx = p + 4;
      e.src = p; e.link = 0; e.ret = 0; e.taken = 1;
      unique case (w[6:0])
        7'b1100011: begin
          e.kind = 0;
          e.taken = decide(p);
          if (e.taken) nx = p + {{19{w[31]}}, w[31], w[7], w[30:25], w[11:8], 1'b0};
        end
        7'b1101111: begin
          e.kind = 1;
          e.link = (w[11:7] == 5'd1);
          nx = p + {{11{w[31]}}, w[31], w[19:12], w[20], w[30:21], 1'b0};
          if (e.link) ra = p + 4;
        end
        7'b1100111: begin
          e.kind = 2;
          e.link = (w[11:7] == 5'd1);
          e.ret  = (w[11:7] == 5'd0) && (w[19:15] == 5'd1);
          if (e.ret) nx = ra;
          else nx = use_script ? ind_script.pop_front() : 32'h500 + 32'h20 * $urandom_range(0, 19);
          if (e.link) ra = p + 4;
        end
        default: e.kind = -1;
      endcase
      if (e.kind >= 0) begin
        e.dest = nx;
        rm.event_in(e);
      end
      p = nx; n++;
    end
    // one more instruction so the last branch is resolved
    if (gap == 0) begin @(negedge clk); instr_valid = 1; pc = p; instr = fetch(p); end
    else issue(p);
    @(negedge clk); instr_valid = 0;
  endtask

  task automatic begin_run();
    rm = new();
    got_hash.delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
  endtask

  task automatic end_run(string name, output logic [511:0] digest);
    int t;
    @(negedge clk); stop = 1; @(negedge clk); stop = 0;
    rm.stop();
    t = 0;
    while (!done && t < 20000) begin @(negedge clk); t++; end
    check(done, {name, ": done"});
    check(!lost, $sformatf("%s: nothing lost (cache %0d generator %0d storage %0d)", name,
                           lost_src[2], lost_src[1], lost_src[0]));
    digest = hash;
  endtask

  task automatic compare(string name);
    int n;
    check(got_hash.size() == rm.hashq.size(),
          $sformatf("%s: %0d hash words, expected %0d", name, got_hash.size(), rm.hashq.size()));
    n = (got_hash.size() < rm.hashq.size()) ? got_hash.size() : rm.hashq.size();
    for (int i = 0; i < n; i++)
      check(got_hash[i] == rm.hashq[i],
            $sformatf("%s: hash word %0d %h expected %h", name, i, got_hash[i], rm.hashq[i]));
    check(int'(meta_count) == rm.metaq.size(),
          $sformatf("%s: %0d metadata words, expected %0d", name, meta_count, rm.metaq.size()));
    for (int i = 0; i < rm.metaq.size() && i < int'(meta_count); i++) begin
      @(negedge clk); meta_raddr = 10'(i); @(negedge clk);
      check(meta_rdata == rm.metaq[i],
            $sformatf("%s: metadata word %0d %h expected %h", name, i, meta_rdata, rm.metaq[i]));
    end
  endtask

  // ---------------- programs ----------------
  task automatic load_fig4();
    imem.delete();
    imem[32'h108] = enc_b(32'h108, 32'h124);          // N2: leave loop if taken
    imem[32'h10C] = enc_b(32'h10C, 32'h118);          // N3: to N5 if taken
    imem[32'h114] = enc_jal(32'h114, 32'h11C, 5'd0);  // N4: jump to N6
    imem[32'h120] = enc_jal(32'h120, 32'h108, 5'd0);  // N6: back to N2
  endtask

  task automatic load_nested();
    imem.delete();
    imem[32'h200] = enc_jal(32'h200, 32'h600, 5'd1);  // call H (16 branches)
    imem[32'h204] = enc_b(32'h204, 32'h20C);          // L2 entry: skip call
    imem[32'h208] = enc_jal(32'h208, 32'h400, 5'd1);  // call F (has a loop)
    imem[32'h210] = enc_jalr(5'd1, 5'd6);             // L3 body: indirect call
    imem[32'h214] = enc_b(32'h214, 32'h20C, 3'b001);  // L3 back edge
    imem[32'h218] = enc_b(32'h218, 32'h204, 3'b001);  // L2 back edge
    imem[32'h21C] = enc_b(32'h21C, 32'h200, 3'b001);  // L1 back edge
    imem[32'h404] = enc_b(32'h404, 32'h400, 3'b001);  // loop in F
    imem[32'h408] = enc_jalr(5'd0, 5'd1);             // return
    for (int i = 0; i < 20; i++) imem[32'h504 + 32'h20 * i] = enc_jalr(5'd0, 5'd1);
    for (int i = 0; i < 16; i++) imem[32'h600 + 8 * i] = enc_b(32'h600 + 8 * i, 32'h608 + 8 * i);
    imem[32'h680] = enc_jalr(5'd0, 5'd1);
  endtask

  logic [511:0] dg;
  int n_runs, n_cmp = 0, u0;

  initial begin
    m_enter = 0; m_exit = 0; m_new = 0; m_rep = 0; m_ovf = 0; m_direct = 0; m_nobank = 0;
    m_depth3 = 0; m_blocked = 0; m_cbuf = 0; m_code0 = 0; m_codes = 0; m_untracked = 0; m_meta = 0;
    ra = 0; t1 = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- 1: the two-path while loop ----
    load_fig4();
    use_script = 1; gap = 1;
    cond_script = '{0,0, 0,0, 0,1, 0,0, 0,0, 0,1, 1};
    begin_run();
    run(32'h100, 32'h128);
    end_run("fig4", dg);
    compare("fig4");
    check(rm.metaq.size() == 3 && rm.metaq[1][47:32] == 16'b1001 && rm.metaq[1][7:0] == 8'd3
          && rm.metaq[2][47:32] == 16'b101 && rm.metaq[2][7:0] == 8'd2, "fig4: path_IDs and counts");
    check(dg == 512'hc71abd16bdb74d55bf79374d8bf833a3a225b748d837644913b876b91f76f7dbac6f5c0032c0dc1f02e10261a885e229e2b923d27f387d6045b829f215f2855e,
          $sformatf("fig4: digest %h", dg));

    // ---- 2: nested loops, calls, indirect branches, overflow ----
    load_nested();
    use_script = 0; gap = 3;
    for (n_runs = 0; n_runs < 6; n_runs++) begin
      begin_run();
      run(32'h200, 32'h220);
      u0 = m_untracked;
      end_run($sformatf("nested%0d", n_runs), dg);
      // the reference model does not model the untracked fall-back
      if (m_untracked == u0) begin compare($sformatf("nested%0d", n_runs)); n_cmp++; end
    end

    check(n_cmp >= 3, $sformatf("nested runs compared with the model: %0d", n_cmp));

    // ---- 3: stop inside an open loop ----
    load_fig4();
    use_script = 1; gap = 2;
    cond_script = '{0,1, 0,0, 0,1, 0,0};
    begin_run();
    run(32'h100, 32'h11C, 14);
    end_run("open", dg);
    compare("open");

    // ---- 5: one loop calling 20 different targets (target table overflow) ----
    imem.delete();
    imem[32'h300] = enc_jalr(5'd1, 5'd6);             // indirect call
    imem[32'h304] = enc_b(32'h304, 32'h300, 3'b001);  // back edge
    for (int i = 0; i < 20; i++) imem[32'h504 + 32'h20 * i] = enc_jalr(5'd0, 5'd1);
    use_script = 1; gap = 1;
    cond_script.delete(); ind_script.delete();
    for (int i = 0; i < 30; i++) begin
      cond_script.push_back(int'(i != 29));
      ind_script.push_back(32'h504 + 32'h20 * (i % 20));
    end
    begin_run();
    run(32'h300, 32'h308);
    end_run("targets", dg);
    compare("targets");

    // ---- 4: back-to-back instructions ----
    load_nested();
    use_script = 0; gap = 0;
    for (n_runs = 0; n_runs < 6; n_runs++) begin
      begin_run();
      run(32'h200, 32'h220);
      end_run($sformatf("stress%0d", n_runs), dg);
    end

    $display("mechanisms: enter=%0d exit=%0d new=%0d repeat=%0d overflow=%0d direct=%0d no_bank=%0d depth3=%0d blocked=%0d cbuf>2=%0d codes=%0d code0=%0d untracked=%0d meta=%0d",
             m_enter, m_exit, m_new, m_rep, m_ovf, m_direct, m_nobank, m_depth3, m_blocked,
             m_cbuf, m_codes, m_code0, m_untracked, m_meta);
    check(m_enter > 0, "loop entry seen");
    check(m_exit > 0, "loop exit seen");
    check(m_new > 0, "new path seen");
    check(m_rep > 0, "repeated path seen");
    check(m_ovf > 0, "overflow path seen");
    check(m_direct > 0, "direct hashing in a loop seen");
    check(m_depth3 > 0, "three nested loops seen");
    check(m_blocked > 0, "hash engine blocked seen");
    check(m_cbuf > 0, "cache buffer used");
    check(m_codes > 0, "indirect target encoded");
    check(m_code0 > 0, "target table overflow seen");
    check(m_untracked > 0, "untracked loop seen");
    check(m_meta > 0, "metadata written");
    check(m_nobank > 0, "no free bank seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
