// tb_branch_filter -- self-checking test of the branch filter.
//
// A small instruction-set model runs two programs and feeds the retired
// instructions to the filter; every event is compared with the expected
// event computed by the model (src, dest, type, taken, level, path_end,
// push, non_loops):
//  1  the while loop with an if/else of the design description (fig. 4
//     addresses): the loop is entered at its first back edge, iterations end
//     at the entry node, and it is left when N2 jumps to the exit;
//  2  a loop that calls a subroutine placed after it in memory (the call
//     must not close the loop), then stop while the loop is open (the stop
//     event must close it).
// Timing: with back-to-back instructions a branch is reported exactly two
// cycles after it was presented (one cycle waiting for the next pc, one
// register stage); the test measures this for every event.
module tb_branch_filter;
  import lofat_pkg::*;
  import tb_rv_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, stop = 0, instr_valid = 0;
  logic [31:0] pc = 0, instr = 0;
  branch_status_t branch_status;
  loops_status_t  loops_status;
  logic ev_valid, non_loops;
  logic [1:0] depth;

  branch_filter dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  typedef struct {
    logic [31:0] src, dest;
    int kind, taken, level, pend, push, nl, t;
  } exp_t;
  exp_t expq [$];

  // checker: every event must match the oldest expected one
  always @(posedge clk) if (ev_valid && branch_status.valid) begin
    exp_t e;
    if (expq.size() == 0) chk(0, "unexpected event");
    else begin
      e = expq.pop_front();
      chk(branch_status.pair.src == e.src && branch_status.pair.dest == e.dest,
          $sformatf("pair %h->%h expected %h->%h", branch_status.pair.src, branch_status.pair.dest, e.src, e.dest));
      chk(int'(branch_status.btype) == e.kind && int'(branch_status.taken) == e.taken,
          $sformatf("type/taken of %h", e.src));
      chk(int'(loops_status.level) == e.level && int'(loops_status.path_end) == e.pend
          && int'(loops_status.push) == e.push && int'(non_loops) == e.nl,
          $sformatf("%h->%h level %0d end %0d push %0d nl %0d expected %0d %0d %0d %0d",
                    e.src, e.dest, loops_status.level, loops_status.path_end, loops_status.push,
                    non_loops, e.level, e.pend, e.push, e.nl));
      chk(cyc - e.t == 2, $sformatf("latency %0d cycles, expected 2", cyc - e.t));
    end
  end

  logic [31:0] imem [logic [31:0]];
  int script [$];
  // model loop state
  logic [31:0] m_entry [4], m_exit [4];
  int m_calls [4], m_depth;
  logic [31:0] ra;

  task automatic run(logic [31:0] from, int ninstr);
    logic [31:0] p, nx, w;
    int kind, taken, lvl, link, ret, pend, push;
    p = from;
    for (int n = 0; n < ninstr; n++) begin
      w = imem.exists(p) ? imem[p] : NOP;
      @(negedge clk); instr_valid = 1; pc = p; instr = w;
      nx = p + 4; kind = -1; taken = 1; link = 0; ret = 0;
      if (w[6:0] == 7'b1100011) begin
        kind = 0; taken = script.pop_front();
        if (taken) nx = p + {{19{w[31]}}, w[31], w[7], w[30:25], w[11:8], 1'b0};
      end else if (w[6:0] == 7'b1101111) begin
        kind = 1; link = int'(w[11:7] == 5'd1);
        nx = p + {{11{w[31]}}, w[31], w[19:12], w[20], w[30:21], 1'b0};
        if (link) ra = p + 4;
      end else if (w[6:0] == 7'b1100111) begin
        kind = 2; ret = int'(w[11:7] == 5'd0 && w[19:15] == 5'd1); nx = ra;
      end
      if (kind >= 0) begin
        exp_t e;
        lvl = m_depth;
        while (lvl > 0 && !link && m_calls[lvl] == 0 && (nx < m_entry[lvl] || nx >= m_exit[lvl])) lvl--;
        m_depth = lvl;
        pend = 0; push = 0;
        if (taken && nx < p && !link && !ret) begin
          if (lvl > 0 && nx == m_entry[lvl]) pend = 1;
          else if (lvl < 3) begin
            push = 1; m_depth = lvl + 1; m_entry[m_depth] = nx; m_exit[m_depth] = p + 4;
            m_calls[m_depth] = 0;
          end
        end
        if (lvl > 0 && link) m_calls[lvl]++;
        if (lvl > 0 && ret && m_calls[lvl] > 0) m_calls[lvl]--;
        e = '{src: p, dest: nx, kind: kind, taken: taken, level: lvl, pend: pend, push: push,
              nl: int'(lvl == 0), t: cyc + 1};
        expq.push_back(e);
      end
      p = nx;
    end
    @(negedge clk); instr_valid = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // ---- 1: fig. 4 loop, iterations A A B A A B then exit ----
    imem[32'h108] = enc_b(32'h108, 32'h124);
    imem[32'h10C] = enc_b(32'h10C, 32'h118);
    imem[32'h114] = enc_jal(32'h114, 32'h11C, 5'd0);
    imem[32'h120] = enc_jal(32'h120, 32'h108, 5'd0);
    script = '{0,0, 0,0, 0,1, 0,0, 0,0, 0,1, 1};
    m_depth = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    run(32'h100, 40);
    repeat (4) @(negedge clk);
    chk(expq.size() == 0, "all fig4 events seen");
    chk(depth == 0, "loop left");
    // ---- 2: loop with a call to a subroutine after the loop, stop inside ----
    imem.delete();
    imem[32'h204] = enc_jal(32'h204, 32'h300, 5'd1);   // call
    imem[32'h208] = enc_b(32'h208, 32'h200);           // back edge
    imem[32'h304] = enc_jalr(5'd0, 5'd1);              // return
    script = '{1, 1, 1, 1};
    m_depth = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    run(32'h200, 21);
    repeat (4) @(negedge clk);
    chk(expq.size() == 0, "all call events seen");
    chk(depth == 1, "loop still open");
    @(negedge clk); stop = 1; @(negedge clk); stop = 0;
    chk(ev_valid && !branch_status.valid && loops_status.depth_before == 1, "stop event");
    @(negedge clk);
    chk(depth == 0, "stop closes the loop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
