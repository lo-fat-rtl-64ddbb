// tb_hash_controller -- self-checking test of the hash engine controller.
//
// The test plays the branch filter (ev_valid, non_loops, pair), the loop
// monitor (new_path one cycle after the event), the branches memory (a
// behavioural array read combinationally) and the hash engine (in_ready
// low 3 cycles of every 12, the SHA3-512 absorb pattern, and random
// stalls).  For every event it predicts the words the engine must receive:
// the committed stored paths, highest level first, each in index order,
// then the event's own pair if it is hashed directly or outside loops.
// Checks: the word stream, one bank release per committed bank (issued with
// the acceptance of the bank's last word), the finish request only after
// the buffer is empty, `done` with the engine's digest, `lost` when the
// cache buffer overflows, and that a burst of back-to-back events is
// absorbed by the buffer.
module tb_hash_controller;
  import lofat_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic ev_valid = 0, non_loops = 0;
  pair_t ev_pair = '0;
  new_path_t new_path = '0;
  logic [2:0] rel_valid;
  logic [2:0][0:0] rel_bank;
  logic [1:0] r_level;
  logic [0:0] r_bank;
  logic [3:0] r_idx;
  pair_t r_pair;
  logic h_valid, h_ready, h_finish, h_done = 0;
  logic [63:0] h_data;
  logic finish_req = 0, idle, done, lost;
  logic [31:0] n_hashed;
  logic [4:0] fill;

  hash_controller dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // branches memory model
  pair_t bm [3][2][16];
  assign r_pair = (r_level >= 1 && r_level <= 3) ? bm[r_level-1][r_bank][r_idx] : '0;

  // hash engine model: 9 ready cycles, 3 blocked, plus optional random stalls
  int phase = 0;
  bit rnd_stall = 0, stall;
  always @(posedge clk) begin
    phase <= (phase == 11) ? 0 : phase + 1;
    stall <= rnd_stall && ($urandom_range(0, 3) == 0);
  end
  assign h_ready = (phase < 9) && !stall;

  logic [63:0] expq [$];
  int rel_cnt [3][2];
  int rel_exp [3][2];
  int max_fill = 0, n_fin = 0;
  always @(posedge clk) if (rst_n) begin
    if (h_valid && h_ready) begin
      if (expq.size() == 0) chk(0, "unexpected hash word");
      else chk(h_data == expq.pop_front(), $sformatf("hash word %h", h_data));
    end
    for (int l = 0; l < 3; l++) if (rel_valid[l]) rel_cnt[l][rel_bank[l]]++;
    if (int'(fill) > max_fill) max_fill = int'(fill);
    if (h_finish && h_ready) n_fin++;
  end

  // one event: filter view now, monitor view one cycle later
  task automatic event_(bit nl, bit direct, logic [2:0] commit, int cnt [3], bit bnk [3]);
    pair_t p;
    new_path_t np;
    p = '{dest: $urandom, src: $urandom};
    @(negedge clk);
    ev_valid = 1; non_loops = nl; ev_pair = p;
    np = '0;
    np.valid = !nl; np.direct = direct; np.commit = commit;
    for (int l = 0; l < 3; l++) begin
      np.bank[l] = bnk[l]; np.cnt[l] = 5'(cnt[l]);
    end
    for (int l = 2; l >= 0; l--) if (commit[l]) begin
      for (int i = 0; i < cnt[l]; i++) expq.push_back(bm[l][bnk[l]][i]);
      rel_exp[l][bnk[l]]++;
    end
    if (nl || direct) expq.push_back(p);
    @(negedge clk);
    ev_valid = 0; new_path = np;
    @(negedge clk);
    new_path = '0;
  endtask

  task automatic random_event(int maxcommit);
    int cnt [3];
    bit bnk [3];
    logic [2:0] c;
    bit nl;
    nl = ($urandom_range(0, 2) == 0);
    c = nl ? 3'b000 : 3'($urandom_range(0, 7));
    if (maxcommit == 0) c = '0;
    for (int l = 0; l < 3; l++) begin cnt[l] = $urandom_range(1, 16); bnk[l] = 1'($urandom_range(0, 1)); end
    event_(nl, !nl && ($urandom_range(0, 1) == 1), c, cnt, bnk);
  endtask

  initial begin
    int t;
    foreach (bm[l, b, i]) bm[l][b][i] = '{dest: $urandom, src: $urandom};
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // spaced events with stored paths
    for (int i = 0; i < 150; i++) begin
      rnd_stall = (i > 75);
      random_event(1);
      repeat ($urandom_range(40, 60)) @(negedge clk);
    end
    // burst: back-to-back events with single words (the filter's maximum rate)
    for (int i = 0; i < 12; i++) begin
      @(negedge clk);
      ev_valid = 1; non_loops = 1; ev_pair = '{dest: $urandom, src: $urandom};
      expq.push_back(ev_pair);
    end
    @(negedge clk); ev_valid = 0;
    // finish
    finish_req = 1; @(negedge clk); finish_req = 0;
    t = 0;
    while (!h_finish && t < 2000) begin @(negedge clk); t++; end
    chk(expq.size() == 0, $sformatf("all words hashed before finish (%0d left)", expq.size()));
    repeat (5) @(negedge clk);
    h_done = 1; @(negedge clk);
    chk(done, "done with the engine's digest");
    chk(n_fin == 1, "one finish");
    chk(!lost, "nothing lost");
    chk(max_fill > 2, $sformatf("cache buffer absorbed the burst (max fill %0d)", max_fill));
    foreach (rel_exp[l, b])
      chk(rel_cnt[l][b] == rel_exp[l][b], $sformatf("releases level %0d bank %0d: %0d expected %0d",
                                                    l + 1, b, rel_cnt[l][b], rel_exp[l][b]));
    h_done = 0;
    // overflow of the cache buffer: 40 back-to-back events while the engine
    // never becomes ready cannot all be buffered
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    force h_ready = 0;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk); ev_valid = 1; non_loops = 1; ev_pair = '{dest: $urandom, src: $urandom};
    end
    @(negedge clk); ev_valid = 0; @(negedge clk);
    chk(lost, "overflow sets lost");
    chk(int'(fill) == 16, "buffer full");
    release h_ready;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
