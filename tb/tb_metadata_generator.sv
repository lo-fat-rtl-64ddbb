// tb_metadata_generator -- self-checking test of the metadata generator.
//
// The test plays the loop monitor and the three loop counter memories
// (behavioural, synchronous read).  It fills the counters of random path_IDs,
// sends loop_end snapshots (single exits, and all three levels exiting in
// the same cycle as at `stop`), and checks:
//   - the metadata words: per loop a header, one path word per listed ID
//     with the count from the memory, one word per indirect target;
//   - order: innermost level first when levels exit together;
//   - every listed counter is zero afterwards;
//   - `own` covers each level from the cycle after its exit until its job
//     is finished, and `idle` returns;
//   - timing: a job takes 3 + 2*npaths + ntgt cycles until idle;
//   - a fifth queued exit is dropped and sets `lost`.
module tb_metadata_generator;
  import lofat_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [2:0] loop_end_valid = 0;
  loop_end_t [2:0] loop_end = '0;
  logic [2:0] own;
  logic [2:0][15:0] cm_rd_addr, cm_wr_addr;
  logic [2:0][7:0]  cm_rd_data, cm_wr_data;
  logic [2:0] cm_we;
  logic md_we, idle, lost;
  logic [63:0] md_data;

  metadata_generator dut (.*);

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

  // counter memories
  logic [7:0] cm [3][logic [15:0]];
  always @(posedge clk)
    for (int l = 0; l < 3; l++) begin
      cm_rd_data[l] <= cm[l].exists(cm_rd_addr[l]) ? cm[l][cm_rd_addr[l]] : 8'd0;
      if (cm_we[l]) cm[l][cm_wr_addr[l]] = cm_wr_data[l];
    end

  logic [63:0] expq [$];
  always @(posedge clk) if (rst_n && md_we) begin
    if (expq.size() == 0) chk(0, $sformatf("unexpected metadata word %h", md_data));
    else chk(md_data == expq[0], $sformatf("metadata %h expected %h", md_data, expq[0]));
    if (expq.size() != 0) void'(expq.pop_front());
  end

  function automatic loop_end_t make(int l, int np, int nt);
    loop_end_t s;
    logic [15:0] id;
    s = '0;
    s.entry = 32'h1000 * (l + 1) + 32'h10 * $urandom_range(0, 255);
    s.npaths = 5'(np);
    s.ntgt = 4'(nt);
    for (int i = 0; i < np; i++) begin
      do id = 16'($urandom_range(1, 65535)); while (cm[l].exists(id));
      s.ids[i] = id;
      cm[l][id] = 8'($urandom_range(1, 255));
    end
    for (int i = 0; i < nt; i++) s.tgts[i] = $urandom;
    return s;
  endfunction

  function automatic void expect_(int l, loop_end_t s);
    expq.push_back({4'h1, 2'b00, 2'(l + 1), 1'b0, 2'b00, 5'(s.npaths), 3'b000, 5'(s.ntgt), 8'h00, s.entry});
    for (int i = 0; i < int'(s.npaths); i++)
      expq.push_back({4'h2, 12'h000, s.ids[i], 24'h0, cm[l][s.ids[i]]});
    for (int i = 0; i < int'(s.ntgt); i++)
      expq.push_back({4'h3, 24'h0, 4'(i + 1), s.tgts[i]});
  endfunction

  task automatic check_clear(int l, loop_end_t s);
    for (int i = 0; i < int'(s.npaths); i++)
      chk(cm[l][s.ids[i]] == 8'd0, $sformatf("level %0d id %h cleared", l + 1, s.ids[i]));
  endtask

  initial begin
    loop_end_t s [3];
    int t, np, nt;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // single exits, timing of each job
    for (int it = 0; it < 20; it++) begin
      int l;
      l  = $urandom_range(0, 2);
      np = $urandom_range(0, 16);
      nt = $urandom_range(0, 15);
      s[l] = make(l, np, nt);
      expect_(l, s[l]);
      @(negedge clk); loop_end_valid[l] = 1; loop_end[l] = s[l];
      @(negedge clk); loop_end_valid = 0;
      chk(own[l], "level owned after the exit");
      t = 0;
      while (!idle && t < 200) begin @(negedge clk); t++; end
      chk(t == 3 + 2 * np + nt, $sformatf("job took %0d cycles, expected %0d", t, 3 + 2 * np + nt));
      chk(own == 0, "ownership ends");
      chk(expq.size() == 0, "all words written");
      check_clear(l, s[l]);
    end
    // three levels exit in the same cycle: innermost (level 3) first
    for (int l = 2; l >= 0; l--) begin
      s[l] = make(l, $urandom_range(1, 16), $urandom_range(0, 15));
      expect_(l, s[l]);
    end
    @(negedge clk);
    loop_end_valid = 3'b111;
    for (int l = 0; l < 3; l++) loop_end[l] = s[l];
    @(negedge clk); loop_end_valid = 0;
    chk(own == 3'b111, "all three levels owned");
    t = 0;
    while (!idle && t < 500) begin @(negedge clk); t++; end
    chk(expq.size() == 0 && idle, "all three written");
    for (int l = 0; l < 3; l++) check_clear(l, s[l]);
    chk(!lost, "nothing lost");
    // five exits while the queue (4 jobs) is busy: one is lost
    for (int k = 0; k < 5; k++) begin
      s[0] = make(0, 16, 15);
      if (k < 4) expect_(0, s[0]);
      @(negedge clk); loop_end_valid = 3'b001; loop_end[0] = s[0];
    end
    @(negedge clk); loop_end_valid = 0;
    @(negedge clk);
    chk(lost, "queue overflow sets lost");
    t = 0;
    while (!idle && t < 1000) begin @(negedge clk); t++; end
    chk(expq.size() == 0, "the four queued jobs written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
