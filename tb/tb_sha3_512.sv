// tb_sha3_512 -- self-checking test of the SHA3-512 engine.
// Hashes messages of 0, 1, 8, 9 and 20 64-bit words (word i = 0x1000 +
// i*0x11111111) and compares the digests with values from a reference
// SHA3-512 implementation.  Also checks the absorb rhythm: nine words accepted
// back to back, then in_ready low for exactly 3 cycles.
module tb_sha3_512;
  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_ready, finish, hash_valid;
  logic [63:0] in_data;
  logic [511:0] hash;
  int checks = 0, failures = 0;

  sha3_512 dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] word(int i);
    return 64'h1000 + 64'(i) * 64'h11111111;
  endfunction

  task automatic run(int n, logic [511:0] exp, string name);
    int blocked;
    int acc_run;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < n; i++) begin
      in_valid = 1; in_data = word(i);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      // after the 9th word of a block the engine must block for 3 cycles
      if (i % 9 == 8) begin
        blocked = 0;
        in_valid = 0;
        while (!in_ready) begin blocked++; @(negedge clk); end
        checks++;
        if (blocked != 3) begin failures++; $display("FAIL %s blocked %0d cycles", name, blocked); end
      end
    end
    in_valid = 0; finish = 1;
    @(posedge clk); while (!in_ready) @(posedge clk);
    @(negedge clk); finish = 0;
    acc_run = 0;
    while (!hash_valid && acc_run < 100) begin @(negedge clk); acc_run++; end
    checks++;
    if (hash !== exp) begin failures++; $display("FAIL %s got %h", name, hash); end
  endtask

  initial begin
    start = 0; in_valid = 0; finish = 0; in_data = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(0,  512'ha69f73cca23a9ac5c8b567dc185a756e97c982164fe25859e0d1dcc1475c80a615b2123af1f5f94c11e3e9402c3ac558f500199d95b6d3e301758586281dcd26, "empty");
    run(1,  512'h591f23f024b32c860c4b93adb5d339133f5c6ee348eff4dba6adfa7c5a96db36726c48798efa8f69a5295df4b0dd12576b51c91f1be010a1dcefee44f1389920, "one");
    run(8,  512'h86f355c085b8331340f85c7ac28b03a86353f8928d123ab15739c2445d36af8d22e9ac1bf43b96754872dbee24eb14fc41b850ba5f23a81e165ac28662ef13ca, "eight");
    run(9,  512'h41db84b47e99415f6481bd1ccdf05796e5a169a0a253200e394d88d90eecafd5a461410b04bab14e871768d93ce99999ec2e9a69f1ddbd8a62b9c2afe35d2e78, "nine");
    run(20, 512'h5eefaba47ac8802ffeb94bba1c184fc8c881503196595ab3c17d2270b7c0e4ddc32f7cde70464e0c048e11da7c757bbfbe27315bf1029a56eb4796875d920553, "twenty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
