// tb_indirect_target_cam -- self-checking test of the indirect target table.
//
// With N_CODE = 4 the table holds 2^4-1 = 15 targets; code 0 means "not
// encodable".  The test looks up a random sequence of 20 possible targets:
// a new target must get the next free code in the same cycle (combinational
// code, stored at the clock edge), a known target its old code, and once 15
// targets are stored an unknown target code 0 without being stored.  Also
// checks that `clear` empties the table and that the stored list (tgts,
// ntgt) is in order of first occurrence.
module tb_indirect_target_cam;
  import lofat_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, lookup = 0;
  logic [31:0] target = 0;
  logic [3:0]  code;
  logic [3:0]  ntgt;
  logic [14:0][31:0] tgts;

  indirect_target_cam dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [31:0] list [$];

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int exp;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      list.delete();
      for (int i = 0; i < 60; i++) begin
        @(negedge clk);
        lookup = 1; target = 32'h1000 + 32'h40 * $urandom_range(0, 19);
        exp = 0;
        foreach (list[j]) if (list[j] == target) exp = j + 1;
        if (exp == 0 && list.size() < 15) begin list.push_back(target); exp = list.size(); end
        #1 chk(int'(code) == exp, $sformatf("target %h code %0d expected %0d", target, code, exp));
      end
      @(negedge clk); lookup = 0;
      chk(int'(ntgt) == list.size(), $sformatf("ntgt %0d expected %0d", ntgt, list.size()));
      foreach (list[j]) chk(tgts[j] == list[j], $sformatf("tgts[%0d]", j));
      // the 20 addresses over 60 lookups fill the table almost surely
      if (round == 0) chk(list.size() == 15, "table filled");
      clear = 1; @(negedge clk); clear = 0;
      chk(ntgt == 0, "clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
