// tb_branches_memory -- self-checking test of the branches memory.
//
// Writes random (src, dest) pairs to random (level, bank, index) slots while
// keeping a model array, and reads slots back through the combinational
// read port: a read in the cycle after a write must return the new pair
// (write at the clock edge, read without latency).  Checks that banks and
// levels do not alias.  Default parameters (3 levels, 2 banks, 16 entries).
module tb_branches_memory;
  import lofat_pkg::*;

  logic clk = 0;
  logic we = 0;
  logic [1:0] w_level = 1, r_level = 1;
  logic [0:0] w_bank = 0, r_bank = 0;
  logic [3:0] w_idx = 0, r_idx = 0;
  pair_t w_pair = '0, r_pair;

  branches_memory dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  pair_t model [3][2][16];
  bit    known [3][2][16];

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      we      = ($urandom_range(0, 1) == 1);
      w_level = 2'($urandom_range(1, 3));
      w_bank  = 1'($urandom_range(0, 1));
      w_idx   = 4'($urandom_range(0, 15));
      w_pair  = '{dest: $urandom, src: $urandom};
      @(posedge clk);
      if (we) begin
        model[w_level-1][w_bank][w_idx] = w_pair;
        known[w_level-1][w_bank][w_idx] = 1;
      end
      @(negedge clk);
      we = 0;
      // read back the slot just written (zero latency) and a random slot
      r_level = w_level; r_bank = w_bank; r_idx = w_idx;
      #1;
      if (known[r_level-1][r_bank][r_idx]) begin
        checks++;
        if (r_pair != model[r_level-1][r_bank][r_idx]) begin
          failures++;
          $display("FAIL read %0d/%0d/%0d got %h", r_level, r_bank, r_idx, r_pair);
        end
      end
      r_level = 2'($urandom_range(1, 3)); r_bank = 1'($urandom_range(0, 1));
      r_idx = 4'($urandom_range(0, 15));
      #1;
      if (known[r_level-1][r_bank][r_idx]) begin
        checks++;
        if (r_pair != model[r_level-1][r_bank][r_idx]) begin
          failures++;
          $display("FAIL read %0d/%0d/%0d got %h", r_level, r_bank, r_idx, r_pair);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
