// tb_metadata_storage -- self-checking test of the metadata storage.
//
// Writes random words (with random idle cycles), checks `count`, reads all
// words back (synchronous read, data one cycle after the address), checks
// that writes beyond WORDS are dropped and set `full_lost`, and that
// `start` empties the storage.  Default size 1024 words.
module tb_metadata_storage;
  logic clk = 0, rst_n = 0, start = 0, we = 0;
  logic [63:0] wdata = 0, rdata;
  logic [9:0]  raddr = 0;
  logic [10:0] count;
  logic full_lost;

  metadata_storage dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [63:0] model [$];

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      int n;
      n = (run == 0) ? 300 : 1030;
      model.delete();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      chk(count == 0 && !full_lost, "start clears");
      while (model.size() < n) begin
        @(negedge clk);
        we = ($urandom_range(0, 3) != 0);
        wdata = {$urandom, $urandom};
        if (we) model.push_back(wdata);
      end
      @(negedge clk); we = 0;
      chk(int'(count) == ((n > 1024) ? 1024 : n), $sformatf("count %0d", count));
      chk(full_lost == (n > 1024), "full_lost");
      for (int i = 0; i < int'(count); i++) begin
        @(negedge clk); raddr = 10'(i);
        @(posedge clk); #1;
        chk(rdata == model[i], $sformatf("word %0d %h expected %h", i, rdata, model[i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
