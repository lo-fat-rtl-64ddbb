// tb_loop_counter_mem -- self-checking test of one loop counter memory.
//
// The memory must start all zero (a new loop sees every path_ID as new),
// return read data one cycle after the address (synchronous read), and keep
// written counts.  The test reads random addresses of the fresh memory,
// writes random counts to random path_IDs and reads them back with the
// one-cycle latency.  Default size: 2^16 x 8 bits (one level of the
// 1.5 Mbit configuration).
module tb_loop_counter_mem;
  import lofat_pkg::*;

  logic clk = 0;
  logic [15:0] rd_addr = 0, wr_addr = 0;
  logic [7:0]  rd_data, wr_data = 0;
  logic we = 0;

  loop_counter_mem dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [7:0] model [logic [15:0]];

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    #500000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [15:0] a;
    // fresh memory reads zero, data one cycle after the address
    for (int i = 0; i < 200; i++) begin
      @(negedge clk); rd_addr = 16'($urandom);
      @(posedge clk); #1;
      chk(rd_data == 8'd0, $sformatf("initial content at %h is %h", rd_addr, rd_data));
    end
    // random writes and reads
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      we = 1; wr_addr = 16'($urandom_range(0, 63)); wr_data = 8'($urandom);
      model[wr_addr] = wr_data;
      @(negedge clk); we = 0;
      a = 16'($urandom_range(0, 63));
      rd_addr = a;
      @(posedge clk); #1;
      chk(rd_data == (model.exists(a) ? model[a] : 8'd0), $sformatf("read %h got %h", a, rd_data));
    end
    // latency: the new address's data appears exactly one edge later
    @(negedge clk); we = 1; wr_addr = 16'h1234; wr_data = 8'hA5;
    @(negedge clk); we = 1; wr_addr = 16'h4321; wr_data = 8'h5A;
    @(negedge clk); we = 0; rd_addr = 16'h1234;
    @(posedge clk); #1; chk(rd_data == 8'hA5, "first read");
    @(negedge clk); rd_addr = 16'h4321;
    #1 chk(rd_data == 8'hA5, "data held until the next edge");
    @(posedge clk); #1; chk(rd_data == 8'h5A, "second read one cycle later");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
