// metadata_storage -- on-chip store of the loop metadata L.
//
// An append-only memory of WORDS 64-bit words.  The metadata generator
// appends one word per write; `count` tells how many words are held.  After
// attestation the words are read back through a synchronous read port
// (data one cycle after the address) to be sent with the hash.  Writes
// beyond the capacity are dropped and set the sticky `full_lost` flag.
// `start` empties the store.  The capacity (1024 words) is this
// implementation's choice; the block itself is only named by the design
// description.
module metadata_storage #(
  parameter int unsigned WORDS = 1024,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          we,
  input  logic [63:0]   wdata,
  input  logic [AW-1:0] raddr,
  output logic [63:0]   rdata,
  output logic [AW:0]   count,
  output logic          full_lost
);

  logic [63:0] mem [WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      full_lost <= 1'b0;
    end else if (start) begin
      count     <= '0;
      full_lost <= 1'b0;
    end else if (we) begin
      if (count == (AW+1)'(WORDS)) full_lost <= 1'b1;
      else                         count <= count + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (we && !start && count != (AW+1)'(WORDS)) mem[count[AW-1:0]] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
