// sha3_512 -- SHA3-512 hash engine with a 64-bit streaming input.
//
// Absorbs one 64-bit word per cycle into a 576-bit (9-word) padding buffer.
// When the ninth word is accepted the buffer is XORed into the state and the
// Keccak-f[1600] permutation runs for PERM_CYCLES cycles (24/PERM_CYCLES
// rounds per cycle) during which in_ready is low; then absorption resumes.
// So a full block takes 9 cycles in and 3 cycles blocked, the timing the
// engine of the design is described with.  A `finish` pulse (accepted when
// in_ready is high and in_valid low) pads the message with the SHA-3 rule
// (0x06 after the last byte, 0x80 in the last byte of the block), runs the
// last permutation and raises `hash_valid` with the 512-bit digest until
// `start` clears the engine for a new message.  Message length is unlimited.
//
// Interface: valid/ready on the input words; input word w contributes the
// bytes w[7:0], w[15:8], ... w[63:56] to the message, in that order.
// `hash` holds digest byte 0 in hash[511:504] (the usual hex print order).
// The internal structure is this implementation's; only the block size, the
// input width and the 9+3 cycle rhythm follow the described engine.
module sha3_512 #(
  parameter int unsigned PERM_CYCLES = 3    // 1, 2, 3, 4, 6, 8, 12 or 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,       // clear state, begin a new message
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [63:0]  in_data,
  input  logic         finish,      // end of message
  output logic         hash_valid,
  output logic [511:0] hash
);

  localparam int unsigned RPC = 24 / PERM_CYCLES;   // rounds per cycle
  localparam int unsigned RATE_W = 9;

  typedef enum logic [1:0] {S_ABSORB, S_PERM, S_DONE} st_e;
  st_e st;

  logic [1599:0] state;
  logic [63:0]   buf_q [RATE_W];
  logic [3:0]    cnt;          // words in buffer
  logic          final_blk;    // permutation in progress is the last one
  logic [4:0]    rnd;          // first round of this cycle
  logic [1599:0] rstate [RPC+1];

  assign in_ready = (st == S_ABSORB);

  // RPC unrolled rounds
  assign rstate[0] = state;
  for (genvar g = 0; g < RPC; g++) begin : g_rnd
    keccak_round u_rnd (.state_i(rstate[g]), .rnd(rnd + 5'(g)), .state_o(rstate[g+1]));
  end

  // state XOR block; `pad` appends the SHA-3 padding after `cnt` words
  function automatic logic [1599:0] absorb_blk(input logic [1599:0] s,
                                               input logic [63:0] w [RATE_W]);
    logic [1599:0] r;
    r = s;
    for (int i = 0; i < RATE_W; i++) r[64*i +: 64] = r[64*i +: 64] ^ w[i];
    return r;
  endfunction

  logic [63:0] blk [RATE_W];
  always_comb begin
    for (int i = 0; i < RATE_W; i++) blk[i] = buf_q[i];
    if (in_valid && in_ready) blk[cnt] = in_data;
    if (finish && in_ready && !in_valid) begin
      blk[cnt]        = blk[cnt] ^ 64'h06;
      blk[RATE_W-1]   = blk[RATE_W-1] ^ 64'h8000_0000_0000_0000;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_ABSORB;
      state     <= '0;
      cnt       <= '0;
      final_blk <= 1'b0;
      rnd       <= '0;
      for (int i = 0; i < RATE_W; i++) buf_q[i] <= '0;
    end else if (start) begin
      st        <= S_ABSORB;
      state     <= '0;
      cnt       <= '0;
      final_blk <= 1'b0;
      rnd       <= '0;
      for (int i = 0; i < RATE_W; i++) buf_q[i] <= '0;
    end else begin
      case (st)
        S_ABSORB: begin
          if (in_valid) begin
            if (cnt == 4'(RATE_W - 1)) begin
              state <= absorb_blk(state, blk);
              cnt   <= '0;
              rnd   <= '0;
              st    <= S_PERM;
              for (int i = 0; i < RATE_W; i++) buf_q[i] <= '0;
            end else begin
              buf_q[cnt] <= in_data;
              cnt        <= cnt + 4'd1;
            end
          end else if (finish) begin
            state     <= absorb_blk(state, blk);
            cnt       <= '0;
            rnd       <= '0;
            final_blk <= 1'b1;
            st        <= S_PERM;
            for (int i = 0; i < RATE_W; i++) buf_q[i] <= '0;
          end
        end
        S_PERM: begin
          state <= rstate[RPC];
          if (rnd == 5'(24 - RPC)) st <= final_blk ? S_DONE : S_ABSORB;
          else                     rnd <= rnd + 5'(RPC);
        end
        default: ;  // S_DONE: hold the digest
      endcase
    end
  end

  assign hash_valid = (st == S_DONE);
  always_comb
    for (int i = 0; i < 64; i++) hash[511 - 8*i -: 8] = state[8*i +: 8];

endmodule
