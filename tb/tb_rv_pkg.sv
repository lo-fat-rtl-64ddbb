// tb_rv_pkg -- test support: RV32I encoders for control-transfer
// instructions, and an untimed reference model of the attestation algorithm.
//
// The reference model takes the control-flow events of a program run
// (src, dest, kind) and computes, without any notion of cycles, the sequence
// of 64-bit words the hash engine must receive and the metadata words that
// must be stored.  It follows the algorithm documented in the RTL headers:
// loop detection by non-linking backward branches, exit when a destination
// leaves [entry, exit) with no call pending, path_IDs with a leading 1 and an
// implicit closing bit, 4-bit indirect target codes, overflow paths under
// ID 0, and the per-event hash order (exiting loops' incomplete iterations,
// innermost first, then the completed/overflowed path, then the event's own
// pair).  It does not model buffer exhaustion; tests compare against it only
// where that cannot occur.
package tb_rv_pkg;

  localparam logic [31:0] NOP = 32'h0000_0013;   // addi x0, x0, 0

  function automatic logic [31:0] enc_b(input logic [31:0] pc, input logic [31:0] tgt,
                                        input logic [2:0] f3 = 3'b000);
    logic [12:0] o;
    o = 13'(tgt - pc);
    return {o[12], o[10:5], 5'd11, 5'd10, f3, o[4:1], o[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] enc_jal(input logic [31:0] pc, input logic [31:0] tgt,
                                          input logic [4:0] rd);
    logic [20:0] o;
    o = 21'(tgt - pc);
    return {o[20], o[10:1], o[11], o[19:12], rd, 7'b1101111};
  endfunction

  function automatic logic [31:0] enc_jalr(input logic [4:0] rd, input logic [4:0] rs1);
    return {12'd0, rs1, 3'b000, rd, 7'b1100111};
  endfunction

  typedef struct {
    logic [31:0] src, dest;
    int          kind;        // 0 cond, 1 jal, 2 jalr
    bit          taken, link, ret;
  } ev_t;

  class lofat_ref;
    int unsigned depth;
    logic [31:0] entry [4], ext [4];
    int          calls [4];
    logic [15:0] bits  [4];
    int          len   [4];
    bit          ovf   [4];
    logic [63:0] pairs [4][$];
    int          cnt   [4][logic [15:0]];
    logic [15:0] order [4][$];
    logic [31:0] tgts  [4][$];
    logic [63:0] hashq [$];
    logic [63:0] metaq [$];
    int          n_new, n_rep, n_ovf, n_enter, n_exit;

    function new();
      depth = 0;
    endfunction

    function void hash_pairs(int l);
      foreach (pairs[l][i]) hashq.push_back(pairs[l][i]);
      pairs[l].delete();
    endfunction

    function void leave(int l);
      if (!ovf[l]) hash_pairs(l);
      pairs[l].delete();
      metaq.push_back({4'h1, 2'b00, 2'(l), 1'b0, 2'b00, 5'(order[l].size()), 3'b000,
                       5'(tgts[l].size()), 8'h00, entry[l]});
      foreach (order[l][i])
        metaq.push_back({4'h2, 12'h000, order[l][i], 24'h0, 8'(cnt[l][order[l][i]])});
      foreach (tgts[l][i])
        metaq.push_back({4'h3, 24'h0, 4'(i + 1), tgts[l][i]});
      n_exit++;
    endfunction

    function void reset_path(int l);
      bits[l] = 16'd1; len[l] = 0; ovf[l] = 0; pairs[l].delete();
    endfunction

    function void complete(int l, logic [15:0] id, bit tracked);
      if (!cnt[l].exists(id) || cnt[l][id] == 0) begin
        if (tracked) begin hash_pairs(l); n_new++; end
        else n_ovf++;
        if (order[l].size() < 16) begin cnt[l][id] = 1; order[l].push_back(id); end
      end else begin
        if (tracked) n_rep++; else n_ovf++;
        if (cnt[l][id] < 255) cnt[l][id]++;
      end
      reset_path(l);
    endfunction

    function void event_in(ev_t e);
      bit cand, pend, push;
      int lvl;
      logic [63:0] pr;
      pr   = {e.dest, e.src};
      cand = e.taken && (e.dest < e.src) && !e.link && !e.ret;
      lvl  = depth;
      while (lvl > 0 && !e.link && calls[lvl] == 0 && (e.dest < entry[lvl] || e.dest >= ext[lvl])) begin
        leave(lvl);
        lvl--;
      end
      depth = lvl;
      pend = cand && lvl > 0 && e.dest == entry[lvl];
      push = cand && !pend && lvl < 3;
      if (lvl == 0) hashq.push_back(pr);
      else if (ovf[lvl]) begin
        hashq.push_back(pr);
        if (pend) complete(lvl, 16'd0, 0);
      end else if (pend) begin
        pairs[lvl].push_back(pr);
        complete(lvl, bits[lvl], 1);
      end else begin
        int w, v;
        w = (e.kind == 2) ? 4 : 1;
        if (len[lvl] + w > 15) begin
          hash_pairs(lvl);
          ovf[lvl] = 1;
          hashq.push_back(pr);
        end else begin
          // only encoded targets enter the table
          if (e.kind == 2) begin
            v = 0;
            foreach (tgts[lvl][i]) if (tgts[lvl][i] == e.dest) v = i + 1;
            if (v == 0 && tgts[lvl].size() < 15) begin
              tgts[lvl].push_back(e.dest); v = tgts[lvl].size();
            end
          end else v = (e.kind == 0) ? int'(e.taken) : 1;
          bits[lvl] = (bits[lvl] << w) | 16'(v);
          len[lvl] += w;
          pairs[lvl].push_back(pr);
        end
      end
      if (push) begin
        depth = lvl + 1;
        entry[depth] = e.dest; ext[depth] = e.src + 4; calls[depth] = 0;
        reset_path(depth);
        cnt[depth].delete(); order[depth].delete(); tgts[depth].delete();
        n_enter++;
      end
      if (lvl > 0) begin
        if (e.link && calls[lvl] < 15) calls[lvl]++;
        else if (e.ret && calls[lvl] > 0) calls[lvl]--;
      end
    endfunction

    function void stop();
      for (int l = depth; l >= 1; l--) leave(l);
      depth = 0;
    endfunction
  endclass

endpackage
