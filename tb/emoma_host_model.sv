// emoma_host_model -- behavioural model of the host processor that maintains an EMOMA
// table, plus a lookup traffic generator and checker. Not synthesizable.
//
// EMOMA inserts and removes in software. This model is that software: it keeps a copy of
// the table, the 4-bit CBBF counters and the stash contents, runs the insertion procedure
// and pushes every change into the core through its AXI4-Lite port:
//   step 1  the new element goes into a free stash slot;
//   step 2  a bucket is chosen by the five cases (x false positive -> h2; room in h1 ->
//           h1; room in h2 and no new false positives -> h2; new false positives -> h1;
//           both full -> random);
//   step 3  a cell: a random empty one, else among unlocked elements, with probability P
//           one that creates the fewest locked elements when moved, else any;
//   step 4  the evicted element goes to the stash (and leaves the CBBF if it sat in h2);
//           when placing in h2, elements of bucket h1(x) that would become false positives
//           go to the stash too; x enters the CBBF (if h2), its cell, and leaves the stash;
//   step 5  while the stash is not empty and fewer than T iterations ran, pick a random
//           stash element and repeat from step 2.
// Hardware-facing order: an element is written to the stash before it leaves the table,
// and leaves the stash only after its bucket is written, so lookups running at the same
// time always find it.
// Removal: stash slot freed, or its cell cleared and (if in h2) CBBF counters decremented.
// Lookups: `lookup` issues one search and queues the expected result. With chk_src = 1 the
// source (stash / h1 / h2) is checked too; with chk_src = 0 (lookups racing an insertion)
// only hit and value are checked.
module emoma_host_model
  import emoma_tb_pkg::*;
#(
  parameter int unsigned BUCKET_AW  = 19,
  parameter int unsigned K          = 4,
  parameter int unsigned STASH      = 64,
  parameter int unsigned T          = 100,
  parameter int unsigned P_PERMILLE = 990
) (
  input  logic         clk,
  input  logic         rst_n,
  // AXI4-Lite master
  output logic         awvalid,
  input  logic         awready,
  output logic [7:0]   awaddr,
  output logic         wvalid,
  input  logic         wready,
  output logic [31:0]  wdata,
  input  logic         bvalid,
  output logic         bready,
  // lookup port of the core
  output logic         req_valid,
  input  logic         req_ready,
  output logic [63:0]  req_key,
  input  logic         rsp_valid,
  input  logic         rsp_hit,
  input  logic [63:0]  rsp_value,
  input  logic [63:0]  rsp_key,
  input  logic [1:0]   rsp_src
);

  localparam int unsigned NB = 1 << BUCKET_AW;

  // ---------------------------------------------------------------- shadow state
  longint unsigned tkey [int unsigned];     // bucket*4+cell -> key (absent = empty)
  longint unsigned tval [int unsigned];
  int unsigned     thash [int unsigned];    // 1 or 2: which hash placed it
  byte unsigned    cnt [int unsigned];      // block*16+bit -> counter
  longint unsigned skey [STASH];
  longint unsigned sval [STASH];
  bit              sv   [STASH];
  longint unsigned where_val [longint unsigned];   // every stored key -> value

  // ---------------------------------------------------------------- statistics
  int n_case [6];
  int n_iter = 0, n_evict = 0, n_fp_moved = 0, n_locked_seen = 0, n_bit_cleared = 0;
  int n_inserts = 0, n_removes = 0, n_nonterm = 0, max_stash = 0, n_overflow = 0;
  int checks = 0, failures = 0;
  int lk_issued = 0, lk_stash = 0, lk_h1 = 0, lk_h2 = 0, lk_miss = 0, lk_done = 0;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s t=%0t", s, $time);
    end
  endtask

  initial begin
    awvalid = 0; wvalid = 0; bready = 0; awaddr = 0; wdata = 0;
    req_valid = 0; req_key = 0;
    foreach (sv[i]) sv[i] = 0;
    foreach (n_case[i]) n_case[i] = 0;
  end

  // ---------------------------------------------------------------- AXI access
  task automatic axw(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    awvalid = 1; awaddr = a; wvalid = 1; wdata = d;
    forever begin #1; if (awready) break; @(negedge clk); end
    @(posedge clk); #1;
    awvalid = 0; wvalid = 0; bready = 1;
    forever begin if (bvalid) break; @(negedge clk); #1; end
    @(posedge clk); #1 bready = 0;
  endtask

  // ---------------------------------------------------------------- CBBF helpers
  function automatic int unsigned block_bits(int unsigned b);
    int unsigned m = 0;
    for (int i = 0; i < 16; i++)
      if (cnt.exists(b*16 + i) && cnt[b*16 + i] != 0) m |= (1 << i);
    return m;
  endfunction

  function automatic bit pos_with(longint unsigned x, int unsigned bits);
    int unsigned g = ref_gmask(x, K);
    return (bits & g) == g;
  endfunction

  function automatic bit cbbf_pos(longint unsigned x);
    return pos_with(x, block_bits(ref_h1(x, BUCKET_AW)));
  endfunction

  task automatic write_block(int unsigned b);
    axw(8'h04, b);
    axw(8'h08, block_bits(b));
    axw(8'h0C, 32'h1);
  endtask

  task automatic cbbf_add(longint unsigned x);
    int unsigned b = ref_h1(x, BUCKET_AW);
    for (int i = 0; i < K; i++) begin
      int unsigned p = b*16 + ref_g(x, i);
      if (!cnt.exists(p)) cnt[p] = 0;
      cnt[p] = cnt[p] + 1;
      chk(cnt[p] < 16, "CBBF counter overflow");
    end
    write_block(b);
  endtask

  task automatic cbbf_del(longint unsigned x);
    int unsigned b = ref_h1(x, BUCKET_AW);
    for (int i = 0; i < K; i++) begin
      int unsigned p = b*16 + ref_g(x, i);
      chk(cnt.exists(p) && cnt[p] != 0, "CBBF counter underflow");
      cnt[p] = cnt[p] - 1;
      if (cnt[p] == 0) n_bit_cleared++;
    end
    write_block(b);
  endtask

  // ---------------------------------------------------------------- table helpers
  function automatic bit has_empty(int unsigned b);
    for (int c = 0; c < 4; c++) if (!tkey.exists(b*4 + c)) return 1;
    return 0;
  endfunction

  // elements in bucket h1(x), placed there by h1, that would test positive once x is in
  function automatic int fp_victims(longint unsigned x, ref int unsigned cells[$]);
    int unsigned b = ref_h1(x, BUCKET_AW);
    int unsigned bits = block_bits(b) | ref_gmask(x, K);
    cells.delete();
    for (int c = 0; c < 4; c++) begin
      int unsigned id = b*4 + c;
      if (tkey.exists(id) && thash[id] == 1 && tkey[id] != x && pos_with(tkey[id], bits))
        cells.push_back(id);
    end
    return cells.size();
  endfunction

  // an element in its h2 bucket that stays positive without its own counts is locked
  function automatic bit is_locked(int unsigned id);
    longint unsigned y;
    int unsigned b, bits;
    if (thash[id] != 2) return 0;
    y = tkey[id];
    b = ref_h1(y, BUCKET_AW);
    bits = 0;
    for (int i = 0; i < 16; i++) begin
      int own = 0;
      for (int j = 0; j < K; j++)
        if (ref_g(y, j) == i) own++;
      if (cnt.exists(b*16 + i) && cnt[b*16 + i] > own) bits |= (1 << i);
    end
    return pos_with(y, bits);
  endfunction

  // locked elements created by moving the element in cell id
  function automatic int move_cost(int unsigned id);
    int unsigned dummy[$];
    if (thash[id] == 2) return 0;
    return fp_victims(tkey[id], dummy);
  endfunction

  task automatic write_bucket(int unsigned b);
    for (int c = 0; c < 4; c++) begin
      longint unsigned k = tkey.exists(b*4 + c) ? tkey[b*4 + c] : 0;
      longint unsigned v = tval.exists(b*4 + c) ? tval[b*4 + c] : 0;
      axw(8'h40 + 8'(16*c),      k[31:0]);
      axw(8'h40 + 8'(16*c + 4),  k[63:32]);
      axw(8'h40 + 8'(16*c + 8),  v[31:0]);
      axw(8'h40 + 8'(16*c + 12), v[63:32]);
    end
    axw(8'h04, b);
    axw(8'h0C, 32'h8);
  endtask

  // ---------------------------------------------------------------- stash helpers
  function automatic int stash_count();
    int n = 0;
    foreach (sv[i]) n += int'(sv[i]);
    return n;
  endfunction

  task automatic stash_put(longint unsigned k, longint unsigned v, output int slot);
    slot = -1;
    for (int i = 0; i < STASH; i++) if (!sv[i]) begin slot = i; break; end
    if (slot < 0) begin
      n_overflow++;
      return;
    end
    sv[slot] = 1; skey[slot] = k; sval[slot] = v;
    axw(8'h04, slot);
    axw(8'h10, k[31:0]); axw(8'h14, k[63:32]);
    axw(8'h18, v[31:0]); axw(8'h1C, v[63:32]);
    axw(8'h0C, 32'h2);
    if (stash_count() > max_stash) max_stash = stash_count();
  endtask

  task automatic stash_free(int slot);
    sv[slot] = 0;
    axw(8'h04, slot);
    axw(8'h0C, 32'h4);
  endtask

  // ---------------------------------------------------------------- one placement
  task automatic place(int slot);
    longint unsigned x = skey[slot], v = sval[slot];
    int unsigned b1 = ref_h1(x, BUCKET_AW), b2 = ref_h2(x, BUCKET_AW), bsel;
    int unsigned fpc[$], cand[$], best[$];
    int sel, cs, mincost, csel, ys;
    bit fp, e1, e2, cfp;
    fp  = cbbf_pos(x);
    e1  = has_empty(b1);
    e2  = has_empty(b2);
    cfp = fp_victims(x, fpc) > 0;
    // step 2: bucket selection
    if (fp)              begin sel = 2; cs = 1; end
    else if (e1)         begin sel = 1; cs = 2; end
    else if (e2 && !cfp) begin sel = 2; cs = 3; end
    else if (cfp)        begin sel = 1; cs = 4; end
    else                 begin sel = ($urandom_range(0, 1) == 0) ? 1 : 2; cs = 5; end
    n_case[cs]++;
    bsel = (sel == 1) ? b1 : b2;
    n_iter++;
    // step 3: cell selection
    csel = -1;
    for (int c = 0; c < 4; c++) if (!tkey.exists(bsel*4 + c)) cand.push_back(bsel*4 + c);
    if (cand.size() != 0) begin
      csel = int'(cand[$urandom_range(0, cand.size()-1)]);
    end else begin
      for (int c = 0; c < 4; c++) begin
        if (is_locked(bsel*4 + c)) n_locked_seen++;
        else cand.push_back(bsel*4 + c);
      end
      if (cand.size() == 0) return;            // every element locked: x stays in the stash
      if ($urandom_range(0, 999) < P_PERMILLE) begin
        mincost = 1000;
        foreach (cand[i]) if (move_cost(cand[i]) < mincost) mincost = move_cost(cand[i]);
        foreach (cand[i]) if (move_cost(cand[i]) == mincost) best.push_back(cand[i]);
        csel = int'(best[$urandom_range(0, best.size()-1)]);
      end else begin
        csel = int'(cand[$urandom_range(0, cand.size()-1)]);
      end
    end
    // step 4: evict, move false positives, insert
    if (tkey.exists(csel)) begin
      longint unsigned y = tkey[csel], yv = tval[csel];
      int unsigned yh = thash[csel];
      stash_put(y, yv, ys);
      if (ys < 0) return;
      tkey.delete(csel); tval.delete(csel); thash.delete(csel);
      n_evict++;
      if (yh == 2) cbbf_del(y);
    end
    if (sel == 2) begin
      void'(fp_victims(x, fpc));
      foreach (fpc[i]) begin
        stash_put(tkey[fpc[i]], tval[fpc[i]], ys);
        if (ys < 0) return;
        tkey.delete(fpc[i]); tval.delete(fpc[i]); thash.delete(fpc[i]);
        n_fp_moved++;
      end
      cbbf_add(x);
    end
    tkey[csel] = x; tval[csel] = v; thash[csel] = sel;
    write_bucket(bsel);
    if (sel == 2 && fpc.size() != 0 && b1 != bsel) write_bucket(b1);
    stash_free(slot);
  endtask

  // ---------------------------------------------------------------- public operations
  task automatic insert(longint unsigned x, longint unsigned v);
    int slot, it;
    stash_put(x, v, slot);
    if (slot < 0) return;
    where_val[x] = v;
    n_inserts++;
    it = 0;
    while (stash_count() != 0 && it < T) begin
      int picks[$];
      if (it == 0) begin
        place(slot);
      end else begin
        foreach (sv[i]) if (sv[i]) picks.push_back(i);
        place(picks[$urandom_range(0, picks.size()-1)]);
      end
      it++;
    end
    if (stash_count() != 0) n_nonterm++;
  endtask

  task automatic remove(longint unsigned x);
    n_removes++;
    where_val.delete(x);
    foreach (sv[i]) if (sv[i] && skey[i] == x) begin
      stash_free(i);
      return;
    end
    for (int h = 1; h <= 2; h++) begin
      int unsigned b = (h == 1) ? ref_h1(x, BUCKET_AW) : ref_h2(x, BUCKET_AW);
      for (int c = 0; c < 4; c++) begin
        int unsigned id = b*4 + c;
        if (tkey.exists(id) && tkey[id] == x && thash[id] == h) begin
          tkey.delete(id); tval.delete(id); thash.delete(id);
          write_bucket(b);
          if (h == 2) cbbf_del(x);
          return;
        end
      end
    end
  endtask

  // every stored element must sit where the CBBF sends its search (Theorem 1)
  function automatic int placement_errors();
    int e = 0;
    foreach (tkey[id]) begin
      bit p = cbbf_pos(tkey[id]);
      if (p != (thash[id] == 2)) e++;
    end
    return e;
  endfunction

  function automatic int stored_count();
    return tkey.num();
  endfunction

  // ---------------------------------------------------------------- lookups
  typedef struct { longint unsigned key; bit hit; longint unsigned val; int src; bit chk_src; } exp_t;
  exp_t exp_q [$];

  task automatic lookup(longint unsigned k, bit chk_src);
    exp_t e;
    bit in_st = 0;
    e.key = k;
    e.val = 0;
    foreach (sv[i]) if (sv[i] && skey[i] == k) begin in_st = 1; e.val = sval[i]; end
    e.hit = in_st || where_val.exists(k);
    if (!in_st && e.hit) e.val = where_val[k];
    e.src = in_st ? 0 : (cbbf_pos(k) ? 2 : 1);
    e.chk_src = chk_src;
    exp_q.push_back(e);
    lk_issued++;
    @(negedge clk);
    req_valid = 1;
    req_key   = k;
    forever begin #1; if (req_ready) break; @(negedge clk); end
    @(posedge clk);
    #1 req_valid = 0;
  endtask

  always @(posedge clk) if (rst_n && rsp_valid) begin
    exp_t e;
    lk_done++;
    case (rsp_src)
      2'd0: lk_stash++;
      2'd1: lk_h1++;
      default: lk_h2++;
    endcase
    if (!rsp_hit) lk_miss++;
    if (exp_q.size() == 0) chk(0, "unexpected lookup result");
    else begin
      e = exp_q.pop_front();
      chk(rsp_key == e.key && rsp_hit == e.hit && (!e.hit || rsp_value == e.val),
          $sformatf("lookup %h: hit %b exp %b value %h exp %h", rsp_key, rsp_hit, e.hit, rsp_value, e.val));
      if (e.chk_src) chk(int'(rsp_src) == e.src, $sformatf("lookup %h source %0d exp %0d", rsp_key, rsp_src, e.src));
    end
  end

  task automatic drain();
    while (exp_q.size() != 0) @(posedge clk);
  endtask

endmodule
