// tb_emoma_lookup -- search pipeline with behavioural stash, CBBF and external memory.
//
// 256 buckets, queue depth 8. A pool of keys is spread over the stash, the correct
// bucket of the table (h1 when the CBBF block says negative, h2 when positive) and
// nowhere. Every result is checked in request order for hit, value and source; every
// external read is checked for its bucket address; the number of reads must equal the
// number of lookups that missed the stash (one access per lookup, none on a stash hit).
// A second phase with an always-ready memory checks the rate: N back-to-back lookups
// finish within N + latency + pipeline depth cycles.
module tb_emoma_lookup;
  import emoma_tb_pkg::*;
  localparam int AW = 8, QD = 8, LAT = 6;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  logic [63:0] req_key = 0;
  logic rsp_valid, rsp_hit;
  logic [63:0] rsp_value, rsp_key;
  emoma_pkg::src_e rsp_src;
  logic st_en, cb_en, mem_rd_valid, mem_rd_ready, mem_rsp_valid;
  logic [63:0] st_key;
  logic st_hit;
  logic [63:0] st_val;
  logic [AW-1:0] cb_addr, mem_rd_addr;
  logic [3:0][3:0] cb_g;
  logic cb_pos;
  logic [511:0] mem_rsp_data;

  emoma_lookup #(.BUCKET_AW(AW), .QDEPTH(QD)) dut (
    .clk, .rst_n, .enable(1'b1), .req_valid, .req_ready, .req_key,
    .rsp_valid, .rsp_hit, .rsp_value, .rsp_key, .rsp_src,
    .stash_rd_en(st_en), .stash_rd_key(st_key), .stash_hit(st_hit), .stash_value(st_val),
    .cbbf_rd_en(cb_en), .cbbf_rd_addr(cb_addr), .cbbf_rd_g(cb_g), .cbbf_positive(cb_pos),
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rsp_valid, .mem_rsp_data);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", s, $time); end
  endtask

  // ---------------- behavioural on-chip memories
  logic [63:0] stash_kv [logic [63:0]];
  logic [15:0] blocks [2**AW];
  logic [511:0] table_m [2**AW];
  logic [63:0] stored [logic [63:0]];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st_hit <= 0; st_val <= 0;
    end else if (st_en) begin
      st_hit <= stash_kv.exists(st_key);
      st_val <= stash_kv.exists(st_key) ? stash_kv[st_key] : 64'h0;
    end
  end
  logic [15:0] cb_word;
  logic [3:0][3:0] cb_gq;
  always_ff @(posedge clk) if (cb_en) begin cb_word <= blocks[cb_addr]; cb_gq <= cb_g; end
  assign cb_pos = cb_word[cb_gq[0]] & cb_word[cb_gq[1]] & cb_word[cb_gq[2]] & cb_word[cb_gq[3]];

  // ---------------- external memory: in-order, fixed latency, random back-pressure
  bit   always_ready = 0;
  int   reads = 0;
  logic [AW-1:0] exp_addr [$];
  logic [511:0]  pipe_d [LAT];
  logic          pipe_v [LAT];
  logic rdy_rand = 1;
  always @(posedge clk) rdy_rand <= ($urandom_range(0, 3) != 0);
  assign mem_rd_ready = always_ready || rdy_rand;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      foreach (pipe_v[i]) pipe_v[i] <= 0;
    end else begin
      for (int i = LAT-1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
      pipe_v[0] <= mem_rd_valid && mem_rd_ready;
      pipe_d[0] <= table_m[mem_rd_addr];
      if (mem_rd_valid && mem_rd_ready) begin
        reads++;
        if (exp_addr.size() == 0) chk(0, "unexpected read");
        else chk(mem_rd_addr == exp_addr.pop_front(), "read address");
      end
    end
  end
  assign mem_rsp_valid = pipe_v[LAT-1];
  assign mem_rsp_data  = pipe_d[LAT-1];

  function automatic bit ref_pos(logic [63:0] k);
    int unsigned m = ref_gmask(k, 4);
    return (blocks[ref_h1(k, AW)] & 16'(m)) == 16'(m);
  endfunction

  // ---------------- expected responses
  typedef struct { logic [63:0] key; bit hit; logic [63:0] val; int src; } exp_t;
  exp_t exp_q [$];
  int n_rsp = 0, n_stash = 0, n_h1 = 0, n_h2 = 0, n_miss = 0;
  always @(posedge clk) if (rst_n && rsp_valid) begin
    exp_t e;
    n_rsp++;
    if (exp_q.size() == 0) chk(0, "unexpected response");
    else begin
      e = exp_q.pop_front();
      chk(rsp_key == e.key && rsp_hit == e.hit && rsp_src == emoma_pkg::src_e'(e.src) &&
          (!e.hit || rsp_value == e.val),
          $sformatf("response key=%h hit=%b/%b src=%0d/%0d", rsp_key, rsp_hit, e.hit, rsp_src, e.src));
    end
  end

  logic [63:0] pool [$];

  task automatic issue(logic [63:0] k);
    exp_t e;
    bit in_st, pos;
    in_st = stash_kv.exists(k);
    pos = ref_pos(k);
    e.key = k;
    e.hit = in_st || stored.exists(k);
    e.val = in_st ? stash_kv[k] : (stored.exists(k) ? stored[k] : 64'h0);
    e.src = in_st ? 0 : (pos ? 2 : 1);
    if (in_st) n_stash++; else if (pos) n_h2++; else n_h1++;
    if (!e.hit) n_miss++;
    if (!in_st) exp_addr.push_back(AW'(pos ? ref_h2(k, AW) : ref_h1(k, AW)));
    exp_q.push_back(e);
    @(negedge clk);
    req_valid = 1;
    req_key   = k;
    forever begin
      #1;
      if (req_ready) break;
      @(negedge clk);
    end
    @(posedge clk);
    #1 req_valid = 0;
  endtask

  initial begin
    int t0, nlook;
    foreach (blocks[i]) blocks[i] = 16'($urandom) | 16'($urandom) | 16'($urandom);
    foreach (table_m[i]) table_m[i] = '0;
    for (int n = 0; n < 400; n++) begin
      logic [63:0] k, v;
      int r;
      k = {$urandom, $urandom | 1};
      v = {$urandom, $urandom};
      r = $urandom_range(0, 9);
      pool.push_back(k);
      if (r < 2) stash_kv[k] = v;
      else if (r < 9) begin
        int b;
        b = ref_pos(k) ? ref_h2(k, AW) : ref_h1(k, AW);
        for (int c = 0; c < 4; c++) if (table_m[b][128*c +: 64] == 0) begin
          table_m[b][128*c +: 128] = {v, k};
          stored[k] = v;
          break;
        end
      end
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // phase 1: random traffic, random gaps, random memory back-pressure
    for (int n = 0; n < 3000; n++) begin
      issue(pool[$urandom_range(0, pool.size()-1)]);
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
    while (exp_q.size() != 0) @(posedge clk);
    chk(reads == n_h1 + n_h2, $sformatf("one access per non-stash lookup: %0d reads for %0d", reads, n_h1 + n_h2));
    // phase 2: rate, memory always ready
    always_ready = 1;
    nlook = 200;
    t0 = $time;
    for (int n = 0; n < nlook; n++) issue(pool[$urandom_range(0, pool.size()-1)]);
    while (exp_q.size() != 0) @(posedge clk);
    chk(($time - t0) / 10 <= nlook + LAT + 4, $sformatf("rate: %0d lookups in %0d cycles", nlook, ($time - t0) / 10));
    chk(n_stash > 0 && n_h1 > 0 && n_h2 > 0 && n_miss > 0, "all paths exercised");
    $display("lookups: stash %0d, h1 %0d, h2 %0d, misses %0d", n_stash, n_h1, n_h2, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
