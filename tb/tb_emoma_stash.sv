// tb_emoma_stash -- random stores, frees and queries against a shadow model of the 64
// slots (queries often use keys of live or already freed slots, which must miss); checks the one-cycle query latency, that outputs hold while rd_en is low, and
// the occupancy count.
module tb_emoma_stash;
  logic        clk = 0, rst_n = 0;
  logic        wr_en = 0, wr_valid = 0, rd_en = 0, hit;
  logic [5:0]  wr_idx = 0;
  logic [63:0] wr_key = 0, wr_value = 0, rd_key = 0, value;
  logic [6:0]  occ;
  int checks = 0, failures = 0;

  bit          m_v [64], m_w [64];
  logic [63:0] m_k [64], m_val [64];

  emoma_stash dut (.clk, .rst_n, .wr_en, .wr_idx, .wr_valid, .wr_key, .wr_value,
                   .rd_en, .rd_key, .hit, .value, .occupancy(occ));

  always #5 clk = ~clk;

  function automatic logic [63:0] pick_key();
    int i = $urandom_range(0, 63);
    if (m_w[i] && $urandom_range(0, 2) != 0) return m_k[i];   // live or freed key
    return {$urandom, $urandom};
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", s, $time); end
  endtask

  initial begin
    foreach (m_v[i]) begin m_v[i] = 0; m_w[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    chk(occ == 0, "empty after reset");
    for (int n = 0; n < 4000; n++) begin
      bit exp_hit;
      logic [63:0] exp_val, k;
      int cnt;
      exp_hit = 0;
      exp_val = 0;
      cnt = 0;
      // one write
      wr_en    <= ($urandom_range(0, 1) == 0);
      wr_idx   <= 6'($urandom_range(0, 63));
      wr_valid <= ($urandom_range(0, 3) != 0);
      wr_key   <= {$urandom, $urandom};
      wr_value <= {$urandom, $urandom};
      @(posedge clk);
      if (wr_en) begin
        m_v[wr_idx] = wr_valid;
        if (wr_valid) begin m_k[wr_idx] = wr_key; m_val[wr_idx] = wr_value; m_w[wr_idx] = 1; end
      end
      wr_en <= 0;
      // one query
      k = pick_key();
      foreach (m_v[i]) if (m_v[i] && m_k[i] == k) begin exp_hit = 1; exp_val = m_val[i]; end
      foreach (m_v[i]) cnt += int'(m_v[i]);
      rd_key <= k;
      rd_en  <= 1;
      @(posedge clk);
      rd_en  <= 0;
      rd_key <= {$urandom, $urandom};
      #1;
      chk(hit == exp_hit && (!exp_hit || value == exp_val), "query result after one cycle");
      chk(occ == 7'(cnt), "occupancy");
      @(posedge clk); #1;
      chk(hit == exp_hit && (!exp_hit || value == exp_val), "result held with rd_en low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
