// tb_emoma_bucket_match -- random buckets, with the searched key placed in a random cell
// or absent, and other cells often holding near misses (the key with one bit flipped);
// checks hit, value and cell index, and that key 0 (empty) never matches.
module tb_emoma_bucket_match;
  logic [63:0]  key;
  logic [511:0] bucket;
  logic         hit;
  logic [63:0]  value;
  logic [1:0]   cidx;
  int checks = 0, failures = 0;

  emoma_bucket_match dut (.key(key), .bucket(bucket), .hit(hit), .value(value), .cell_idx(cidx));

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int c;
      logic [63:0] v;
      for (int w = 0; w < 16; w++) bucket[32*w +: 32] = $urandom;
      key = {$urandom, $urandom | 1};
      c = $urandom_range(0, 4);                 // 4 = key absent
      v = {$urandom, $urandom};
      for (int i = 0; i < 4; i++) if (bucket[128*i +: 64] == key) bucket[128*i] ^= 1'b1;
      // near misses: other cells hold the key with one bit flipped
      for (int i = 0; i < 4; i++)
        if ($urandom_range(0, 1) == 0) bucket[128*i +: 64] = key ^ (64'd1 << $urandom_range(0, 63));
      if (c < 4) begin
        bucket[128*c +: 64]      = key;
        bucket[128*c + 64 +: 64] = v;
      end
      if (n % 10 == 0) begin                    // empty-cell rule
        key = 64'd0;
        bucket[128*(n%4) +: 64] = 64'd0;
        c = 4;
      end
      #1;
      checks++;
      if (c < 4) begin
        if (!(hit && value == v && cidx == 2'(c))) begin
          failures++;
          $display("FAIL hit=%b cell=%0d/%0d value=%h/%h", hit, cidx, c, value, v);
        end
      end else if (hit) begin
        failures++;
        $display("FAIL false hit key=%h", key);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
