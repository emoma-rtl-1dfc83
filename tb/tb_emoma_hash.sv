// tb_emoma_hash -- checks emoma_hash against published splitmix64 output values and
// against the reference model for random keys (h1, h2 and the four g positions).
module tb_emoma_hash;
  import emoma_tb_pkg::*;

  logic [63:0]          key;
  logic [18:0]          h1, h2;
  logic [3:0][3:0]      g;
  int checks = 0, failures = 0;

  emoma_hash dut (.key(key), .h1(h1), .h2(h2), .g(g));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s key=%h", what, key);
    end
  endtask

  initial begin
    // splitmix64 with state 0 yields E220A8397B1DCDAF, then 6E789E6AA1B965F4: mix(golden)
    // and mix(2*golden). key = 0 gives mix(SEED1) = mix(golden).
    key = 64'd0; #1;
    check(h1 == 19'(64'hE220A8397B1DCDAF), "h1 known vector 1");
    check(g[0] == 4'hE && g[1] == 4'h2 && g[2] == 4'h2 && g[3] == 4'h0, "g known vector 1");
    key = 64'h9E3779B97F4A7C15 ^ 64'h3C6EF372FE94F82A; #1;
    check(h1 == 19'(64'h6E789E6AA1B965F4), "h1 known vector 2");
    for (int n = 0; n < 2000; n++) begin
      key = {$urandom, $urandom}; #1;
      check(h1 == 19'(ref_h1(key, 19)), "h1");
      check(h2 == 19'(ref_h2(key, 19)), "h2");
      for (int i = 0; i < 4; i++) check(g[i] == 4'(ref_g(key, i)), "g");
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
