// tb_emoma_top_full -- the EMOMA core at its full default size: 2^19 buckets of four
// 64-bit key / 64-bit value cells (512-bit bucket words), a 2^19 x 16-bit CBBF with k = 4
// and a 64-entry stash. The top is instantiated with no parameter overrides.
//
// After reset the CBBF clearing sweep (one word per cycle, 2^19 cycles) must finish and
// raise init_done. The host model then inserts a few hundred random keys through the
// AXI4-Lite port (nearly all land by case 2, the table being almost empty), and every key
// plus some absent keys is looked up with the result and source checked. Exactly one
// external bucket read must be issued per lookup that is not answered by the stash.
// The filling and stash stress of a near-full table are covered by tb_emoma_top on a
// small table; this bench shows that the default-size build elaborates, initialises
// and answers correctly.
module tb_emoma_top_full;
  localparam int AW = 19;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rsp_valid, rsp_hit;
  logic [63:0] req_key, rsp_value, rsp_key;
  emoma_pkg::src_e rsp_src;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arready, rvalid;
  logic [7:0] awaddr;
  logic [31:0] wdata, rdata;
  logic [1:0] bresp, rresp;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid, init_done;
  logic [AW-1:0] mem_req_addr;
  logic [511:0] mem_req_wdata, mem_rsp_rdata;
  logic [6:0] stash_occ;

  emoma_top dut (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_key, .rsp_valid, .rsp_hit, .rsp_value, .rsp_key, .rsp_src,
    .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_awaddr(awaddr),
    .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_wdata(wdata), .s_axil_wstrb(4'hF),
    .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_bresp(bresp),
    .s_axil_arvalid(1'b0), .s_axil_arready(arready), .s_axil_araddr(8'h0),
    .s_axil_rvalid(rvalid), .s_axil_rready(1'b1), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata, .init_done, .stash_occupancy(stash_occ));

  emoma_mem_model u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(mem_rsp_valid),
    .rsp_rdata(mem_rsp_rdata));

  emoma_host_model host (
    .clk, .rst_n, .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .bvalid, .bready,
    .req_valid, .req_ready, .req_key, .rsp_valid, .rsp_hit, .rsp_value, .rsp_key,
    .rsp_src(rsp_src));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  longint unsigned keys [$];

  initial begin
    longint unsigned k;
    int r0, n_nonstash, t0;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    t0 = 0;
    while (!init_done) begin @(posedge clk); t0++; end
    chk(t0 >= (1 << AW), $sformatf("CBBF clearing sweep took %0d cycles", t0));
    @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      k = {$urandom, $urandom} | 64'h1;
      host.insert(k, {$urandom, $urandom});
      keys.push_back(k);
    end
    host.drain();
    r0 = u_mem.reads;
    foreach (keys[i]) host.lookup(keys[i], 1);
    for (int i = 0; i < 100; i++) host.lookup({$urandom, $urandom} | 64'h1, 1);
    host.drain();
    repeat (20) @(posedge clk);
    n_nonstash = keys.size() + 100;
    foreach (host.sv[i]) if (host.sv[i]) n_nonstash--;
    chk(u_mem.reads - r0 == n_nonstash,
        $sformatf("%0d external reads for %0d lookups outside the stash", u_mem.reads - r0, n_nonstash));
    chk(host.placement_errors() == 0, "every element where the CBBF points");
    chk(host.stored_count() + host.stash_count() == keys.size(), "all keys stored");
    $display("inserted %0d: cases %0d %0d %0d %0d %0d; lookups stash %0d h1 %0d h2 %0d miss %0d",
             keys.size(), host.n_case[1], host.n_case[2], host.n_case[3], host.n_case[4], host.n_case[5],
             host.lk_stash, host.lk_h1, host.lk_h2, host.lk_miss);
    chk(host.lk_h1 >= keys.size() * 9 / 10 && host.lk_miss > 0, "lookups found in h1 and absent keys missed");
    checks += host.checks;
    failures += host.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + host.checks, failures + host.failures);
    $finish;
  end
endmodule
