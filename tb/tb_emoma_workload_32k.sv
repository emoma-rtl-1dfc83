// tb_emoma_workload_32k -- the 32K-element table of the evaluation, filled towards 95 %.
//
// 2^13 buckets x 4 cells = 32,768 elements, CBBF 2^13 x 16 bits (4 bits per element),
// k = 4, t = 100, P = 0.99, 64-entry stash. The host model inserts random keys through
// the AXI4-Lite port, with lookups of inserted keys running alongside, until 95 % of
// the cells are used or a budget of FILL_CYCLES clock cycles is spent (every host
// update costs tens of AXI writes, and once an element lingers in the stash each
// insertion runs the full t rounds, so the whole fill does not fit a short simulation;
// the load reached is printed). It then looks up every key and some absent ones, checks
// one external read per lookup outside the stash, that every element sits where the
// CBBF sends its lookup and that no key was lost. It reports the largest stash occupancy
// seen; simulations of this configuration at 95 % needed at most 9 entries, and an
// overflow of the 64 entries counts as a failure.
module tb_emoma_workload_32k;
  import emoma_tb_pkg::*;
  localparam int AW = 13;
  localparam int CAP = 4 << AW;
  localparam int FILL_CYCLES = 15_000_000;

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

  emoma_top #(.BUCKET_AW(AW)) dut (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_key, .rsp_valid, .rsp_hit, .rsp_value, .rsp_key, .rsp_src,
    .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_awaddr(awaddr),
    .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_wdata(wdata), .s_axil_wstrb(4'hF),
    .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_bresp(bresp),
    .s_axil_arvalid(1'b0), .s_axil_arready(arready), .s_axil_araddr(8'h0),
    .s_axil_rvalid(rvalid), .s_axil_rready(1'b1), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata, .init_done, .stash_occupancy(stash_occ));

  emoma_mem_model #(.BUCKET_AW(AW), .LAT(8), .BP_PCT(20)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(mem_rsp_valid),
    .rsp_rdata(mem_rsp_rdata));

  emoma_host_model #(.BUCKET_AW(AW)) host (
    .clk, .rst_n, .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .bvalid, .bready,
    .req_valid, .req_ready, .req_key, .rsp_valid, .rsp_hit, .rsp_value, .rsp_key,
    .rsp_src(rsp_src));

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  longint unsigned keys [$];
  bit busy = 0, stop_bg = 0;

  function automatic longint unsigned new_key();
    return {$urandom, $urandom} | 64'h1;
  endfunction

  // full check: every key, plus absent keys, source checked, reads counted
  task automatic full_check(string phase);
    int r0, n_nonstash;
    host.drain();
    r0 = u_mem.reads;
    n_nonstash = 0;
    foreach (keys[i]) begin
      host.lookup(keys[i], 1);
    end
    for (int i = 0; i < 40; i++) host.lookup(new_key(), 1);
    host.drain();
    repeat (20) @(posedge clk);
    n_nonstash = keys.size() + 40;
    foreach (host.sv[i]) if (host.sv[i]) n_nonstash--;
    chk(u_mem.reads - r0 == n_nonstash,
        $sformatf("%s: %0d external reads for %0d lookups outside the stash", phase, u_mem.reads - r0, n_nonstash));
    chk(host.placement_errors() == 0, $sformatf("%s: every element where the CBBF points", phase));
  endtask

  initial begin
    int target, ld;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    wait (init_done);
    @(posedge clk);
    // background lookups of committed keys while inserting
    fork
      begin
        while (!stop_bg) begin
          if (keys.size() > 0) host.lookup(keys[$urandom_range(0, keys.size()-1)], 0);
          else @(posedge clk);
          repeat ($urandom_range(0, 20)) @(posedge clk);
        end
      end
    join_none
    // fill to 95 %
    target = CAP * 95 / 100;
    while (keys.size() < target && host.n_overflow == 0 && cyc < FILL_CYCLES) begin
      longint unsigned k;
      k = new_key();
      host.insert(k, {$urandom, $urandom});
      keys.push_back(k);
      if (keys.size() % 4096 == 0)
        $display("%0d keys at cycle %0d: iterations %0d, stash %0d, max stash %0d",
                 keys.size(), cyc, host.n_iter, host.stash_count(), host.max_stash);
    end
    stop_bg = 1;
    host.drain();
    ld = host.stored_count();
    $display("filled: %0d keys, %0d in table (load %0d%%), %0d in stash, max stash %0d",
             keys.size(), ld, ld * 100 / CAP, host.stash_count(), host.max_stash);
    chk(host.n_overflow == 0, "no stash overflow while filling to 95%");
    full_check("after fill");
    $display("32K-element table at %0d%% load: max stash %0d (64 available), cases %0d %0d %0d %0d %0d, iterations %0d",
             ld * 100 / CAP, host.max_stash, host.n_case[1], host.n_case[2], host.n_case[3], host.n_case[4], host.n_case[5], host.n_iter);
    chk(ld + host.stash_count() == keys.size(), "every inserted key held");
    checks += host.checks;
    failures += host.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + host.checks, failures + host.failures);
    $finish;
  end
endmodule
