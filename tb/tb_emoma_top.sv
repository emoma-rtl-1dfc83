// tb_emoma_top -- end-to-end test of the EMOMA core with a small table.
//
// 64 buckets x 4 cells (256 elements) and a 64 x 16-bit CBBF, so 4 on-chip bits per
// element as in the evaluated configuration; k = 4, 64-entry stash, T = 100, P = 0.99.
// The host model fills the table to 95 % load through the AXI port while a second thread
// keeps looking up already-inserted keys (each must always be found, with its value,
// even while being moved). Then every key and some absent keys are looked up with the
// source (stash / h1 / h2) checked against the host's copy and the number of external
// reads counted: exactly one per lookup that misses the stash. A dynamic phase replaces
// random elements (remove + insert) and checks again.
// Each mechanism must have happened at least once: the five insertion cases, evictions,
// locked elements, CBBF bits cleared by removal, stash / h1 /
// h2 / miss lookups, memory back-pressure and host writes pre-empting lookup reads.
// The step-4 relocation of elements that a new h2 insertion would turn into false
// positives is kept in the host model as a guard, but the case table never triggers it
// (checked to stay at zero).
module tb_emoma_top;
  import emoma_tb_pkg::*;
  localparam int AW = 6;
  localparam int CAP = 4 << AW;

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

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  // host write pre-empting a waiting lookup read
  int n_preempt = 0;
  always @(posedge clk) if (dut.u_lookup.mem_rd_valid && dut.hw_valid) n_preempt++;

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
    while (keys.size() < target && host.n_overflow == 0) begin
      longint unsigned k;
      k = new_key();
      host.insert(k, {$urandom, $urandom});
      keys.push_back(k);
    end
    stop_bg = 1;
    host.drain();
    ld = host.stored_count();
    $display("filled: %0d keys, %0d in table (load %0d%%), %0d in stash, max stash %0d",
             keys.size(), ld, ld * 100 / CAP, host.stash_count(), host.max_stash);
    chk(host.n_overflow == 0, "no stash overflow while filling to 95%");
    full_check("after fill");
    // dynamic phase: replacements at full load
    for (int n = 0; n < 150 && host.n_overflow == 0; n++) begin
      int i;
      longint unsigned k;
      i = $urandom_range(0, keys.size()-1);
      k = new_key();
      host.remove(keys[i]);
      keys.delete(i);
      host.insert(k, {$urandom, $urandom});
      keys.push_back(k);
    end
    chk(host.n_overflow == 0, "no stash overflow during replacements");
    full_check("after replacements");
    // mechanisms
    $display("cases %0d %0d %0d %0d %0d, iterations %0d, evictions %0d, FP moves %0d, locked seen %0d, bits cleared %0d, nonterminating %0d",
             host.n_case[1], host.n_case[2], host.n_case[3], host.n_case[4], host.n_case[5],
             host.n_iter, host.n_evict, host.n_fp_moved, host.n_locked_seen, host.n_bit_cleared, host.n_nonterm);
    $display("lookups %0d: stash %0d h1 %0d h2 %0d miss %0d; memory refused %0d cycles; host writes pre-empting reads %0d",
             host.lk_done, host.lk_stash, host.lk_h1, host.lk_h2, host.lk_miss, u_mem.refused, n_preempt);
    for (int c = 1; c <= 5; c++) chk(host.n_case[c] > 0, $sformatf("insertion case %0d happened", c));
    chk(host.n_evict > 0, "evictions happened");
    // Table 2 only sends x to h2 when x is already positive (no new bits) or when it
    // creates no false positives, so step-4 relocations are never needed: expect none.
    chk(host.n_fp_moved == 0, "no false-positive relocations needed under the case table");
    chk(host.n_locked_seen > 0, "locked elements met");
    chk(host.n_bit_cleared > 0, "CBBF bits cleared by removal");
    chk(host.lk_stash > 0 && host.lk_h1 > 0 && host.lk_h2 > 0 && host.lk_miss > 0, "all lookup outcomes");
    chk(u_mem.refused > 0, "memory back-pressure");
    chk(n_preempt > 0, "host write pre-empted a lookup read");
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
