// tb_emoma_axil_ctrl -- host port: register write/read-back, CBBF and stash write
// commands (one pulse each, right index and data), and bucket writes whose B response
// must wait until the memory port accepts the write (memory held busy for a random time).
module tb_emoma_axil_ctrl;
  logic clk = 0, rst_n = 0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic arvalid = 0, arready, rvalid, rready = 0;
  logic [7:0] awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [1:0] bresp, rresp;
  logic init_done = 1;
  logic [6:0] occ = 7'd23;
  logic cb_en, st_en, st_valid, mw_valid, mw_ready = 0;
  logic [18:0] cb_addr, mw_addr;
  logic [15:0] cb_data;
  logic [5:0] st_idx;
  logic [63:0] st_key, st_val;
  logic [511:0] mw_data;

  emoma_axil_ctrl dut (
    .clk, .rst_n,
    .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_awaddr(awaddr),
    .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_wdata(wdata), .s_axil_wstrb(4'hF),
    .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_bresp(bresp),
    .s_axil_arvalid(arvalid), .s_axil_arready(arready), .s_axil_araddr(araddr),
    .s_axil_rvalid(rvalid), .s_axil_rready(rready), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .cbbf_init_done(init_done), .stash_occupancy(occ),
    .cbbf_wr_en(cb_en), .cbbf_wr_addr(cb_addr), .cbbf_wr_data(cb_data),
    .stash_wr_en(st_en), .stash_wr_idx(st_idx), .stash_wr_valid(st_valid),
    .stash_wr_key(st_key), .stash_wr_value(st_val),
    .mem_wr_valid(mw_valid), .mem_wr_ready(mw_ready), .mem_wr_addr(mw_addr), .mem_wr_data(mw_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", s, $time); end
  endtask

  // monitors
  int n_cb = 0, n_st = 0, n_mw = 0, mem_busy = 0;
  logic [18:0] last_cb_addr; logic [15:0] last_cb_data;
  logic [5:0] last_st_idx; logic last_st_valid; logic [63:0] last_st_key, last_st_val;
  logic [18:0] last_mw_addr; logic [511:0] last_mw_data;
  always @(posedge clk) begin
    if (cb_en) begin n_cb++; last_cb_addr <= cb_addr; last_cb_data <= cb_data; end
    if (st_en) begin n_st++; last_st_idx <= st_idx; last_st_valid <= st_valid; last_st_key <= st_key; last_st_val <= st_val; end
    if (mw_valid && mw_ready) begin n_mw++; last_mw_addr <= mw_addr; last_mw_data <= mw_data; end
  end
  // memory port: busy for mem_busy cycles after a request appears
  int busy_cnt = 0;
  always @(posedge clk) begin
    if (mw_valid && !mw_ready) begin
      busy_cnt <= busy_cnt + 1;
      if (busy_cnt + 1 >= mem_busy) mw_ready <= 1;
    end else begin
      busy_cnt <= 0;
      mw_ready <= 0;
    end
  end
  int b_early = 0;
  always @(posedge clk) if (bvalid && mw_valid) b_early++;

  task automatic axw(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    awvalid = 1; awaddr = a; wvalid = 1; wdata = d;
    forever begin #1; if (awready) break; @(negedge clk); end
    @(posedge clk); #1;
    awvalid = 0; wvalid = 0; bready = 1;
    forever begin if (bvalid) break; @(negedge clk); #1; end
    @(posedge clk); #1 bready = 0;
  endtask

  task automatic axr(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    arvalid = 1; araddr = a;
    forever begin #1; if (arready) break; @(negedge clk); end
    @(posedge clk); #1 arvalid = 0; rready = 1;
    forever begin if (rvalid) break; @(negedge clk); #1; end
    d = rdata;
    @(posedge clk); #1 rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    logic [511:0] b;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 40; n++) begin
      logic [18:0] idx;
      logic [63:0] k, v;
      logic [15:0] cw;
      int nb;
      idx = 19'($urandom); k = {$urandom, $urandom}; v = {$urandom, $urandom}; cw = 16'($urandom);
      axw(8'h04, 32'(idx));
      axw(8'h08, 32'(cw));
      axw(8'h10, k[31:0]); axw(8'h14, k[63:32]);
      axw(8'h18, v[31:0]); axw(8'h1C, v[63:32]);
      axr(8'h04, d); chk(d == 32'(idx), "INDEX read back");
      axr(8'h14, d); chk(d == k[63:32], "KEY_HI read back");
      axr(8'h18, d); chk(d == v[31:0], "VALUE_LO read back");
      // CBBF write command
      nb = n_cb;
      axw(8'h0C, 32'h1);
      chk(n_cb == nb + 1 && last_cb_addr == idx && last_cb_data == cw, "CBBF write");
      // stash store and free
      nb = n_st;
      axw(8'h0C, 32'h2);
      chk(n_st == nb + 1 && last_st_idx == idx[5:0] && last_st_valid && last_st_key == k && last_st_val == v, "stash store");
      axw(8'h0C, 32'h4);
      chk(n_st == nb + 2 && last_st_idx == idx[5:0] && !last_st_valid, "stash free");
      // bucket write with a busy memory
      for (int w = 0; w < 16; w++) begin b[32*w +: 32] = $urandom; axw(8'h40 + 8'(4*w), b[32*w +: 32]); end
      axr(8'h5C, d); chk(d == b[32*7 +: 32], "BUCKET word read back");
      mem_busy = $urandom_range(0, 12);
      nb = n_mw;
      axw(8'h0C, 32'h8);
      chk(n_mw == nb + 1 && last_mw_addr == idx && last_mw_data == b, "bucket write");
    end
    axr(8'h00, d); chk(d[0] == 1'b1 && d[15:8] == 8'd23 && d[1] == 1'b0, "STATUS");
    chk(b_early == 0, "no B response before the bucket write was accepted");
    chk(bresp == 2'b00, "BRESP OKAY");
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
