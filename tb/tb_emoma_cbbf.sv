// tb_emoma_cbbf -- CBBF block memory at 2^6 blocks: checks the clearing sweep after reset
// (init_done after 2^ADDR_W cycles, all blocks zero), then random block writes and
// queries against a shadow copy: positive exactly when all k selected bits are one,
// one cycle after the read, held while rd_en is low.
module tb_emoma_cbbf;
  localparam int AW = 6;
  logic             clk = 0, rst_n = 0;
  logic             wr_en = 0, rd_en = 0, positive, init_done;
  logic [AW-1:0]    wr_addr = 0, rd_addr = 0;
  logic [15:0]      wr_data = 0, rd_block;
  logic [3:0][3:0]  rd_g = 0;
  logic [15:0]      shadow [2**AW];
  int checks = 0, failures = 0, cyc = 0;

  emoma_cbbf #(.ADDR_W(AW)) dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr,
                                 .rd_g, .positive, .rd_block, .init_done);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", s, $time); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    while (!init_done) begin @(posedge clk); cyc++; end
    chk(cyc >= 2**AW - 1 && cyc <= 2**AW + 1, $sformatf("clear sweep length %0d", cyc));
    foreach (shadow[i]) shadow[i] = 16'h0;
    // every block reads zero after the sweep
    for (int a = 0; a < 2**AW; a++) begin
      rd_addr <= AW'(a); rd_g <= '0; rd_en <= 1;
      @(posedge clk); rd_en <= 0; #1;
      chk(rd_block == 16'h0 && !positive, "cleared block");
    end
    for (int n = 0; n < 3000; n++) begin
      logic [15:0] w;
      bit exp;
      if ($urandom_range(0, 1) == 0) begin
        w = 16'($urandom) | 16'($urandom);           // dense-ish blocks
        wr_en <= 1; wr_addr <= AW'($urandom_range(0, 2**AW-1)); wr_data <= w;
        @(posedge clk);
        shadow[wr_addr] = wr_data;
        wr_en <= 0;
      end
      rd_addr <= AW'($urandom_range(0, 2**AW-1));
      for (int i = 0; i < 4; i++) rd_g[i] <= 4'($urandom);
      rd_en <= 1;
      @(posedge clk);
      exp = 1;
      for (int i = 0; i < 4; i++) exp &= shadow[rd_addr][rd_g[i]];
      rd_en <= 0;
      rd_g  <= '0;
      #1;
      chk(positive == exp && rd_block == shadow[rd_addr], "query");
      @(posedge clk); #1;
      chk(positive == exp, "held");
    end
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
