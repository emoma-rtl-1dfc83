// emoma_cbbf -- on-chip bit image of the counting block Bloom filter (CBBF).
//
// The CBBF records which elements sit in their second bucket h2(x). Block h1(x) holds the
// bits of x; a query reads that one BLOCK_W-bit word and is positive when the k bits
// g1(x)..gk(x) are all one. A positive sends the lookup to bucket h2(x), a negative to
// h1(x). The counters that make the filter deletable live off chip with the host; the
// host recomputes a block from its counters and rewrites the whole word here.
// Sizes follow the FPGA prototype: 2^19 words of 16 bits, k = 4, a simple dual-port RAM
// (write port on the host bus, read port on the lookup path).
//
// Write port: wr_en writes wr_data to word wr_addr.
// Query port: when rd_en is high, word rd_addr is read and the positions rd_g are
// captured; one cycle later `positive` reflects them. While rd_en is low the result holds.
// Reset: a synchronous, active-low reset starts a sweep that clears one word per cycle
// (2^ADDR_W cycles); init_done rises when it ends. Host writes are ignored meanwhile.
// The clearing sweep is this design's own choice.
module emoma_cbbf #(
  parameter int unsigned ADDR_W  = 19,
  parameter int unsigned BLOCK_W = 16,
  parameter int unsigned K       = 4,
  localparam int unsigned G_W    = $clog2(BLOCK_W)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // write port (host)
  input  logic                 wr_en,
  input  logic [ADDR_W-1:0]    wr_addr,
  input  logic [BLOCK_W-1:0]   wr_data,
  // query port (lookup)
  input  logic                 rd_en,
  input  logic [ADDR_W-1:0]    rd_addr,
  input  logic [K-1:0][G_W-1:0] rd_g,
  output logic                 positive,
  output logic [BLOCK_W-1:0]   rd_block,
  output logic                 init_done
);

  logic [BLOCK_W-1:0] mem [2**ADDR_W];

  logic              clearing_q;
  logic [ADDR_W-1:0] clr_addr_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      clearing_q <= 1'b1;
      clr_addr_q <= '0;
    end else if (clearing_q) begin
      clr_addr_q <= clr_addr_q + 1'b1;
      if (&clr_addr_q) clearing_q <= 1'b0;
    end
  end

  assign init_done = !clearing_q;

  // single write port, shared by the clearing sweep and the host
  always_ff @(posedge clk) begin
    if (clearing_q && rst_n) begin
      mem[clr_addr_q] <= '0;
    end else if (wr_en && rst_n) begin
      mem[wr_addr] <= wr_data;
    end
  end

  logic [K-1:0][G_W-1:0] g_q;
  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_block <= mem[rd_addr];
      g_q      <= rd_g;
    end
  end

  always_comb begin
    positive = 1'b1;
    for (int i = 0; i < K; i++) positive &= rd_block[g_q[i]];
  end

endmodule
