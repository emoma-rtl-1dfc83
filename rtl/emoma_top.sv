// emoma_top -- EMOMA exact-match lookup core (single-table configuration).
//
// EMOMA keeps a two-choice cuckoo hash table with four-cell buckets in external memory
// and guarantees that every lookup reads at most one bucket from it. An on-chip counting
// block Bloom filter (CBBF) says which of the two buckets to read, and an on-chip stash
// catches elements that are in flight during an insertion. The trick that makes the
// filter exact for stored elements: its block-select hash is the table's first hash h1,
// so the host can find and move away every element a new filter entry would turn into a
// false positive.
//
// This top wires together
//   emoma_lookup      search pipeline (stash -> CBBF -> one bucket read -> compare)
//   emoma_stash       64-entry key/value CAM
//   emoma_cbbf        2^19 x 16-bit on-chip Bloom-filter blocks
//   emoma_axil_ctrl   AXI4-Lite port through which the host writes CBBF, stash and buckets
// and an arbiter for the single external memory port: a pending host bucket write wins
// over lookup reads (own choice; insertions are rare and cost lookup bandwidth).
//
// External memory port: mem_req_* is valid/ready with mem_req_we = 1 for a bucket write;
// read data returns on mem_rsp_* in request order, one bucket per cycle, no back-pressure.
// The host processor that runs insertion and removal, and the DRAM with its controller,
// are outside this core. Reset is synchronous and active low; after reset the CBBF is
// cleared (2^BUCKET_AW cycles) before the first lookup is accepted.
// Lint note: the CBBF's raw block output (cb_block) is left unconnected here; the
// lookup only needs the registered positive/negative answer.
module emoma_top
  import emoma_pkg::*;
#(
  parameter int unsigned BUCKET_AW     = 19,
  parameter int unsigned K             = 4,
  parameter int unsigned BLOCK_W       = 16,
  parameter int unsigned STASH_ENTRIES = 64,
  parameter int unsigned QDEPTH        = 32,
  parameter int unsigned AXIL_AW       = 8,
  localparam int unsigned SIW          = $clog2(STASH_ENTRIES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // lookups
  input  logic                 req_valid,
  output logic                 req_ready,
  input  key_t                 req_key,
  output logic                 rsp_valid,
  output logic                 rsp_hit,
  output val_t                 rsp_value,
  output key_t                 rsp_key,
  output src_e                 rsp_src,
  // host bus
  input  logic                 s_axil_awvalid,
  output logic                 s_axil_awready,
  input  logic [AXIL_AW-1:0]   s_axil_awaddr,
  input  logic                 s_axil_wvalid,
  output logic                 s_axil_wready,
  input  logic [31:0]          s_axil_wdata,
  input  logic [3:0]           s_axil_wstrb,
  output logic                 s_axil_bvalid,
  input  logic                 s_axil_bready,
  output logic [1:0]           s_axil_bresp,
  input  logic                 s_axil_arvalid,
  output logic                 s_axil_arready,
  input  logic [AXIL_AW-1:0]   s_axil_araddr,
  output logic                 s_axil_rvalid,
  input  logic                 s_axil_rready,
  output logic [31:0]          s_axil_rdata,
  output logic [1:0]           s_axil_rresp,
  // external memory (one bucket per access)
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic                 mem_req_we,
  output logic [BUCKET_AW-1:0] mem_req_addr,
  output bucket_t              mem_req_wdata,
  input  logic                 mem_rsp_valid,
  input  bucket_t              mem_rsp_rdata,
  // status
  output logic                 init_done,
  output logic [SIW:0]         stash_occupancy
);

  localparam int unsigned G_W = $clog2(BLOCK_W);

  // stash
  logic                 st_wr_en, st_wr_valid;
  logic [SIW-1:0]       st_wr_idx;
  key_t                 st_wr_key, st_rd_key;
  val_t                 st_wr_value, st_value;
  logic                 st_rd_en, st_hit;

  // CBBF
  logic                 cb_wr_en, cb_rd_en, cb_pos;
  logic [BUCKET_AW-1:0] cb_wr_addr, cb_rd_addr;
  logic [BLOCK_W-1:0]   cb_wr_data, cb_block;
  logic [K-1:0][G_W-1:0] cb_rd_g;

  // memory sides
  logic                 lk_rd_valid, lk_rd_ready;
  logic [BUCKET_AW-1:0] lk_rd_addr;
  logic                 hw_valid, hw_ready;
  logic [BUCKET_AW-1:0] hw_addr;
  bucket_t              hw_data;

  emoma_stash #(.ENTRIES(STASH_ENTRIES)) u_stash (
    .clk, .rst_n,
    .wr_en(st_wr_en), .wr_idx(st_wr_idx), .wr_valid(st_wr_valid),
    .wr_key(st_wr_key), .wr_value(st_wr_value),
    .rd_en(st_rd_en), .rd_key(st_rd_key), .hit(st_hit), .value(st_value),
    .occupancy(stash_occupancy)
  );

  emoma_cbbf #(.ADDR_W(BUCKET_AW), .BLOCK_W(BLOCK_W), .K(K)) u_cbbf (
    .clk, .rst_n,
    .wr_en(cb_wr_en), .wr_addr(cb_wr_addr), .wr_data(cb_wr_data),
    .rd_en(cb_rd_en), .rd_addr(cb_rd_addr), .rd_g(cb_rd_g),
    .positive(cb_pos), .rd_block(cb_block), .init_done(init_done)
  );

  emoma_lookup #(.BUCKET_AW(BUCKET_AW), .K(K), .BLOCK_W(BLOCK_W), .QDEPTH(QDEPTH)) u_lookup (
    .clk, .rst_n, .enable(init_done),
    .req_valid, .req_ready, .req_key,
    .rsp_valid, .rsp_hit, .rsp_value, .rsp_key, .rsp_src,
    .stash_rd_en(st_rd_en), .stash_rd_key(st_rd_key), .stash_hit(st_hit), .stash_value(st_value),
    .cbbf_rd_en(cb_rd_en), .cbbf_rd_addr(cb_rd_addr), .cbbf_rd_g(cb_rd_g), .cbbf_positive(cb_pos),
    .mem_rd_valid(lk_rd_valid), .mem_rd_ready(lk_rd_ready), .mem_rd_addr(lk_rd_addr),
    .mem_rsp_valid, .mem_rsp_data(mem_rsp_rdata)
  );

  emoma_axil_ctrl #(.ADDR_W(AXIL_AW), .BUCKET_AW(BUCKET_AW), .BLOCK_W(BLOCK_W),
                    .STASH_IDX_W(SIW)) u_ctrl (
    .clk, .rst_n,
    .s_axil_awvalid, .s_axil_awready, .s_axil_awaddr, .s_axil_wvalid, .s_axil_wready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_bvalid, .s_axil_bready, .s_axil_bresp,
    .s_axil_arvalid, .s_axil_arready, .s_axil_araddr, .s_axil_rvalid, .s_axil_rready,
    .s_axil_rdata, .s_axil_rresp,
    .cbbf_init_done(init_done), .stash_occupancy(stash_occupancy),
    .cbbf_wr_en(cb_wr_en), .cbbf_wr_addr(cb_wr_addr), .cbbf_wr_data(cb_wr_data),
    .stash_wr_en(st_wr_en), .stash_wr_idx(st_wr_idx), .stash_wr_valid(st_wr_valid),
    .stash_wr_key(st_wr_key), .stash_wr_value(st_wr_value),
    .mem_wr_valid(hw_valid), .mem_wr_ready(hw_ready), .mem_wr_addr(hw_addr), .mem_wr_data(hw_data)
  );

  // external memory arbiter: host writes first
  always_comb begin
    mem_req_valid = hw_valid || lk_rd_valid;
    mem_req_we    = hw_valid;
    mem_req_addr  = hw_valid ? hw_addr : lk_rd_addr;
    mem_req_wdata = hw_data;
    hw_ready      = mem_req_ready;
    lk_rd_ready   = mem_req_ready && !hw_valid;
  end

endmodule
