// emoma_lookup -- EMOMA search pipeline: at most one external memory access per lookup.
//
// A search for key x proceeds as follows:
//   1. x is compared with every entry of the on-chip stash; a match ends the search with
//      the stashed value and no external access.
//   2. Otherwise the on-chip CBBF block h1(x) is read and bits g1(x)..gk(x) tested.
//   3. Negative: bucket h1(x) is read from external memory; positive: bucket h2(x).
//      The four cells are compared with x; a match returns the value, else a miss.
// Because the host only ever places an element in h1(x) when x tests negative, and adds
// every element placed in h2(x) to the CBBF, the one bucket read is always the right one.
//
// Pipeline (own choice; the steps themselves follow the EMOMA search procedure):
//   cycle 0  request accepted, key hashed, hashes registered (stage 1)
//   cycle 1  stash CAM and CBBF read in parallel, results registered (stage 2)
//   cycle 2  stage 2 decides: stash hit -> result queued with its value; otherwise one
//            read of bucket h1 or h2 is issued and the lookup queued to wait for it.
//   A result leaves rsp_* when it is at the head of the queue and, for a table access,
//   its bucket has returned. Results come out in request order. One lookup may enter per
//   cycle; the pipeline stalls only when the memory refuses a read or QDEPTH lookups are
//   outstanding. Minimum latency is 3 cycles for a stash hit, 3 + memory latency else.
//
// Interfaces: req_* is valid/ready. rsp_* has no back-pressure. mem_rd_* is valid/ready;
// mem_rsp_* returns read data in request order, one bucket per cycle, no back-pressure.
// The stash_* and cbbf_* ports drive the query ports of emoma_stash / emoma_cbbf, whose
// registered results come back on stash_hit/stash_value and cbbf_positive.
// Reset: synchronous, active low. `enable` low holds req_ready low (CBBF still clearing).
// Lint note: the matching cell index from emoma_bucket_match is not needed by a lookup
// (the host knows where each element sits), so bm_cell stays unused.
module emoma_lookup
  import emoma_pkg::*;
#(
  parameter int unsigned BUCKET_AW = 19,
  parameter int unsigned K         = 4,
  parameter int unsigned BLOCK_W   = 16,
  parameter int unsigned QDEPTH    = 32,
  localparam int unsigned G_W      = $clog2(BLOCK_W)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  enable,
  // lookup requests
  input  logic                  req_valid,
  output logic                  req_ready,
  input  key_t                  req_key,
  // lookup results
  output logic                  rsp_valid,
  output logic                  rsp_hit,
  output val_t                  rsp_value,
  output key_t                  rsp_key,
  output src_e                  rsp_src,
  // stash query port
  output logic                  stash_rd_en,
  output key_t                  stash_rd_key,
  input  logic                  stash_hit,
  input  val_t                  stash_value,
  // CBBF query port
  output logic                  cbbf_rd_en,
  output logic [BUCKET_AW-1:0]  cbbf_rd_addr,
  output logic [K-1:0][G_W-1:0] cbbf_rd_g,
  input  logic                  cbbf_positive,
  // external memory, read side
  output logic                  mem_rd_valid,
  input  logic                  mem_rd_ready,
  output logic [BUCKET_AW-1:0]  mem_rd_addr,
  input  logic                  mem_rsp_valid,
  input  bucket_t               mem_rsp_data
);

  localparam int unsigned QAW = $clog2(QDEPTH);

  typedef struct packed {
    src_e src;
    key_t key;
    val_t value;   // stash value, used when src == SRC_STASH
  } qent_t;

  // ---------------------------------------------------------------- stage 1: hash
  logic [BUCKET_AW-1:0]  hh1, hh2;
  logic [K-1:0][G_W-1:0] hg;

  emoma_hash #(.BUCKET_AW(BUCKET_AW), .K(K), .BLOCK_W(BLOCK_W)) u_hash (
    .key(req_key), .h1(hh1), .h2(hh2), .g(hg)
  );

  logic                  s1_valid;
  key_t                  s1_key;
  logic [BUCKET_AW-1:0]  s1_h1, s1_h2;
  logic [K-1:0][G_W-1:0] s1_g;

  logic                  s2_valid;
  key_t                  s2_key;
  logic [BUCKET_AW-1:0]  s2_h1, s2_h2;

  logic advance;      // stages 1 and 2 move this cycle
  logic s2_go;        // stage 2 leaves this cycle
  logic q_space;

  // ---------------------------------------------------------------- result queue
  qent_t           q_mem [QDEPTH];
  logic [QAW-1:0]  q_wr_q, q_rd_q;
  logic [QAW:0]    q_cnt_q;
  logic            q_push, q_pop;
  qent_t           q_in, q_head;

  bucket_t         d_mem [QDEPTH];
  logic [QAW-1:0]  d_wr_q, d_rd_q;
  logic [QAW:0]    d_cnt_q;
  logic            d_pop;

  assign q_space = (q_cnt_q != (QAW+1)'(QDEPTH));
  assign s2_go   = s2_valid && q_space && (stash_hit || mem_rd_ready);
  assign advance = !s2_valid || s2_go;

  assign req_ready = advance && enable;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s2_valid <= 1'b0;
    end else if (advance) begin
      s1_valid <= req_valid && req_ready;
      s2_valid <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (advance) begin
      s1_key <= req_key;
      s1_h1  <= hh1;
      s1_h2  <= hh2;
      s1_g   <= hg;
      s2_key <= s1_key;
      s2_h1  <= s1_h1;
      s2_h2  <= s1_h2;
    end
  end

  // ---------------------------------------------------------------- stage 1 -> on-chip queries
  assign stash_rd_en  = advance;
  assign stash_rd_key = s1_key;
  assign cbbf_rd_en   = advance;
  assign cbbf_rd_addr = s1_h1;
  assign cbbf_rd_g    = s1_g;

  // ---------------------------------------------------------------- stage 2: decide
  assign mem_rd_valid = s2_valid && q_space && !stash_hit;
  assign mem_rd_addr  = cbbf_positive ? s2_h2 : s2_h1;

  assign q_push = s2_go;
  always_comb begin
    q_in.key   = s2_key;
    q_in.value = stash_value;
    if (stash_hit)          q_in.src = SRC_STASH;
    else if (cbbf_positive) q_in.src = SRC_H2;
    else                    q_in.src = SRC_H1;
  end

  always_ff @(posedge clk) begin
    if (q_push) q_mem[q_wr_q] <= q_in;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q_wr_q  <= '0;
      q_rd_q  <= '0;
      q_cnt_q <= '0;
    end else begin
      if (q_push) q_wr_q <= q_wr_q + 1'b1;
      if (q_pop)  q_rd_q <= q_rd_q + 1'b1;
      q_cnt_q <= q_cnt_q + (QAW+1)'(q_push) - (QAW+1)'(q_pop);
    end
  end

  assign q_head = q_mem[q_rd_q];

  // ---------------------------------------------------------------- bucket data FIFO
  always_ff @(posedge clk) begin
    if (mem_rsp_valid) d_mem[d_wr_q] <= mem_rsp_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_wr_q  <= '0;
      d_rd_q  <= '0;
      d_cnt_q <= '0;
    end else begin
      if (mem_rsp_valid) d_wr_q <= d_wr_q + 1'b1;
      if (d_pop)         d_rd_q <= d_rd_q + 1'b1;
      d_cnt_q <= d_cnt_q + (QAW+1)'(mem_rsp_valid) - (QAW+1)'(d_pop);
    end
  end

  // ---------------------------------------------------------------- result
  logic bm_hit;
  val_t bm_value;
  logic [$clog2(CELLS)-1:0] bm_cell;

  emoma_bucket_match u_match (
    .key(q_head.key), .bucket(d_mem[d_rd_q]),
    .hit(bm_hit), .value(bm_value), .cell_idx(bm_cell)
  );

  logic head_is_stash;
  assign head_is_stash = (q_head.src == SRC_STASH);

  always_comb begin
    q_pop = 1'b0;
    d_pop = 1'b0;
    if (q_cnt_q != '0) begin
      if (head_is_stash) begin
        q_pop = 1'b1;
      end else if (d_cnt_q != '0) begin
        q_pop = 1'b1;
        d_pop = 1'b1;
      end
    end
  end

  assign rsp_valid = q_pop;
  assign rsp_key   = q_head.key;
  assign rsp_src   = q_head.src;
  assign rsp_hit   = head_is_stash ? 1'b1 : bm_hit;
  assign rsp_value = head_is_stash ? q_head.value : (bm_hit ? bm_value : '0);

  // ---------------------------------------------------------------- protocol checks
  // a held read request keeps its address
  property p_rd_stable;
    @(posedge clk) disable iff (!rst_n)
      (mem_rd_valid && !mem_rd_ready) |=> (mem_rd_valid && $stable(mem_rd_addr));
  endproperty
  a_rd_stable: assert property (p_rd_stable);

  // read data only arrives for an outstanding read, so the data FIFO never overflows
  a_no_data_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> (d_cnt_q != (QAW+1)'(QDEPTH)));

endmodule
