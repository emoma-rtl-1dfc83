// emoma_stash -- the on-chip stash: a small content-addressable memory of (key, value).
//
// The stash holds elements that are waiting to be placed in the cuckoo table or that
// could not be placed. Every lookup checks it first, so an element moved out of the table
// during an insertion is never lost to a concurrent search. The prototype used a
// 64-entry, 64-bit-key CAM with its write port on the host bus and its read port on the
// lookup path; this module is that CAM with the values held alongside the keys.
//
// Write port: wr_en writes slot wr_idx; wr_valid = 1 stores (wr_key, wr_value), 0 frees
// the slot. The host chooses slots; there is no free list in hardware.
// Query port: when rd_en is high, rd_key is compared with all valid entries in parallel;
// hit and value are registered and appear one cycle later. While rd_en is low the outputs
// hold (the lookup pipeline uses rd_en as its stall).
// occupancy counts valid slots. Reset (synchronous, active low) frees all slots.
module emoma_stash
  import emoma_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  // write port (host)
  input  logic             wr_en,
  input  logic [IDX_W-1:0] wr_idx,
  input  logic             wr_valid,
  input  key_t             wr_key,
  input  val_t             wr_value,
  // query port (lookup)
  input  logic             rd_en,
  input  key_t             rd_key,
  output logic             hit,
  output val_t             value,
  output logic [IDX_W:0]   occupancy
);

  logic [ENTRIES-1:0] valid_q;
  key_t               keys_q [ENTRIES];
  val_t               vals_q [ENTRIES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else if (wr_en) begin
      valid_q[wr_idx] <= wr_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && wr_valid) begin
      keys_q[wr_idx] <= wr_key;
      vals_q[wr_idx] <= wr_value;
    end
  end

  // parallel match over all entries
  logic match_any;
  val_t match_val;
  always_comb begin
    match_any = 1'b0;
    match_val = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && keys_q[i] == rd_key) begin
        match_any = 1'b1;
        match_val = vals_q[i];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hit   <= 1'b0;
      value <= '0;
    end else if (rd_en) begin
      hit   <= match_any;
      value <= match_val;
    end
  end

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < ENTRIES; i++) occupancy += (IDX_W+1)'(valid_q[i]);
  end

endmodule
