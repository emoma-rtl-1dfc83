// emoma_bucket_match -- compares a key with the cells of one bucket.
//
// A lookup reads exactly one bucket (four cells of key + value) from external memory;
// this block decides whether the key is among them and returns its value. All cells are
// compared in parallel. Key 0 marks an empty cell and never matches. If two cells held
// the same key (which a correct host never writes) the lowest cell wins.
// Combinational.
module emoma_bucket_match
  import emoma_pkg::*;
(
  input  key_t                       key,
  input  bucket_t                    bucket,
  output logic                       hit,
  output val_t                       value,
  output logic [$clog2(CELLS)-1:0]   cell_idx
);

  always_comb begin
    cell_t c;
    hit   = 1'b0;
    value = '0;
    cell_idx  = '0;
    for (int i = CELLS-1; i >= 0; i--) begin
      c = get_cell(bucket, i);
      if (key != EMPTY_KEY && c.key == key) begin
        hit   = 1'b1;
        value = c.value;
        cell_idx  = i[$clog2(CELLS)-1:0];
      end
    end
  end

endmodule
