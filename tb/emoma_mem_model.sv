// emoma_mem_model -- behavioural model of the external table memory (DRAM behind its
// controller) for the EMOMA testbenches. Not synthesizable.
//
// One access moves one 512-bit bucket. Requests are valid/ready; ready drops at random
// for BP_PCT percent of the cycles to exercise back-pressure. Reads return in request
// order LAT cycles after acceptance, on rsp_valid/rsp_rdata. Storage is sparse
// (associative array), so 2^19 buckets cost nothing until written; unwritten buckets
// read as all zero (four empty cells). Counts reads, writes and refused cycles.
module emoma_mem_model #(
  parameter int unsigned BUCKET_AW = 19,
  parameter int unsigned LAT       = 8,
  parameter int unsigned BP_PCT    = 20
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_we,
  input  logic [BUCKET_AW-1:0] req_addr,
  input  logic [511:0]         req_wdata,
  output logic                 rsp_valid,
  output logic [511:0]         rsp_rdata
);

  logic [511:0] mem [int unsigned];
  int reads = 0, writes = 0, refused = 0;

  logic [511:0] pd [LAT];
  logic         pv [LAT];

  always @(posedge clk) req_ready <= ($urandom_range(0, 99) >= BP_PCT);

  always @(posedge clk) begin
    if (!rst_n) begin
      foreach (pv[i]) pv[i] <= 1'b0;
    end else begin
      for (int i = LAT-1; i > 0; i--) begin
        pv[i] <= pv[i-1];
        pd[i] <= pd[i-1];
      end
      pv[0] <= req_valid && req_ready && !req_we;
      pd[0] <= mem.exists(int'(req_addr)) ? mem[int'(req_addr)] : 512'd0;
      if (req_valid && !req_ready) refused++;
      if (req_valid && req_ready) begin
        if (req_we) begin
          mem[int'(req_addr)] = req_wdata;
          writes++;
        end else begin
          reads++;
        end
      end
    end
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp_rdata = pd[LAT-1];

endmodule
