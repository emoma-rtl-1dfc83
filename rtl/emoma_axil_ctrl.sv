// emoma_axil_ctrl -- host control port of the EMOMA core (AXI4-Lite slave, 32-bit data).
//
// EMOMA searches in hardware but inserts and removes in software: a host processor runs
// the insertion procedure, keeps the CBBF counters and a copy of the table, and pushes
// every change into the hardware through this port. It can write
//   * one 16-bit CBBF block (the Bloom-filter bits recomputed from its counters),
//   * one stash slot (store a key/value, or free the slot),
//   * one whole 512-bit bucket of the external table.
// The register map is this design's own:
//   0x00 STATUS    (ro) bit0 CBBF cleared after reset, bit1 bucket write pending,
//                       bits[15:8] stash occupancy
//   0x04 INDEX     (rw) CBBF block / stash slot / bucket index used by CMD
//   0x08 CBBF_DATA (rw) bits[BLOCK_W-1:0]
//   0x0C CMD       (wo) bit0 write CBBF_DATA to block INDEX
//                       bit1 store KEY/VALUE in stash slot INDEX
//                       bit2 free stash slot INDEX
//                       bit3 write BUCKET to external bucket INDEX
//   0x10/0x14 KEY low/high, 0x18/0x1C VALUE low/high            (rw)
//   0x40..0x7C BUCKET words 0..15, word i = bucket bits [32i+31:32i] (rw)
// Timing: a write is taken when AW and W are both valid and no response is pending; the
// register or the CBBF/stash write port changes in the next cycle. A bucket-write command
// holds its B response until the memory port has accepted the write, so the host never
// has to poll. Reads return in the cycle after AR. Byte strobes are ignored (all
// registers are written as whole words); BRESP/RRESP are always OKAY.
// Lint note: s_axil_wstrb is part of the AXI4-Lite port but unused, since every register
// is written as a whole word.
module emoma_axil_ctrl
  import emoma_pkg::*;
#(
  parameter int unsigned ADDR_W       = 8,
  parameter int unsigned BUCKET_AW    = 19,
  parameter int unsigned BLOCK_W      = 16,
  parameter int unsigned STASH_IDX_W  = 6
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // AXI4-Lite slave
  input  logic                    s_axil_awvalid,
  output logic                    s_axil_awready,
  input  logic [ADDR_W-1:0]       s_axil_awaddr,
  input  logic                    s_axil_wvalid,
  output logic                    s_axil_wready,
  input  logic [31:0]             s_axil_wdata,
  input  logic [3:0]              s_axil_wstrb,
  output logic                    s_axil_bvalid,
  input  logic                    s_axil_bready,
  output logic [1:0]              s_axil_bresp,
  input  logic                    s_axil_arvalid,
  output logic                    s_axil_arready,
  input  logic [ADDR_W-1:0]       s_axil_araddr,
  output logic                    s_axil_rvalid,
  input  logic                    s_axil_rready,
  output logic [31:0]             s_axil_rdata,
  output logic [1:0]              s_axil_rresp,
  // status inputs
  input  logic                    cbbf_init_done,
  input  logic [STASH_IDX_W:0]    stash_occupancy,
  // CBBF write port
  output logic                    cbbf_wr_en,
  output logic [BUCKET_AW-1:0]    cbbf_wr_addr,
  output logic [BLOCK_W-1:0]      cbbf_wr_data,
  // stash write port
  output logic                    stash_wr_en,
  output logic [STASH_IDX_W-1:0]  stash_wr_idx,
  output logic                    stash_wr_valid,
  output key_t                    stash_wr_key,
  output val_t                    stash_wr_value,
  // bucket write to external memory
  output logic                    mem_wr_valid,
  input  logic                    mem_wr_ready,
  output logic [BUCKET_AW-1:0]    mem_wr_addr,
  output bucket_t                 mem_wr_data
);

  localparam int unsigned WORDS = BUCKET_W / 32;

  logic [31:0]          index_q;
  logic [BLOCK_W-1:0]   cbbf_data_q;
  key_t                 key_q;
  val_t                 val_q;
  logic [WORDS-1:0][31:0] bucket_q;

  logic b_pend_q;
  logic wr_take;
  logic [ADDR_W-1:0] waddr;

  assign wr_take        = s_axil_awvalid && s_axil_wvalid && !b_pend_q;
  assign s_axil_awready = wr_take;
  assign s_axil_wready  = wr_take;
  assign s_axil_bvalid  = b_pend_q && !mem_wr_valid;
  assign s_axil_bresp   = 2'b00;
  assign waddr          = s_axil_awaddr;

  // registers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      index_q     <= '0;
      cbbf_data_q <= '0;
      key_q       <= '0;
      val_q       <= '0;
      bucket_q    <= '0;
    end else if (wr_take) begin
      if (waddr >= ADDR_W'('h40) && waddr < ADDR_W'('h80)) begin
        bucket_q[waddr[5:2]] <= s_axil_wdata;
      end else begin
        case (waddr[6:0])
          7'h04: index_q     <= s_axil_wdata;
          7'h08: cbbf_data_q <= s_axil_wdata[BLOCK_W-1:0];
          7'h10: key_q[31:0]  <= s_axil_wdata;
          7'h14: key_q[63:32] <= s_axil_wdata;
          7'h18: val_q[31:0]  <= s_axil_wdata;
          7'h1C: val_q[63:32] <= s_axil_wdata;
          default: ;
        endcase
      end
    end
  end

  // commands
  logic cmd_hit;
  assign cmd_hit = wr_take && (waddr == ADDR_W'('h0C));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cbbf_wr_en     <= 1'b0;
      stash_wr_en    <= 1'b0;
      stash_wr_valid <= 1'b0;
      mem_wr_valid   <= 1'b0;
      b_pend_q       <= 1'b0;
    end else begin
      cbbf_wr_en  <= cmd_hit && s_axil_wdata[0];
      stash_wr_en <= cmd_hit && (s_axil_wdata[1] || s_axil_wdata[2]);
      stash_wr_valid <= s_axil_wdata[1];
      if (cmd_hit && s_axil_wdata[3]) mem_wr_valid <= 1'b1;
      else if (mem_wr_ready)          mem_wr_valid <= 1'b0;
      if (wr_take)                              b_pend_q <= 1'b1;
      else if (s_axil_bvalid && s_axil_bready)  b_pend_q <= 1'b0;
    end
  end

  assign cbbf_wr_addr   = index_q[BUCKET_AW-1:0];
  assign cbbf_wr_data   = cbbf_data_q;
  assign stash_wr_idx   = index_q[STASH_IDX_W-1:0];
  assign stash_wr_key   = key_q;
  assign stash_wr_value = val_q;
  assign mem_wr_addr    = index_q[BUCKET_AW-1:0];
  assign mem_wr_data    = bucket_q;

  // reads
  logic [31:0] rdata_d;
  always_comb begin
    rdata_d = '0;
    if (s_axil_araddr >= ADDR_W'('h40) && s_axil_araddr < ADDR_W'('h80)) begin
      rdata_d = bucket_q[s_axil_araddr[5:2]];
    end else begin
      case (s_axil_araddr[6:0])
        7'h00: rdata_d = {16'd0, 8'(stash_occupancy), 6'd0, mem_wr_valid, cbbf_init_done};
        7'h04: rdata_d = index_q;
        7'h08: rdata_d = 32'(cbbf_data_q);
        7'h10: rdata_d = key_q[31:0];
        7'h14: rdata_d = key_q[63:32];
        7'h18: rdata_d = val_q[31:0];
        7'h1C: rdata_d = val_q[63:32];
        default: rdata_d = '0;
      endcase
    end
  end

  assign s_axil_arready = !s_axil_rvalid;
  assign s_axil_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else if (s_axil_arvalid && s_axil_arready) begin
      s_axil_rvalid <= 1'b1;
      s_axil_rdata  <= rdata_d;
    end else if (s_axil_rready) begin
      s_axil_rvalid <= 1'b0;
    end
  end

  // AXI rule: a response, once valid, stays valid until taken
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_axil_bvalid && !s_axil_bready) |=> s_axil_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_axil_rvalid && !s_axil_rready) |=> (s_axil_rvalid && $stable(s_axil_rdata)));

endmodule
