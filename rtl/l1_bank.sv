// l1_bank: one bank of the VESPA L1 data cache (16 kB by default).
//
// VESPA splits each 8-way set of a 32 kB cache into two banks of 4 ways;
// each bank is a small 4-way array with its own row decoder and enable, so a
// superpage lookup can read only one of them. This module is that array:
// SETS sets of WAYS ways, each way holding a tag, a valid bit, a dirty bit and
// a LINE_BYTES-byte line. Geometry (64 sets, 4 ways, 64-byte lines) follows
// the paper; the separate write port, the dirty bit and the tag width (the
// 4 kB physical page number) are this design's choices.
//
// Interface and timing: with rd_en high the set rd_set is read at the clock
// edge; rd_tag/rd_valid/rd_dirty/rd_data show all ways of it from the next
// cycle and hold them until the next enabled read (a one-cycle SRAM read).
// A write (wr_en) updates way wr_way of set wr_set at the clock edge: the
// tag, valid and dirty bits when wr_meta is set, and the data bytes selected
// by wr_byte_en. The valid bits are cleared by reset; the rest is not.
module l1_bank #(
  parameter int unsigned SETS       = 64,
  parameter int unsigned WAYS       = 4,
  parameter int unsigned LINE_BYTES = 64,
  parameter int unsigned TAG_W      = 28,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned LINE_W = LINE_BYTES * 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // read
  input  logic                  rd_en,
  input  logic [SET_W-1:0]      rd_set,
  output logic [TAG_W-1:0]      rd_tag   [WAYS],
  output logic [WAYS-1:0]       rd_valid,
  output logic [WAYS-1:0]       rd_dirty,
  output logic [LINE_W-1:0]     rd_data  [WAYS],
  // write
  input  logic                  wr_en,
  input  logic [SET_W-1:0]      wr_set,
  input  logic [WAY_W-1:0]      wr_way,
  input  logic                  wr_meta,
  input  logic [TAG_W-1:0]      wr_tag,
  input  logic                  wr_valid,
  input  logic                  wr_dirty,
  input  logic [LINE_BYTES-1:0] wr_byte_en,
  input  logic [LINE_W-1:0]     wr_data
);
  logic [WAYS-1:0]   valid_q [SETS];
  logic [WAYS-1:0]   dirty_q [SETS];
  logic [TAG_W-1:0]  tag_q   [SETS][WAYS];
  logic [LINE_W-1:0] data_q  [SETS][WAYS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        dirty_q[s] <= '0;
      end
    end else if (wr_en && wr_meta) begin
      valid_q[wr_set][wr_way] <= wr_valid;
      dirty_q[wr_set][wr_way] <= wr_dirty;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (wr_meta) tag_q[wr_set][wr_way] <= wr_tag;
      for (int unsigned b = 0; b < LINE_BYTES; b++)
        if (wr_byte_en[b]) data_q[wr_set][wr_way][b*8 +: 8] <= wr_data[b*8 +: 8];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= '0;
      rd_dirty <= '0;
    end else if (rd_en) begin
      rd_valid <= valid_q[rd_set];
      rd_dirty <= dirty_q[rd_set];
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int unsigned w = 0; w < WAYS; w++) begin
        rd_tag[w]  <= tag_q[rd_set][w];
        rd_data[w] <= data_q[rd_set][w];
      end
    end
  end
endmodule
