// nvm_bank_array: the cell array of one bank, with its row decoder and the
// local column multiplexer that sits in front of the sense amplifiers.
//
// In a DRAM bank the whole row (1 KB per chip) is sensed into the row buffer
// and the column multiplexer comes after it. Because an NVM read does not
// destroy the cells, this design moves the column multiplexer in front of the
// sense amplifiers: an access names a row and a segment of RB_BYTES, and only
// that segment is sensed. The array is therefore built as LANES memories of
// one 8-byte block each (lane k holds bytes 8k..8k+7 of every segment), all
// indexed by {row, segment}; indexing is the row decoder and the segment
// select is the local column multiplexer. Subarrays, cell currents and the
// analog sensing are not modelled: the cells are plain storage.
//
// Read: rd_en with rd_row/rd_seg, the segment appears on rd_data on the next
// clock (synchronous read). Write: wr_en writes the 8-byte blocks whose bit is
// set in wr_lane_mask (block-level write-back of dirty data), same clock.
// Contents are not reset: the memory is non-volatile.
module nvm_bank_array #(
  parameter int unsigned ROWS     = 16384, // rows per bank
  parameter int unsigned SEGS     = 16,    // ROW_BYTES / RB_BYTES
  parameter int unsigned LANES    = 8,     // RB_BYTES / 8
  parameter int unsigned BLK_BITS = 64,    // one burst per chip: 8 beats of x8
  localparam int unsigned ROW_W   = (ROWS  > 1) ? $clog2(ROWS)  : 1,
  localparam int unsigned SEG_W   = (SEGS  > 1) ? $clog2(SEGS)  : 1
) (
  input  logic                          clk,
  input  logic                          rd_en,
  input  logic [ROW_W-1:0]              rd_row,
  input  logic [SEG_W-1:0]              rd_seg,
  output logic [LANES-1:0][BLK_BITS-1:0] rd_data,
  input  logic                          wr_en,
  input  logic [ROW_W-1:0]              wr_row,
  input  logic [SEG_W-1:0]              wr_seg,
  input  logic [LANES-1:0]              wr_lane_mask,
  input  logic [LANES-1:0][BLK_BITS-1:0] wr_data
);
  localparam int unsigned DEPTH = ROWS * SEGS;
  localparam int unsigned IDX_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [IDX_W-1:0] rd_idx, wr_idx;

  // {row, segment} -> word index; with one segment per row the row alone.
  always_comb begin
    if (SEGS > 1) begin
      rd_idx = IDX_W'(rd_row) * IDX_W'(SEGS) + IDX_W'(rd_seg);
      wr_idx = IDX_W'(wr_row) * IDX_W'(SEGS) + IDX_W'(wr_seg);
    end else begin
      rd_idx = IDX_W'(rd_row);
      wr_idx = IDX_W'(wr_row);
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [BLK_BITS-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (wr_en && wr_lane_mask[l]) mem[wr_idx] <= wr_data[l];
      if (rd_en) rd_data[l] <= mem[rd_idx];
    end
  end
endmodule
