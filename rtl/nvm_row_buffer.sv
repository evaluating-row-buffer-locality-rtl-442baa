// nvm_row_buffer: the small row buffer of one bank.
//
// Each bit of an NVM row buffer is a sense amplifier, a latch and a write
// driver. The sense amplifier and write driver are analog; this module is the
// latch part: LANES blocks of BLK_BITS (RB_BYTES in all, 64 B by default
// rather than the 1 KB of a DRAM row). It is loaded in one go from the sensed
// segment when sensing completes, written one 8-byte block at a time by the
// I/O gating on a WRITE, and read by the I/O gating on a READ. A dirty bit per
// block records which blocks must be written back to the array, so only
// written data goes back (block-level write-back). The dirty mask is this
// implementation's way of doing that.
//
// Timing: load, wr_en and clean act on the rising edge; data and dirty are
// the register outputs. If load and wr_en hit the same block in one cycle the
// write wins; clean clears the dirty bits of blocks not written that cycle.
// Reset clears only the dirty mask.
module nvm_row_buffer #(
  parameter int unsigned LANES    = 8,
  parameter int unsigned BLK_BITS = 64,
  localparam int unsigned LANE_W  = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           load,
  input  logic [LANES-1:0][BLK_BITS-1:0] load_data,
  input  logic                           wr_en,
  input  logic [LANE_W-1:0]              wr_lane,
  input  logic [BLK_BITS-1:0]            wr_data,
  input  logic                           clean,
  output logic [LANES-1:0][BLK_BITS-1:0] data,
  output logic [LANES-1:0]               dirty
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic hit;
    assign hit = wr_en && (LANES == 1 || wr_lane == LANE_W'(l));

    always_ff @(posedge clk) begin
      if (hit)       data[l] <= wr_data;
      else if (load) data[l] <= load_data[l];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     dirty[l] <= 1'b0;
      else if (hit)   dirty[l] <= 1'b1;
      else if (clean) dirty[l] <= 1'b0;
    end
  end
endmodule
