// nvm_bank: one bank of the small-row-buffer NVM chip.
//
// The access protocol splits the address the other way round from DRAM:
//   PRECHARGE  the row address is stored in this bank's row register. Nothing
//              else happens: there is no bitline precharge to wait for, since
//              sensing and storage are separate (tRP = 0).
//   ACTIVATE   the column address arrives; together with the stored row it
//              selects one RB_BYTES segment of the row, which is sensed and,
//              when sensing completes, loaded into the row buffer latches.
//   READ/WRITE served from the row buffer through the shared I/O gating.
// After a WRITE the written (dirty) 8-byte blocks are written back from the
// row buffer into the array; the write to the array takes tWR.
//
// The protocol, the separate latch stage and the write to the array after the
// burst are the design's. The rest is this implementation's: the analog
// sensing is modelled by a counter that loads the row buffer T_RCD-1 cycles
// after the ACTIVATE is seen (so a READ issued tRCD after ACTIVATE finds its
// data); the write-back fires T_WR cycles after the last block was written
// into the row buffer and restarts if another block arrives meanwhile; an
// ACTIVATE that finds dirty blocks still waiting writes them back at once, at
// the address they were sensed from, before sensing the new segment.
//
// Interface: pre/act/row/seg come from the decoded command (one-cycle pulses);
// wr_en/wr_lane/wr_data come from the I/O gating at the end of a write burst.
// rb_valid is high once a segment has been sensed and stays high until the
// next ACTIVATE. Reset clears the control state; the array keeps its contents.
module nvm_bank #(
  parameter int unsigned ROWS     = 16384,
  parameter int unsigned SEGS     = 16,
  parameter int unsigned LANES    = 8,
  parameter int unsigned BLK_BITS = 64,
  parameter int unsigned T_RCD    = 24,   // 8 * gamma, gamma = 3
  parameter int unsigned T_WR     = 40,   // 8 * delta, delta = 5
  localparam int unsigned ROW_W   = (ROWS  > 1) ? $clog2(ROWS)  : 1,
  localparam int unsigned SEG_W   = (SEGS  > 1) ? $clog2(SEGS)  : 1,
  localparam int unsigned LANE_W  = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           pre,
  input  logic                           act,
  input  logic [ROW_W-1:0]               row,
  input  logic [SEG_W-1:0]               seg,
  input  logic                           wr_en,
  input  logic [LANE_W-1:0]              wr_lane,
  input  logic [BLK_BITS-1:0]            wr_data,
  output logic [LANES-1:0][BLK_BITS-1:0] rb_data,
  output logic                           rb_valid,
  output logic                           sensing,
  output logic                           writing
);
  if (T_RCD < 3) begin : g_bad_rcd
    $error("nvm_bank: T_RCD must be at least 3 cycles");
  end
  if (T_WR < 1) begin : g_bad_wr
    $error("nvm_bank: T_WR must be at least 1 cycle");
  end

  localparam int unsigned CNT_W = $clog2((T_RCD > T_WR ? T_RCD : T_WR) + 1);

  logic [ROW_W-1:0]              row_q;      // row register, written by PRE
  logic [ROW_W-1:0]              open_row;   // address of the sensed segment
  logic [SEG_W-1:0]              open_seg;
  logic [CNT_W-1:0]              sense_cnt;
  logic [CNT_W-1:0]              wb_cnt;
  logic [LANES-1:0][BLK_BITS-1:0] sensed;
  logic [LANES-1:0]              dirty;
  logic                          sense_done;
  logic                          wb_fire;

  assign sense_done = sensing && sense_cnt == CNT_W'(1);
  // Write-back when the tWR timer runs out, or at once if a new ACTIVATE
  // arrives while dirty blocks are waiting.
  assign wb_fire = writing && ((wb_cnt == CNT_W'(1) && !wr_en) || act);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_q     <= '0;
      open_row  <= '0;
      open_seg  <= '0;
      sensing   <= 1'b0;
      sense_cnt <= '0;
      rb_valid  <= 1'b0;
    end else begin
      if (pre) row_q <= row;
      if (act) begin
        open_row  <= row_q;
        open_seg  <= seg;
        sensing   <= 1'b1;
        sense_cnt <= CNT_W'(T_RCD - 1);
        rb_valid  <= 1'b0;
      end else if (sensing) begin
        sense_cnt <= sense_cnt - 1'b1;
        if (sense_done) begin
          sensing  <= 1'b0;
          rb_valid <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      writing <= 1'b0;
      wb_cnt  <= '0;
    end else if (wr_en) begin
      writing <= 1'b1;
      wb_cnt  <= CNT_W'(T_WR);
    end else if (wb_fire) begin
      writing <= 1'b0;
      wb_cnt  <= '0;
    end else if (writing) begin
      wb_cnt <= wb_cnt - 1'b1;
    end
  end

  nvm_bank_array #(
    .ROWS(ROWS), .SEGS(SEGS), .LANES(LANES), .BLK_BITS(BLK_BITS)
  ) u_array (
    .clk          (clk),
    .rd_en        (sensing),
    .rd_row       (open_row),
    .rd_seg       (open_seg),
    .rd_data      (sensed),
    .wr_en        (wb_fire),
    .wr_row       (open_row),
    .wr_seg       (open_seg),
    .wr_lane_mask (dirty),
    .wr_data      (rb_data)
  );

  nvm_row_buffer #(
    .LANES(LANES), .BLK_BITS(BLK_BITS)
  ) u_rb (
    .clk       (clk),
    .rst_n     (rst_n),
    .load      (sense_done),
    .load_data (sensed),
    .wr_en     (wr_en),
    .wr_lane   (wr_lane),
    .wr_data   (wr_data),
    .clean     (wb_fire),
    .data      (rb_data),
    .dirty     (dirty)
  );
endmodule
