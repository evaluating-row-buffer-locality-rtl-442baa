// nvm_chip: one x8 non-volatile memory chip with small row buffers.
//
// A DRAM chip senses a whole row (1 KB per chip) into its row buffer on every
// ACTIVATE, because a DRAM read destroys the cells and all of them must be
// latched and restored. An NVM read does not destroy the cells, so this chip
// puts the column multiplexer in front of the sense amplifiers and senses only
// one RB_BYTES segment of the row (64 B by default). That needs the column
// address at sensing time, so the commands carry the address in a new order:
//   PRECHARGE  row address -> the bank's row register (no timing cost)
//   ACTIVATE   column address -> sense {row, segment} into the row buffer
//   READ/WRITE column address -> move one 8 B block between the row buffer
//              and the pins through the shared I/O gating and prefetch buffer
// A WRITE lands in the row buffer and its block is written back to the array
// tWR after the burst. Reads and writes share this single row-buffer path.
//
// Blocks: nvm_cmd_decoder (DDR3 pins), BANKS x nvm_bank (row register, sensing
// timer, array, row buffer, write-back), nvm_io_gating (bank/block select),
// nvm_io_control (CL/CWL latency), nvm_prefetch_buffer (8 B <-> 8 DDR beats)
// and nvm_timing_checker (flags commands that break the timing rules). The
// organisation, the command meanings and the timing formulas follow the
// design; pin encodings, CL/CWL, the two-beats-per-cycle data ports and the
// internal strobe alignment are this implementation's choices.
//
// Timing: commands are sampled on the rising edge. The first two read beats
// are on dq_out (dq_oe high) in the cycle that starts T_CL edges after the
// READ was sampled, for T_BURST = BURST_LEN/2 cycles; write beats are taken
// from dq_in in the T_BURST cycles starting T_CWL edges after the WRITE. The
// timing values come from the technology ratios (hundredths) and the row
// buffer size: tRCD = 8*gamma, tWR = 8*delta, tRRD = 4*alpha*RB/ROW,
// tFAW = 20*alpha*RB/ROW, all rounded up; tRP = tRTP = 0.
module nvm_chip
  import nvm_pkg::*;
#(
  parameter int unsigned BANKS      = 8,
  parameter int unsigned ROWS       = 16384,
  parameter int unsigned ROW_BYTES  = 1024,
  parameter int unsigned RB_BYTES   = 64,
  parameter int unsigned IO_WIDTH   = 8,
  parameter int unsigned BURST_LEN  = 8,
  parameter int unsigned ALPHA_X100 = 200,  // PCM read energy vs DRAM
  parameter int unsigned GAMMA_X100 = 300,  // PCM read latency vs DRAM
  parameter int unsigned DELTA_X100 = 500,  // PCM write latency vs DRAM
  parameter int unsigned T_CL       = 8,
  parameter int unsigned T_CWL      = 6
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cs_n,
  input  logic                     ras_n,
  input  logic                     cas_n,
  input  logic                     we_n,
  input  logic [2:0]               ba,
  input  logic [13:0]              addr,
  input  logic [1:0][IO_WIDTH-1:0] dq_in,
  output logic [1:0][IO_WIDTH-1:0] dq_out,
  output logic                     dq_oe,
  output viol_t                    viol,
  output logic [BANKS-1:0]         rb_valid,  // bank holds a sensed segment
  output logic [BANKS-1:0]         sensing,   // bank is sensing (tRCD)
  output logic [BANKS-1:0]         writing    // bank has a write-back pending
);
  localparam int unsigned BLK_BITS  = IO_WIDTH * BURST_LEN;
  localparam int unsigned BLK_BYTES = BLK_BITS / 8;
  localparam int unsigned LANES     = RB_BYTES / BLK_BYTES;
  localparam int unsigned SEGS      = ROW_BYTES / RB_BYTES;
  localparam int unsigned LANE_LO   = $clog2(BURST_LEN);
  localparam int unsigned LANE_BITS = $clog2(LANES);
  localparam int unsigned SEG_LO    = LANE_LO + LANE_BITS;
  localparam int unsigned SEG_BITS  = $clog2(SEGS);
  localparam int unsigned ROW_W     = (ROWS  > 1) ? $clog2(ROWS)  : 1;
  localparam int unsigned SEG_W     = (SEGS  > 1) ? SEG_BITS      : 1;
  localparam int unsigned LANE_W    = (LANES > 1) ? LANE_BITS     : 1;
  localparam int unsigned BANK_W    = (BANKS > 1) ? $clog2(BANKS) : 1;
  localparam int unsigned T_BURST   = BURST_LEN / 2;
  localparam int unsigned T_RCD     = ceil_scale(8, GAMMA_X100, 1, 1);
  localparam int unsigned T_WR      = ceil_scale(8, DELTA_X100, 1, 1);
  localparam int unsigned T_RRD     = ceil_scale(4, ALPHA_X100, RB_BYTES, ROW_BYTES);
  localparam int unsigned T_FAW     = ceil_scale(20, ALPHA_X100, RB_BYTES, ROW_BYTES);
  localparam int unsigned T_RP      = 0;
  localparam int unsigned T_RTP     = 0;

  if (BANKS > 8 || ROWS > 16384 || LANES < 1 || SEGS < 1 ||
      SEG_LO + SEG_BITS > 14) begin : g_bad
    $error("nvm_chip: organisation does not fit the 3 bank and 14 address pins");
  end

  cmd_t cmd;

  nvm_cmd_decoder u_dec (
    .clk, .rst_n, .cs_n, .ras_n, .cas_n, .we_n, .ba, .addr, .cmd
  );

  logic [ROW_W-1:0]  cmd_row;
  logic [SEG_W-1:0]  cmd_seg;
  logic [LANE_W-1:0] cmd_lane;

  always_comb begin
    cmd_row  = ROW_W'(cmd.addr);
    cmd_seg  = (SEGS  > 1) ? SEG_W'(cmd.addr >> SEG_LO)   : '0;
    cmd_lane = (LANES > 1) ? LANE_W'(cmd.addr >> LANE_LO) : '0;
  end

  // ---- I/O timing, gating and prefetch buffer (shared among banks) ----
  logic              rd_fetch, wr_capture, wr_commit;
  logic [BANK_W-1:0] rd_bank, wr_bank;
  logic [LANE_W-1:0] rd_lane, wr_lane;
  logic [BLK_BITS-1:0] rd_blk, wr_blk;
  logic [BANKS-1:0]  bank_wr_en;
  logic [BANKS-1:0][LANES-1:0][BLK_BITS-1:0] rb_data;
  logic              pf_wr_done;

  nvm_io_control #(
    .BANKS(BANKS), .LANES(LANES), .T_CL(T_CL), .T_CWL(T_CWL), .T_BURST(T_BURST)
  ) u_ioc (
    .clk, .rst_n,
    .rd   (cmd.op == CMD_RD),
    .wr   (cmd.op == CMD_WR),
    .bank (BANK_W'(cmd.bank)),
    .lane (cmd_lane),
    .rd_fetch, .rd_bank, .rd_lane,
    .wr_capture, .wr_commit, .wr_bank, .wr_lane
  );

  nvm_io_gating #(
    .BANKS(BANKS), .LANES(LANES), .BLK_BITS(BLK_BITS)
  ) u_gate (
    .rb_data,
    .rd_bank, .rd_lane, .rd_data (rd_blk),
    .wr_valid (wr_commit), .wr_bank, .bank_wr_en
  );

  nvm_prefetch_buffer #(
    .IO_WIDTH(IO_WIDTH), .BURST_LEN(BURST_LEN)
  ) u_pf (
    .clk, .rst_n,
    .load (rd_fetch), .load_data (rd_blk), .dq_out, .dq_oe,
    .capture (wr_capture), .dq_in, .wr_data (wr_blk), .wr_done (pf_wr_done)
  );

  // ---- banks ----
  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic hit;
    assign hit = cmd.bank == 3'(b);

    nvm_bank #(
      .ROWS(ROWS), .SEGS(SEGS), .LANES(LANES), .BLK_BITS(BLK_BITS),
      .T_RCD(T_RCD), .T_WR(T_WR)
    ) u_bank (
      .clk, .rst_n,
      .pre      (hit && cmd.op == CMD_PRE),
      .act      (hit && cmd.op == CMD_ACT),
      .row      (cmd_row),
      .seg      (cmd_seg),
      .wr_en    (bank_wr_en[b]),
      .wr_lane  (wr_lane),
      .wr_data  (wr_blk),
      .rb_data  (rb_data[b]),
      .rb_valid (rb_valid[b]),
      .sensing  (sensing[b]),
      .writing  (writing[b])
    );
  end

  // The block is complete in the prefetch buffer exactly when it is due in
  // the row buffer.
  a_wr_align: assert property (@(posedge clk) disable iff (!rst_n) wr_commit == pf_wr_done)
    else $error("nvm_chip: write block not aligned with the end of its burst");

  // ---- timing monitor ----
  nvm_timing_checker #(
    .BANKS(BANKS), .SEG_LO(SEG_LO), .SEG_W(SEG_BITS),
    .T_RCD(T_RCD), .T_WR(T_WR), .T_RRD(T_RRD), .T_FAW(T_FAW),
    .T_RP(T_RP), .T_RTP(T_RTP), .T_CWL(T_CWL), .T_BURST(T_BURST)
  ) u_chk (
    .clk, .rst_n, .cmd, .viol
  );
endmodule
