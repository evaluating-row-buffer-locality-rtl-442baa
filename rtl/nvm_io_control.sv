// nvm_io_control: read and write latency of the shared I/O path.
//
// Column commands behave as in DDR3: the first data of a READ appear on the
// pins T_CL cycles after the READ, the first data of a WRITE are expected
// T_CWL cycles after the WRITE, and a burst lasts T_BURST cycles. Because the
// chip has one prefetch buffer shared by all banks, commands to different
// banks can follow each other every T_BURST cycles and their bursts then run
// back to back. This module carries each READ/WRITE down a shift register of
// (read, write, bank, block) entries and produces, at the right cycle:
//   rd_fetch   the cycle before the first read beat: the I/O gating selects
//              rd_bank/rd_lane and the prefetch buffer loads it;
//   wr_capture the T_BURST cycles whose write beats the prefetch buffer takes;
//   wr_commit  the cycle after the last beat: the block goes into bank
//              wr_bank's row buffer at block wr_lane.
// The latencies are DDR3-1066 values (the timing table says all constraints
// it does not list are DRAM's); the alignment of the internal strobes is this
// implementation's choice.
//
// Timing reference: cmd is the decoder's registered command, valid in the
// cycle after the pins were sampled on edge E0; rd_fetch is then high in the
// cycle ending on edge E0+T_CL, and the first beats are on the pins in the
// cycle starting there. Write beats are taken from the cycles starting on
// edges E0+T_CWL .. E0+T_CWL+T_BURST-1.
module nvm_io_control #(
  parameter int unsigned BANKS   = 8,
  parameter int unsigned LANES   = 8,
  parameter int unsigned T_CL    = 8,
  parameter int unsigned T_CWL   = 6,
  parameter int unsigned T_BURST = 4,
  localparam int unsigned BANK_W = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned LANE_W = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd,
  input  logic              wr,
  input  logic [BANK_W-1:0] bank,
  input  logic [LANE_W-1:0] lane,
  output logic              rd_fetch,
  output logic [BANK_W-1:0] rd_bank,
  output logic [LANE_W-1:0] rd_lane,
  output logic              wr_capture,
  output logic              wr_commit,
  output logic [BANK_W-1:0] wr_bank,
  output logic [LANE_W-1:0] wr_lane
);
  if (T_CL < 2 || T_CWL < 1 || T_BURST < 1) begin : g_bad
    $error("nvm_io_control: needs T_CL >= 2, T_CWL >= 1, T_BURST >= 1");
  end

  localparam int unsigned RD_AT = T_CL - 2;
  localparam int unsigned WR_AT = T_CWL + T_BURST - 1;
  localparam int unsigned DEPTH = (RD_AT > WR_AT ? RD_AT : WR_AT) + 1;

  typedef struct packed {
    logic              rd;
    logic              wr;
    logic [BANK_W-1:0] bank;
    logic [LANE_W-1:0] lane;
  } stage_t;

  stage_t pipe [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) pipe[i] <= '0;
    end else begin
      pipe[0] <= '{rd: rd, wr: wr, bank: bank, lane: lane};
      for (int i = 1; i < DEPTH; i++) pipe[i] <= pipe[i-1];
    end
  end

  always_comb begin
    rd_fetch = pipe[RD_AT].rd;
    rd_bank  = pipe[RD_AT].bank;
    rd_lane  = pipe[RD_AT].lane;
    wr_commit = pipe[WR_AT].wr;
    wr_bank   = pipe[WR_AT].bank;
    wr_lane   = pipe[WR_AT].lane;
    wr_capture = 1'b0;
    for (int i = T_CWL - 1; i < T_CWL - 1 + T_BURST; i++) begin
      if (pipe[i].wr) wr_capture = 1'b1;
    end
  end

endmodule
