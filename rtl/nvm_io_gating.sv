// nvm_io_gating: the column decoder and multiplexer shared by all banks.
//
// With the small row buffer, the column address is used twice: its upper bits
// pick the segment that a bank senses on ACTIVATE, and its lower bits (the
// block within the segment) pick, on READ or WRITE, which 8-byte block of the
// addressed bank's row buffer goes to or comes from the prefetch buffer. This
// module is that second selection, shared among the banks as in a DRAM chip's
// I/O circuitry. On a read it selects bank rd_bank, block rd_lane; on a write
// it raises bank_wr_en for bank wr_bank only and hands the block number and
// data to every bank. When the row buffer is one block wide (LANES = 1) the
// block select disappears, as the design notes for a row buffer the size of
// the prefetch buffer.
//
// Purely combinational; plain multiplexers are this implementation's choice.
module nvm_io_gating #(
  parameter int unsigned BANKS    = 8,
  parameter int unsigned LANES    = 8,
  parameter int unsigned BLK_BITS = 64,
  localparam int unsigned BANK_W  = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned LANE_W  = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic [BANKS-1:0][LANES-1:0][BLK_BITS-1:0] rb_data,
  input  logic [BANK_W-1:0]                         rd_bank,
  input  logic [LANE_W-1:0]                         rd_lane,
  output logic [BLK_BITS-1:0]                       rd_data,
  input  logic                                      wr_valid,
  input  logic [BANK_W-1:0]                         wr_bank,
  output logic [BANKS-1:0]                          bank_wr_en
);
  always_comb begin
    if (LANES > 1) rd_data = rb_data[rd_bank][rd_lane];
    else           rd_data = rb_data[rd_bank][0];
  end

  always_comb begin
    bank_wr_en = '0;
    if (wr_valid) bank_wr_en[wr_bank] = 1'b1;
  end
endmodule
