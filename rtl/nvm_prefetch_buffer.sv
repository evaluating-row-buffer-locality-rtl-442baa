// nvm_prefetch_buffer: the 8-byte buffer between the I/O gating and the pins.
//
// The prefetch buffer holds exactly one chip's share of a cache block: with
// eight x8 chips per rank and a 64-byte block that is 8 bytes, sent as a burst
// of BURST_LEN beats of IO_WIDTH bits. The data bus is double data rate, so a
// burst takes BURST_LEN/2 clock cycles (tBURST = 4). In this model the two
// beats of a clock cycle travel side by side: dq[0] is the beat of the rising
// edge, dq[1] that of the falling edge; the pads that would turn this into a
// real DDR pin are not part of the model. Byte 0 of the block is the first
// beat (beat order is this implementation's choice).
//
// Read: load copies load_data in; in each of the next BURST_LEN/2 cycles
// dq_oe is high and dq_out carries two beats. A new load in the last burst
// cycle starts the next burst seamlessly.
// Write: capture is high in the BURST_LEN/2 cycles the beats are on dq_in;
// the assembled block is on wr_data with wr_done for one cycle after the last
// beat. Reset stops any burst in progress.
module nvm_prefetch_buffer #(
  parameter int unsigned IO_WIDTH  = 8,
  parameter int unsigned BURST_LEN = 8,
  localparam int unsigned BLK_BITS = IO_WIDTH * BURST_LEN,
  localparam int unsigned T_BURST  = BURST_LEN / 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // read side
  input  logic                     load,
  input  logic [BLK_BITS-1:0]      load_data,
  output logic [1:0][IO_WIDTH-1:0] dq_out,
  output logic                     dq_oe,
  // write side
  input  logic                     capture,
  input  logic [1:0][IO_WIDTH-1:0] dq_in,
  output logic [BLK_BITS-1:0]      wr_data,
  output logic                     wr_done
);
  localparam int unsigned CNT_W = $clog2(T_BURST + 1);

  logic [BLK_BITS-1:0] rd_sh;
  logic [CNT_W-1:0]    rd_left;
  logic [CNT_W-1:0]    wr_cnt;

  assign dq_out = rd_sh[2*IO_WIDTH-1:0];
  assign dq_oe  = rd_left != '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_sh   <= '0;
      rd_left <= '0;
    end else if (load) begin
      rd_sh   <= load_data;
      rd_left <= CNT_W'(T_BURST);
    end else if (rd_left != '0) begin
      rd_sh   <= rd_sh >> (2 * IO_WIDTH);
      rd_left <= rd_left - 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_data <= '0;
      wr_cnt  <= '0;
      wr_done <= 1'b0;
    end else begin
      wr_done <= 1'b0;
      if (capture) begin
        // beats fill from the top and shift down, so the first beat lands in
        // byte 0 after the last one
        wr_data <= {dq_in, wr_data[BLK_BITS-1:2*IO_WIDTH]};
        if (wr_cnt == CNT_W'(T_BURST - 1)) begin
          wr_cnt  <= '0;
          wr_done <= 1'b1;
        end else begin
          wr_cnt <= wr_cnt + 1'b1;
        end
      end
    end
  end
endmodule
