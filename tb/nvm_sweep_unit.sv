// nvm_sweep_unit: one chip with RB_BYTES of row buffer and the technology
// ratios given (PCM by default), driven by an in-order
// controller through a row-interleaved sequential access stream: every 8-byte
// block of rows 0 and 1 of banks 0 and 1 is written in address order, the
// write-backs are allowed to finish, and all blocks are read back in the same
// order through fresh ACTIVATEs. Then 256 reads go to blocks picked by a
// fixed pseudo-random sequence (the same in every unit), a stand-in for the
// low locality of many interleaved cores. A block is served as a row-buffer hit when
// its segment is open, otherwise through PRECHARGE + ACTIVATE + tRCD. Every
// read beat is checked, the timing monitor must stay silent, and the number
// of ACTIVATEs of the sequential part must equal the number of segments it
// touches, 2 * (banks * rows * ROW_BYTES / RB_BYTES). Counts and failures are outputs,
// collected by tb_nvm_rb_sweep. 4 rows per bank keep the arrays small.
module nvm_sweep_unit
  import nvm_pkg::*;
#(
  parameter int RB_BYTES   = 64,
  parameter int ALPHA_X100 = 200,   // technology ratios, hundredths
  parameter int GAMMA_X100 = 300,
  parameter int DELTA_X100 = 500
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   n_act,
  output int   n_rd,
  output int   n_wr,
  output int   n_hit,
  output int   n_act_rand,
  output int   n_hit_rand,
  output int   cycles,      // clock cycles the whole stream took
  output int   checks,
  output int   failures
);
  localparam int ROWS = 4, ROW_BYTES = 1024, BLOCKS = ROW_BYTES / 8;
  localparam int T_CL = 8, T_CWL = 6, T_BURST = 4;
  // tRCD = 8 * gamma and tWR = 8 * delta, rounded up to whole cycles
  localparam int T_RCD = (8 * GAMMA_X100 + 99) / 100;
  localparam int T_WR  = (8 * DELTA_X100 + 99) / 100;
  localparam int SEG_BLOCKS = RB_BYTES / 8;

  logic cs_n, ras_n, cas_n, we_n;
  logic [2:0] ba;
  logic [13:0] addr;
  logic [1:0][7:0] dq_in, dq_out;
  logic dq_oe;
  viol_t viol;
  logic [7:0] rb_valid, sensing, writing;

  nvm_chip #(.ROWS(ROWS), .RB_BYTES(RB_BYTES), .ALPHA_X100(ALPHA_X100),
             .GAMMA_X100(GAMMA_X100), .DELTA_X100(DELTA_X100)) u_chip (.*);

  always @(posedge clk) if (rst_n && !done) cycles <= cycles + 1;

  logic [63:0] ref_mem [2][2][BLOCKS];
  int open_row [2], open_seg [2];

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (viol != '0) begin failures++; $display("RB %0d: rule flagged %b", RB_BYTES, viol); end
    end
  end

  task automatic cmd(input cmd_e op, input int b, input int a);
    {ras_n, cas_n, we_n} = (op == CMD_ACT) ? 3'b011 : (op == CMD_PRE) ? 3'b010 :
                           (op == CMD_RD)  ? 3'b101 : (op == CMD_WR)  ? 3'b100 : 3'b111;
    cs_n = 0; ba = 3'(b); addr = 14'(a);
    @(negedge clk);
    {cs_n, ras_n, cas_n, we_n} = 4'b1111;
  endtask

  // make sure the segment of block blk in row r of bank b is in the row buffer
  task automatic reach(input int b, input int r, input int blk);
    int s;
    s = blk / SEG_BLOCKS;
    if (open_row[b] == r && open_seg[b] == s) begin
      n_hit++;
      return;
    end
    // tWR: the last write to this bank ended at least CWL + BURST cycles ago
    // (the write task waits for its burst); wait out tWR before PRECHARGE
    if (writing[b]) repeat (T_WR + 1) @(negedge clk);
    cmd(CMD_PRE, b, r);
    cmd(CMD_ACT, b, (blk * 8) & ~(RB_BYTES - 1));
    n_act++;
    repeat (T_RCD) @(negedge clk);
    open_row[b] = r; open_seg[b] = s;
  endtask

  task automatic write_blk(input int b, input int r, input int blk);
    logic [63:0] d;
    d = {$urandom, $urandom};
    reach(b, r, blk);
    cmd(CMD_WR, b, blk * 8);
    n_wr++;
    ref_mem[b][r][blk] = d;
    repeat (T_CWL) @(negedge clk);
    for (int c = 0; c < T_BURST; c++) begin
      dq_in = d[16*c +: 16];
      @(negedge clk);
    end
    @(negedge clk);
  endtask

  task automatic read_blk(input int b, input int r, input int blk);
    reach(b, r, blk);
    cmd(CMD_RD, b, blk * 8);
    n_rd++;
    repeat (T_CL) @(negedge clk);
    for (int c = 0; c < T_BURST; c++) begin
      checks++;
      if (!(dq_oe && dq_out == ref_mem[b][r][blk][16*c +: 16])) begin
        failures++;
        $display("RB %0d: bank %0d row %0d block %0d beats %0d wrong", RB_BYTES, b, r, blk, c);
      end
      @(negedge clk);
    end
  endtask

  initial begin
    done = 0; cycles = 0; n_act_rand = 0; n_hit_rand = 0; n_act = 0; n_rd = 0; n_wr = 0; n_hit = 0; checks = 0; failures = 0;
    {cs_n, ras_n, cas_n, we_n} = 4'b1111; ba = 0; addr = 0; dq_in = 0;
    for (int b = 0; b < 2; b++) begin open_row[b] = -1; open_seg[b] = -1; end
    @(posedge rst_n);
    @(negedge clk);
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < 2; r++)
        for (int k = 0; k < BLOCKS; k++) write_blk(b, r, k);
    repeat (T_WR + 10) @(negedge clk);
    for (int b = 0; b < 2; b++) begin open_row[b] = -1; open_seg[b] = -1; end
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < 2; r++)
        for (int k = 0; k < BLOCKS; k++) read_blk(b, r, k);
    checks++;
    if (n_act != 2 * 2 * 2 * ROW_BYTES / RB_BYTES) begin
      failures++;
      $display("RB %0d: %0d ACTIVATEs, expected %0d", RB_BYTES, n_act, 2 * 2 * 2 * ROW_BYTES / RB_BYTES);
    end
    begin
      int a0, h0;
      logic [31:0] x;
      a0 = n_act; h0 = n_hit; x = 32'd1;
      for (int i = 0; i < 256; i++) begin
        x = x * 32'd1103515245 + 32'd12345;
        read_blk(int'(x[30]), int'(x[29]), int'(x[22:16]));
      end
      n_act_rand = n_act - a0; n_hit_rand = n_hit - h0;
      n_act = a0; n_hit = h0; n_rd -= 256;
    end
    done = 1;
  end
endmodule
