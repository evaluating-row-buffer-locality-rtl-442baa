// tb_nvm_bank: drives one bank through the NVM protocol. PRECHARGE loads the
// row, ACTIVATE senses one segment; the row buffer must become valid exactly
// T_RCD-1 clocks after the ACTIVATE is seen (ready for a READ tRCD after the
// command on the pins). Blocks written into the row buffer must reach the
// array exactly T_WR clocks after the last write (writing falls then), and
// only the written blocks change: reopening the segment later must show the
// earlier contents with the written blocks replaced. Also checks that an
// ACTIVATE arriving while a write-back is pending writes the block back to
// the old segment first, that segments and rows do not alias, and that a
// PRECHARGE alone leaves the row buffer untouched.
module tb_nvm_bank;
  localparam int ROWS = 8, SEGS = 4, LANES = 4, BLK = 64, T_RCD = 5, T_WR = 6;
  logic clk = 0, rst_n = 0;
  logic pre, act, wr_en, rb_valid, sensing, writing;
  logic [2:0] row;
  logic [1:0] seg, wr_lane;
  logic [BLK-1:0] wr_data;
  logic [LANES-1:0][BLK-1:0] rb_data;
  logic [LANES-1:0][BLK-1:0] model [ROWS][SEGS];
  logic known [ROWS][SEGS];
  int checks = 0, failures = 0;

  nvm_bank #(.ROWS(ROWS), .SEGS(SEGS), .LANES(LANES), .BLK_BITS(BLK),
             .T_RCD(T_RCD), .T_WR(T_WR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  int cur_r, cur_s;

  // PRE + ACT, then wait for sensing to finish and check its latency and data
  task automatic open_seg(input int r, input int s);
    int n;
    @(negedge clk); pre = 1; row = 3'(r);
    @(negedge clk); pre = 0; act = 1; seg = 2'(s); row = 3'($urandom);
    @(negedge clk); act = 0;
    check(sensing && !rb_valid, "sensing after ACT");
    n = 1;
    while (!rb_valid && n < 50) begin @(negedge clk); n++; end
    // n - 1 = clock edges from the one that took the ACTIVATE to the one that loaded the row buffer
    check(n - 1 == T_RCD - 1, $sformatf("row buffer loaded %0d edges after ACT, expected %0d", n - 1, T_RCD - 1));
    if (known[r][s]) check(rb_data == model[r][s], $sformatf("row %0d seg %0d contents", r, s));
    model[r][s] = rb_data; known[r][s] = 1;
    cur_r = r; cur_s = s;
  endtask

  task automatic write_blk(input int l);
    @(negedge clk); wr_en = 1; wr_lane = 2'(l); wr_data = {$urandom, $urandom};
    model[cur_r][cur_s][l] = wr_data;
    @(negedge clk); wr_en = 0;
    check(writing, "writing after a block write");
    check(rb_data[l] == model[cur_r][cur_s][l], "block in row buffer");
  endtask

  task automatic wait_wb();
    int n = 1;
    while (writing && n < 100) begin @(negedge clk); n++; end
    // n - 1 = clock edges from the one that took the block to the write-back
    check(n - 1 == T_WR, $sformatf("write-back %0d edges after the write, expected %0d", n - 1, T_WR));
  endtask

  initial begin
    pre = 0; act = 0; wr_en = 0; row = 0; seg = 0; wr_lane = 0; wr_data = 0;
    for (int r = 0; r < ROWS; r++) for (int s = 0; s < SEGS; s++) known[r][s] = 0;
    @(negedge clk); @(negedge clk);
    check(!rb_valid && !sensing && !writing, "reset state");
    rst_n = 1;
    // sense, write two blocks, let them go back
    open_seg(3, 2);
    write_blk(1); write_blk(3); wait_wb();
    // another row, same segment, then back
    open_seg(5, 2);
    open_seg(3, 2);
    // other segments of the same row must not alias
    open_seg(3, 1); write_blk(0); write_blk(1); write_blk(2); write_blk(3); wait_wb();
    open_seg(3, 2);
    open_seg(3, 1);
    // ACT while write-back pending: block must still reach the old segment
    write_blk(2);
    open_seg(6, 0);
    check(!writing, "pending write-back done at ACT");
    open_seg(3, 1);
    // PRECHARGE alone keeps the row buffer
    @(negedge clk); pre = 1; row = 3'd7;
    @(negedge clk); pre = 0;
    repeat (3) @(negedge clk);
    check(rb_valid && rb_data == model[3][1], "row buffer kept across PRE");
    // random traffic
    for (int it = 0; it < 40; it++) begin
      open_seg($urandom_range(0, ROWS - 1), $urandom_range(0, SEGS - 1));
      if ($urandom_range(0, 1)) begin
        write_blk($urandom_range(0, LANES - 1));
        if ($urandom_range(0, 1)) wait_wb();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
