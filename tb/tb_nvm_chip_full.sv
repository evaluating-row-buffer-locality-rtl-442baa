// tb_nvm_chip_full: the chip at its default size (8 banks of 16384 rows of
// 1 KB, 64 B row buffers, PCM timing: tRCD = 24, tWR = 40, CL = 8, CWL = 6)
// taken through complete accesses at the corners of the address space:
// PRECHARGE + ACTIVATE + WRITE in the last row and segment of bank 7 and the
// first of bank 0, READ hits on the written blocks (checked beat by beat at
// exactly CL cycles), write-back to the array after tWR, a different row
// sensed in between, and the original segments sensed again and read back
// from the array. The monitor must flag nothing, and the row buffer must
// become valid exactly tRCD after each ACTIVATE.
module tb_nvm_chip_full;
  import nvm_pkg::*;
  localparam int T_CL = 8, T_CWL = 6, T_BURST = 4, T_RCD = 24, T_WR = 40;

  logic clk = 0, rst_n = 0;
  logic cs_n, ras_n, cas_n, we_n;
  logic [2:0] ba;
  logic [13:0] addr;
  logic [1:0][7:0] dq_in, dq_out;
  logic dq_oe;
  viol_t viol;
  logic [7:0] rb_valid, sensing, writing;

  nvm_chip dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) check(viol == '0, "rule flagged");

  task automatic cmd(input cmd_e op, input int b, input int a);
    {ras_n, cas_n, we_n} = (op == CMD_ACT) ? 3'b011 : (op == CMD_PRE) ? 3'b010 :
                           (op == CMD_RD)  ? 3'b101 : (op == CMD_WR)  ? 3'b100 : 3'b111;
    cs_n = 0; ba = 3'(b); addr = 14'(a);
    @(negedge clk);
    {cs_n, ras_n, cas_n, we_n} = 4'b1111;
  endtask

  // PRE + ACT; the row buffer must be valid for a READ exactly tRCD after ACT
  task automatic open_seg(input int b, input int r, input int s);
    cmd(CMD_PRE, b, r);
    cmd(CMD_ACT, b, s << 6);
    // cmd() returns at the falling edge right after the edge that took the
    // ACT; rb_valid still shows the previous segment there
    @(negedge clk);
    for (int i = 1; i < T_RCD; i++) begin
      check(!rb_valid[b], "row buffer valid before tRCD");
      @(negedge clk);
    end
    check(rb_valid[b], "row buffer not valid at tRCD");
  endtask

  task automatic write_blk(input int b, input int s, input int l, input logic [63:0] d);
    cmd(CMD_WR, b, (s << 6) | (l << 3));
    repeat (T_CWL) @(negedge clk);
    for (int c = 0; c < T_BURST; c++) begin
      dq_in = d[16*c +: 16];
      @(negedge clk);
    end
    dq_in = '0;
  endtask

  task automatic read_blk(input int b, input int s, input int l, input logic [63:0] d);
    cmd(CMD_RD, b, (s << 6) | (l << 3));
    for (int i = 0; i < T_CL; i++) begin
      check(!dq_oe, "read data early");
      @(negedge clk);
    end
    for (int c = 0; c < T_BURST; c++) begin
      check(dq_oe && dq_out == d[16*c +: 16], $sformatf("read beat pair %0d", c));
      @(negedge clk);
    end
    check(!dq_oe, "read burst too long");
  endtask

  initial begin
    logic [63:0] d [4];
    for (int i = 0; i < 4; i++) d[i] = {$urandom, $urandom};
    {cs_n, ras_n, cas_n, we_n} = 4'b1111; ba = 0; addr = 0; dq_in = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    open_seg(7, 16383, 15);
    write_blk(7, 15, 7, d[0]);
    write_blk(7, 15, 0, d[1]);
    read_blk(7, 15, 7, d[0]);              // row buffer hits
    read_blk(7, 15, 0, d[1]);
    open_seg(0, 0, 0);
    write_blk(0, 0, 3, d[2]);
    @(negedge clk);                        // block now in the row buffer
    check(writing[0], "write-back pending");
    repeat (T_WR - 1) @(negedge clk);
    check(writing[0], "write-back before tWR");
    @(negedge clk);
    check(!writing[0] && !writing[7], "write-backs done after tWR");
    // other rows in between, then sense the written segments again
    open_seg(7, 8191, 15);
    open_seg(0, 1, 0);
    write_blk(0, 0, 3, d[3]);              // lands in row 1 this time
    repeat (T_WR + 2) @(negedge clk);
    open_seg(7, 16383, 15);
    read_blk(7, 15, 7, d[0]);
    read_blk(7, 15, 0, d[1]);
    open_seg(0, 0, 0);
    read_blk(0, 0, 3, d[2]);
    open_seg(0, 1, 0);
    read_blk(0, 0, 3, d[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
