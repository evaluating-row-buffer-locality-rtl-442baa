// tb_nvm_prefetch_buffer: a read burst must put bytes 0..7 of the loaded block
// on the pins two per cycle, rising beat first, for exactly T_BURST = 4
// cycles, including two bursts back to back; a write burst of 8 beats must be
// assembled into the same byte order with wr_done one cycle after the last.
module tb_nvm_prefetch_buffer;
  localparam int W = 8, BL = 8, BLK = W * BL;
  logic clk = 0, rst_n = 0;
  logic load, capture, dq_oe, wr_done;
  logic [BLK-1:0] load_data, wr_data;
  logic [1:0][W-1:0] dq_out, dq_in;
  int checks = 0, failures = 0;

  nvm_prefetch_buffer #(.IO_WIDTH(W), .BURST_LEN(BL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [BLK-1:0] blk [2];
    load = 0; capture = 0; load_data = '0; dq_in = '0;
    @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(!dq_oe, "idle oe");
    // two read bursts back to back
    for (int n = 0; n < 2; n++) begin
      blk[n] = {$urandom, $urandom};
      load = 1; load_data = blk[n];
      for (int c = 0; c < BL / 2; c++) begin
        @(negedge clk);
        load = 0;
        check(dq_oe, "oe during burst");
        check(dq_out[0] == blk[n][16*c +: 8] && dq_out[1] == blk[n][16*c + 8 +: 8],
              $sformatf("burst %0d cycle %0d beats", n, c));
        if (c == BL / 2 - 1 && n == 0) begin
          // next load in the last burst cycle
          load = 1; load_data = {$urandom, $urandom}; blk[1] = load_data;
          break;
        end
      end
      if (n == 0) begin
        // loop re-enters with load already set
      end
    end
    @(negedge clk);
    check(!dq_oe, "oe low after bursts");
    // write bursts
    for (int n = 0; n < 20; n++) begin
      logic [BLK-1:0] w;
      w = {$urandom, $urandom};
      for (int c = 0; c < BL / 2; c++) begin
        capture = 1; dq_in[0] = w[16*c +: 8]; dq_in[1] = w[16*c + 8 +: 8];
        @(negedge clk);
        if (c < BL / 2 - 1) check(!wr_done, "wr_done early");
      end
      capture = 0;
      check(wr_done && wr_data == w, $sformatf("write block %0d", n));
      @(negedge clk);
      check(!wr_done, "wr_done one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
