// tb_nvm_io_control: issues READs and WRITEs to random banks and blocks,
// spaced T_BURST apart or further, and checks against a cycle-stamped
// reference that rd_fetch rises exactly T_CL-1 cycles after each READ with
// its bank and block, that wr_capture covers exactly cycles T_CWL ..
// T_CWL+T_BURST-1 after each WRITE, and that wr_commit comes T_CWL+T_BURST
// cycles after it with the right bank and block.
module tb_nvm_io_control;
  localparam int T_CL = 8, T_CWL = 6, T_BURST = 4, N = 400;
  logic clk = 0, rst_n = 0;
  logic rd, wr, rd_fetch, wr_capture, wr_commit;
  logic [2:0] bank, lane, rd_bank, rd_lane, wr_bank, wr_lane;
  int checks = 0, failures = 0;
  int cyc = 0;
  // per-cycle expectation tables
  logic        exp_fetch [N + 64];
  logic        exp_cap   [N + 64];
  logic        exp_com   [N + 64];
  logic [5:0]  exp_rsel  [N + 64];
  logic [5:0]  exp_wsel  [N + 64];

  nvm_io_control #(.BANKS(8), .LANES(8), .T_CL(T_CL), .T_CWL(T_CWL), .T_BURST(T_BURST)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int gap;
    for (int i = 0; i < N + 64; i++) begin
      exp_fetch[i] = 0; exp_cap[i] = 0; exp_com[i] = 0; exp_rsel[i] = 0; exp_wsel[i] = 0;
    end
    rd = 0; wr = 0; bank = 0; lane = 0;
    @(negedge clk); rst_n = 1;
    gap = 0;
    // cycle k: inputs held during cycle k (between negedges), outputs checked
    for (cyc = 0; cyc < N; cyc++) begin
      rd = 0; wr = 0;
      if (gap == 0 && cyc < N - 40) begin
        int kind = $urandom_range(0, 2);
        bank = 3'($urandom); lane = 3'($urandom);
        if (kind == 1) begin
          rd = 1;
          exp_fetch[cyc + T_CL - 1] = 1; exp_rsel[cyc + T_CL - 1] = {bank, lane};
        end else if (kind == 2) begin
          wr = 1;
          for (int c = T_CWL; c < T_CWL + T_BURST; c++) exp_cap[cyc + c] = 1;
          exp_com[cyc + T_CWL + T_BURST] = 1; exp_wsel[cyc + T_CWL + T_BURST] = {bank, lane};
        end
        gap = (kind == 0) ? 0 : T_BURST - 1 + $urandom_range(0, 1) * 3;
      end else if (gap > 0) gap--;
      #1;
      checks++;
      if (rd_fetch != exp_fetch[cyc] || (rd_fetch && {rd_bank, rd_lane} != exp_rsel[cyc]) ||
          wr_capture != exp_cap[cyc] || wr_commit != exp_com[cyc] ||
          (wr_commit && {wr_bank, wr_lane} != exp_wsel[cyc])) begin
        failures++;
        $display("cycle %0d: fetch %b/%b cap %b/%b com %b/%b", cyc, rd_fetch, exp_fetch[cyc],
                 wr_capture, exp_cap[cyc], wr_commit, exp_com[cyc]);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
