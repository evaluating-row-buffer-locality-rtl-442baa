// tb_nvm_chip: end-to-end test of the NVM chip through its pins.
//
// The testbench plays the memory controller. It keeps its own copy of the
// timing rules (computed here from the technology ratios), holds every
// command back until it is legal, and keeps a reference image of the memory
// to check every read beat by beat, at the exact cycle (T_CL after READ).
// Write beats are driven T_CWL after WRITE. Phases:
//   1. writes then reads to random banks, rows, segments and blocks, served
//      as row buffer hits when the segment is open and as PRECHARGE +
//      ACTIVATE otherwise;
//   2. eight banks opened back to back (tRRD and tFAW hold the ACTIVATEs
//      back) and read every T_BURST cycles: the bursts of different banks
//      must follow each other with no gap;
//   3. rules broken on purpose: the monitor must flag each one, and it must
//      never flag anything in phases 1 and 2.
// Every mechanism (hit, miss, PRECHARGE followed at once by ACTIVATE, write-
// back after tWR, write-back forced by ACTIVATE, seamless bank interleaving,
// tRCD/tRRD/tFAW/tWR waits, each flagged rule) is counted, and one that never
// happens counts as a failure. The array is reduced to 64 rows per bank and
// alpha is raised to 8 (top of the PCM range) so that tRRD = 2 and
// tFAW = 10 cycles actually hold commands back.
module tb_nvm_chip;
  import nvm_pkg::*;
  localparam int ROWS = 64, ALPHA = 800, GAMMA = 300, DELTA = 500;
  localparam int T_CL = 8, T_CWL = 6, T_BURST = 4;
  localparam int RB = 64, ROWB = 1024;
  // the rules, worked out by hand from the timing table
  localparam int T_RCD = 24;   // 8 * 3
  localparam int T_WR  = 40;   // 8 * 5
  localparam int T_RRD = 2;    // 4 * 8 * 64 / 1024
  localparam int T_FAW = 10;   // 20 * 8 * 64 / 1024
  localparam int T_WRP = T_CWL + T_BURST + T_WR;

  logic clk = 0, rst_n = 0;
  logic cs_n, ras_n, cas_n, we_n;
  logic [2:0] ba;
  logic [13:0] addr;
  logic [1:0][7:0] dq_in, dq_out;
  logic dq_oe;
  viol_t viol;
  logic [7:0] rb_valid, sensing, writing;

  nvm_chip #(.ROWS(ROWS), .ALPHA_X100(ALPHA), .GAMMA_X100(GAMMA), .DELTA_X100(DELTA)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL cycle %0d: %s", cyc, what); end
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference image and controller state ----------------
  logic [63:0] mem [int];            // key {bank, row, segment, block}
  int last_act [8], last_pre [8], last_wr [8];
  int acts [$];
  int next_rd_ok = 0, next_wr_ok = 0;
  int open_row [8], open_seg [8];    // -1: nothing sensed
  int pend_row [8];                  // row register contents (-1 unknown)
  logic expect_quiet = 1;            // no rule may be flagged

  // mechanism counters
  int n_hit = 0, n_miss = 0, n_pre_act = 0, n_wb = 0, n_wb_forced = 0, n_seamless = 0;
  int n_wait_rcd = 0, n_wait_rrd = 0, n_wait_faw = 0, n_wait_wr = 0;
  int n_rcd = 0, n_wr = 0, n_rrd = 0, n_faw = 0, n_seg = 0;
  int dq_free_after = -1;            // beats of a READ sent for phase 3

  function automatic int key(int b, int r, int s, int l);
    return (((b * ROWS + r) * 16 + s) * 8) + l;
  endfunction

  // expected read beats and write beats to drive, by cycle
  typedef struct { int at; logic [15:0] beats; } beat_t;
  beat_t rq [$];
  beat_t wq [$];
  int last_rd_cycle = -100, last_rd_bank = -1, burst_run = 0;

  always @(negedge clk) begin
    if (rst_n) begin
      if (rq.size() > 0 && rq[0].at == cyc) begin
        check(dq_oe && dq_out == rq[0].beats, $sformatf("read beats %h expected %h", dq_out, rq[0].beats));
        void'(rq.pop_front());
      end else begin
        check(!dq_oe || cyc <= dq_free_after, "data driven when no read is due");
        if (rq.size() > 0) check(rq[0].at > cyc, "read beats missed");
      end
      if (wq.size() > 0 && wq[0].at == cyc) begin
        dq_in = wq[0].beats;
        void'(wq.pop_front());
      end else dq_in = $urandom;
      if (expect_quiet) check(viol == '0, $sformatf("unexpected rule flag %b", viol));
    end
  end

  logic [7:0] writing_q = 0;
  always @(posedge clk) begin
    for (int b = 0; b < 8; b++) if (writing_q[b] && !writing[b]) n_wb++;
    writing_q <= writing;
  end

  // drive one command for one cycle; returns the edge number that takes it
  task automatic drive(input cmd_e op, input int b, input int a, output int k);
    {ras_n, cas_n, we_n} = (op == CMD_ACT) ? 3'b011 : (op == CMD_PRE) ? 3'b010 :
                           (op == CMD_RD)  ? 3'b101 : (op == CMD_WR)  ? 3'b100 : 3'b111;
    cs_n = 0; ba = 3'(b); addr = 14'(a);
    @(posedge clk); #1; k = cyc;
    @(negedge clk);
    {cs_n, ras_n, cas_n, we_n} = 4'b1111; addr = 14'($urandom);
  endtask

  // wait until op is legal at the next edge, counting what held it back
  task automatic wait_legal(input cmd_e op, input int b);
    forever begin
      int k; logic rrd, faw, rcd, wr, bus;
      k = cyc + 1;
      rrd = 0; faw = 0; rcd = 0; wr = 0; bus = 0;
      if (op == CMD_ACT) begin
        rrd = acts.size() > 0 && k - acts[acts.size() - 1] < T_RRD;
        faw = acts.size() >= 4 && k - acts[acts.size() - 4] < T_FAW;
      end
      if (op == CMD_RD || op == CMD_WR) begin
        rcd = k - last_act[b] < T_RCD;
        bus = (op == CMD_RD) ? k < next_rd_ok : k < next_wr_ok;
      end
      if (op == CMD_PRE) wr = k - last_wr[b] < T_WRP;
      if (!(rrd || faw || rcd || wr || bus)) return;
      if (rrd) n_wait_rrd++;
      else if (faw) n_wait_faw++;
      if (rcd) n_wait_rcd++;
      if (wr) n_wait_wr++;
      @(negedge clk);
    end
  endtask

  task automatic do_pre(input int b, input int r);
    int k;
    wait_legal(CMD_PRE, b);
    drive(CMD_PRE, b, r, k);
    last_pre[b] = k; pend_row[b] = r;
  endtask

  task automatic do_act(input int b, input int s);
    int k;
    wait_legal(CMD_ACT, b);
    if (writing[b]) n_wb_forced++;
    drive(CMD_ACT, b, s << 6, k);
    if (k == last_pre[b] + 1) n_pre_act++;
    last_act[b] = k; acts.push_back(k);
    open_row[b] = pend_row[b]; open_seg[b] = s;
  endtask

  task automatic open_for(input int b, input int r, input int s);
    if (open_row[b] == r && open_seg[b] == s) n_hit++;
    else begin
      n_miss++;
      do_pre(b, r);
      do_act(b, s);
    end
  endtask

  task automatic do_write(input int b, input int r, input int s, input int l);
    int k; logic [63:0] d;
    open_for(b, r, s);
    wait_legal(CMD_WR, b);
    d = {$urandom, $urandom};
    drive(CMD_WR, b, (s << 6) | (l << 3), k);
    mem[key(b, r, s, l)] = d;
    for (int c = 0; c < T_BURST; c++) wq.push_back('{k + T_CWL + c, d[16*c +: 16]});
    last_wr[b] = k;
    next_wr_ok = k + T_BURST;
    next_rd_ok = k + T_CWL + T_BURST + 4;
  endtask

  task automatic do_read(input int b, input int r, input int s, input int l);
    int k; logic [63:0] d;
    open_for(b, r, s);
    wait_legal(CMD_RD, b);
    drive(CMD_RD, b, (s << 6) | (l << 3), k);
    d = mem[key(b, r, s, l)];
    for (int c = 0; c < T_BURST; c++) rq.push_back('{k + T_CL + c, d[16*c +: 16]});
    if (k == last_rd_cycle + T_BURST && b != last_rd_bank) n_seamless++;
    last_rd_cycle = k; last_rd_bank = b;
    next_rd_ok = k + T_BURST;
    next_wr_ok = k + T_CL + T_BURST + 2 - T_CWL;
  endtask

  // a command sent on purpose, rules or not: exactly the rules in exp must be
  // flagged in the cycle the decoded command is seen. A READ still returns
  // data; its beats are not checked.
  task automatic inject(input cmd_e op, input int b, input int a, input viol_t exp, input string name);
    int k;
    drive(op, b, a, k);
    // drive() returns at the negedge after the edge that took the command:
    // the decoded command and its flags are visible now
    check(viol == exp, $sformatf("%s: flags %b expected %b", name, viol, exp));
    if (viol.rcd) n_rcd++;
    if (viol.wr)  n_wr++;
    if (viol.rrd) n_rrd++;
    if (viol.faw) n_faw++;
    if (viol.seg) n_seg++;
    if (op == CMD_ACT) begin last_act[b] = k; acts.push_back(k); end
    if (op == CMD_RD) dq_free_after = k + T_CL + T_BURST;
  endtask

  initial begin
    for (int b = 0; b < 8; b++) begin
      last_act[b] = -1000; last_pre[b] = -1000; last_wr[b] = -1000;
      open_row[b] = -1; open_seg[b] = -1; pend_row[b] = -1;
    end
    {cs_n, ras_n, cas_n, we_n} = 4'b1111; ba = 0; addr = 0; dq_in = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // phase 1: random writes and reads over a small address set
    for (int it = 0; it < 300; it++) begin
      int b, r, s, l;
      b = $urandom_range(0, 3); r = $urandom_range(0, 3);
      s = $urandom_range(0, 2); l = $urandom_range(0, 7);
      if (!mem.exists(key(b, r, s, l)) || $urandom_range(0, 2) == 0) do_write(b, r, s, l);
      else do_read(b, r, s, l);
      if ($urandom_range(0, 9) == 0) repeat ($urandom_range(1, 60)) @(negedge clk);
    end
    // let write-backs finish, then read back everything through new senses
    repeat (T_WRP + 5) @(negedge clk);
    foreach (mem[kk]) begin
      int b, r, s, l;
      l = kk % 8; s = (kk / 8) % 16; r = (kk / 128) % ROWS; b = kk / (128 * ROWS);
      do_read(b, r, s, l);
    end

    // phase 2: interleave eight banks
    for (int b = 0; b < 8; b++) do_write(b, 10 + b, 5, 2);
    repeat (T_WRP + 5) @(negedge clk);
    for (int b = 0; b < 8; b++) do_pre(b, 10 + b);
    for (int b = 0; b < 8; b++) do_act(b, 5);
    for (int b = 0; b < 8; b++) do_read(b, 10 + b, 5, 2);
    repeat (T_CL + 2 * T_BURST) @(negedge clk);
    check(rq.size() == 0, "all reads returned");

    // phase 3: break each rule once
    repeat (T_FAW + 2) @(negedge clk);
    expect_quiet = 0;
    // READ to a segment that is not open
    inject(CMD_RD, 0, (7 << 6), '{seg: 1, default: 0}, "open segment");
    repeat (T_CL + T_BURST) @(negedge clk);
    // PRECHARGE long after the last WRITE, then ACTIVATE at once (tRP = 0)
    inject(CMD_PRE, 1, 3, '0, "late PRECHARGE");
    inject(CMD_ACT, 1, 0, '0, "ACTIVATE right after PRECHARGE");
    // READ right after ACTIVATE (tRCD)
    inject(CMD_RD, 1, 0, '{rcd: 1, default: 0}, "tRCD");
    repeat (T_CL + T_BURST + T_FAW) @(negedge clk);
    // ACTIVATEs one cycle apart: tRRD = 2 is broken from the second on, and
    // the fifth is inside tFAW of the first
    inject(CMD_ACT, 2, 0, '0, "first ACTIVATE");
    inject(CMD_ACT, 3, 0, '{rrd: 1, default: 0}, "tRRD");
    inject(CMD_ACT, 4, 0, '{rrd: 1, default: 0}, "tRRD");
    inject(CMD_ACT, 5, 0, '{rrd: 1, default: 0}, "tRRD");
    inject(CMD_ACT, 6, 0, '{rrd: 1, faw: 1, default: 0}, "tFAW");
    // PRECHARGE too soon after a WRITE (tWR)
    repeat (T_RCD + 2) @(negedge clk);
    begin
      int k;
      drive(CMD_WR, 2, 0, k);
      for (int c = 0; c < T_BURST; c++) wq.push_back('{k + T_CWL + c, 16'h0});
    end
    inject(CMD_PRE, 2, 0, '{wr: 1, default: 0}, "tWR");
    repeat (T_WRP + T_CL + 10) @(negedge clk);

    // every mechanism must have happened
    check(n_hit > 0, "no row buffer hit");
    check(n_miss > 0, "no row buffer miss");
    check(n_pre_act > 0, "no ACTIVATE right after PRECHARGE (tRP = 0)");
    check(n_wb > 0, "no write-back to the array");
    check(n_wb_forced > 0, "no write-back forced by ACTIVATE");
    check(n_seamless >= 7, "bank-interleaved bursts not seamless");
    check(n_wait_rcd > 0, "tRCD never held a command");
    check(n_wait_rrd > 0, "tRRD never held a command");
    check(n_wait_faw > 0, "tFAW never held a command");
    check(n_wait_wr > 0, "tWR never held a command");
    check(n_seg > 0 && n_rcd > 0 && n_rrd > 0 && n_faw > 0 && n_wr > 0,
          "not every broken rule was flagged");
    $display("hits %0d misses %0d pre->act %0d write-backs %0d forced %0d seamless %0d",
             n_hit, n_miss, n_pre_act, n_wb, n_wb_forced, n_seamless);
    $display("waits: tRCD %0d tRRD %0d tFAW %0d tWR %0d; flags seg %0d rcd %0d rrd %0d faw %0d wr %0d",
             n_wait_rcd, n_wait_rrd, n_wait_faw, n_wait_wr, n_seg, n_rcd, n_rrd, n_faw, n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
