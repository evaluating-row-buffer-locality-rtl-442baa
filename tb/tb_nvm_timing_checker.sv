// tb_nvm_timing_checker: a random command stream (ACT, PRE, READ, WRITE, NOP)
// to random banks and columns is fed to the monitor; an independent model in
// the testbench keeps the cycle of every past command and computes, for every
// cycle, which of the rules tRCD, tWR (from the end of the write burst),
// tRRD, tFAW (fifth ACT in a window), tRP, tRTP and the open-segment rule the
// command breaks. All seven flags must match in every cycle, and each rule
// must have been broken and kept at least a few times. Non-zero tRP and tRTP
// are used so those rules can be exercised.
module tb_nvm_timing_checker;
  import nvm_pkg::*;
  localparam int BANKS = 8, SEG_LO = 6, SEG_W = 4;
  localparam int T_RCD = 5, T_WR = 3, T_RRD = 2, T_FAW = 12, T_RP = 2, T_RTP = 2;
  localparam int T_CWL = 2, T_BURST = 2, N = 4000;
  logic clk = 0, rst_n = 0;
  cmd_t cmd;
  viol_t viol, exp_v;
  int checks = 0, failures = 0;
  int last_act [BANKS], last_pre [BANKS], last_rd [BANKS], last_wr [BANKS];
  int acts [$];
  int last_any_act;
  logic open_v [BANKS];
  int   open_s [BANKS];
  int hits [7];

  nvm_timing_checker #(.BANKS(BANKS), .SEG_LO(SEG_LO), .SEG_W(SEG_W),
    .T_RCD(T_RCD), .T_WR(T_WR), .T_RRD(T_RRD), .T_FAW(T_FAW), .T_RP(T_RP),
    .T_RTP(T_RTP), .T_CWL(T_CWL), .T_BURST(T_BURST)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic soon(int last, int now, int t);
    return last >= 0 && now - last < t;
  endfunction

  initial begin
    for (int b = 0; b < BANKS; b++) begin
      last_act[b] = -1; last_pre[b] = -1; last_rd[b] = -1; last_wr[b] = -1;
      open_v[b] = 0; open_s[b] = 0;
    end
    for (int i = 0; i < 7; i++) hits[i] = 0;
    last_any_act = -1;
    cmd = '{op: CMD_NOP, bank: 0, addr: 0};
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < N; t++) begin
      int r, b, s;
      r = $urandom_range(0, 9);
      b = $urandom_range(0, 3);          // few banks: more conflicts
      s = $urandom_range(0, 1);          // few segments: some matches
      cmd.bank = 3'(b);
      cmd.addr = 14'((s << SEG_LO) | $urandom_range(0, 63));
      cmd.op = (r < 2) ? CMD_ACT : (r < 4) ? CMD_PRE : (r < 6) ? CMD_RD :
               (r < 8) ? CMD_WR : CMD_NOP;
      exp_v = '0;
      case (cmd.op)
        CMD_ACT: begin
          exp_v.rrd = soon(last_any_act, t, T_RRD);
          exp_v.faw = acts.size() >= 4 && t - acts[acts.size() - 4] < T_FAW;
          exp_v.rp  = soon(last_pre[b], t, T_RP);
        end
        CMD_RD, CMD_WR: begin
          exp_v.rcd = soon(last_act[b], t, T_RCD);
          exp_v.seg = !open_v[b] || open_s[b] != s;
        end
        CMD_PRE: begin
          exp_v.wr  = soon(last_wr[b], t, T_CWL + T_BURST + T_WR);
          exp_v.rtp = soon(last_rd[b], t, T_RTP);
        end
        default: ;
      endcase
      #1;
      checks++;
      if (viol != exp_v) begin
        failures++;
        $display("cycle %0d op %s bank %0d: viol %b expected %b", t, cmd.op.name(), b, viol, exp_v);
      end
      for (int i = 0; i < 7; i++) if (exp_v[i]) hits[i]++;
      case (cmd.op)
        CMD_ACT: begin last_act[b] = t; last_any_act = t; acts.push_back(t);
                       open_v[b] = 1; open_s[b] = s; end
        CMD_PRE: last_pre[b] = t;
        CMD_RD:  last_rd[b] = t;
        CMD_WR:  last_wr[b] = t;
        default: ;
      endcase
      @(negedge clk);
    end
    for (int i = 0; i < 7; i++) begin
      checks++;
      if (hits[i] < 3) begin failures++; $display("rule %0d exercised only %0d times", i, hits[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
