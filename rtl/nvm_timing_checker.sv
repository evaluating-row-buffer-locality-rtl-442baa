// nvm_timing_checker: monitor for the command timing rules of the NVM chip.
//
// The NVM protocol keeps the DDR3 timing rules but changes the values that
// matter: tRCD (ACTIVATE to READ/WRITE) and tWR (end of write burst to
// PRECHARGE) scale with the technology's read and write latency, tRRD
// (ACTIVATE to ACTIVATE, any bank) and tFAW (at most four ACTIVATEs in any
// tFAW window) scale with the technology's read energy and with how much
// smaller the row buffer is than a 1 KB row, and tRP (PRECHARGE to ACTIVATE)
// and tRTP (READ to PRECHARGE) become zero, because PRECHARGE only moves a row
// address. A memory controller must keep these rules; this module watches the
// decoded command stream and raises one flag per broken rule, in the cycle of
// the offending command. It also flags a READ or WRITE to a bank whose row
// buffer holds no segment, or another segment than the column asks for: with
// the small row buffer only the activated segment can be read or written.
//
// Distances are counted in clock cycles between the two commands; tWR is
// counted from the end of the write burst, T_CWL + T_BURST cycles after the
// WRITE. A rule with a zero value can never be broken. The cycle counts are
// parameters, so the same monitor serves any technology; the per-bank ages
// saturate just above the largest rule. The four-ACTIVATE count of tFAW is the
// DDR3 one. With the chip's tRP = tRTP = 0 the rp and rtp flags are constant
// zero; they are kept so the monitor also serves a DRAM-like configuration.
// Reset forgets all history (no rule can then be broken until the
// commands it concerns have been seen).
module nvm_timing_checker
  import nvm_pkg::*;
#(
  parameter int unsigned BANKS   = 8,
  parameter int unsigned SEG_LO  = 6,   // lowest column bit of the segment
  parameter int unsigned SEG_W   = 4,   // segment bits (0: row buffer = row)
  parameter int unsigned T_RCD   = 24,
  parameter int unsigned T_WR    = 40,
  parameter int unsigned T_RRD   = 1,
  parameter int unsigned T_FAW   = 3,
  parameter int unsigned T_RP    = 0,
  parameter int unsigned T_RTP   = 0,
  parameter int unsigned T_CWL   = 6,
  parameter int unsigned T_BURST = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cmd_t  cmd,
  output viol_t viol
);
  localparam int unsigned T_WRP = T_CWL + T_BURST + T_WR;  // WRITE -> PRE
  localparam int unsigned MAXT  = T_WRP + T_RCD + T_RRD + T_FAW + T_RP + T_RTP + 2;
  localparam int unsigned AGE_W = $clog2(MAXT + 1);
  localparam int unsigned SW    = (SEG_W > 0) ? SEG_W : 1;

  typedef logic [AGE_W-1:0] age_t;

  // age of the last command of each kind per bank (0 = never seen)
  age_t act_age [BANKS];
  age_t pre_age [BANKS];
  age_t rd_age  [BANKS];
  age_t wr_age  [BANKS];
  age_t faw_age [4];     // ages of the four most recent ACTIVATEs, any bank
  age_t rrd_age;         // age of the last ACTIVATE, any bank

  logic          open_v   [BANKS];
  logic [SW-1:0] open_seg [BANKS];

  logic is_act, is_pre, is_rd, is_wr;
  logic [SW-1:0] cmd_seg;

  assign is_act = cmd.op == CMD_ACT;
  assign is_pre = cmd.op == CMD_PRE;
  assign is_rd  = cmd.op == CMD_RD;
  assign is_wr  = cmd.op == CMD_WR;

  always_comb begin
    if (SEG_W > 0) cmd_seg = SW'(cmd.addr >> SEG_LO);
    else           cmd_seg = '0;
  end

  // "seen and closer than T": age 0 means never seen
  function automatic logic too_soon(age_t age, int unsigned t);
    return age != '0 && int'(age) < int'(t);
  endfunction

  function automatic age_t older(age_t age);
    return (age == '0 || age == age_t'(MAXT)) ? age : age + 1'b1;
  endfunction

  always_comb begin
    viol = '0;
    if (is_act) begin
      viol.rrd = too_soon(rrd_age, T_RRD);
      viol.faw = too_soon(faw_age[3], T_FAW);
      viol.rp  = too_soon(pre_age[cmd.bank], T_RP);
    end
    if (is_rd || is_wr) begin
      viol.rcd = too_soon(act_age[cmd.bank], T_RCD);
      viol.seg = !open_v[cmd.bank] || (SEG_W > 0 && open_seg[cmd.bank] != cmd_seg);
    end
    if (is_pre) begin
      viol.wr  = too_soon(wr_age[cmd.bank], T_WRP);
      viol.rtp = too_soon(rd_age[cmd.bank], T_RTP);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < BANKS; b++) begin
        act_age[b]  <= '0;
        pre_age[b]  <= '0;
        rd_age[b]   <= '0;
        wr_age[b]   <= '0;
        open_v[b]   <= 1'b0;
        open_seg[b] <= '0;
      end
      for (int i = 0; i < 4; i++) faw_age[i] <= '0;
      rrd_age <= '0;
    end else begin
      for (int b = 0; b < BANKS; b++) begin
        act_age[b] <= (is_act && cmd.bank == 3'(b)) ? age_t'(1) : older(act_age[b]);
        pre_age[b] <= (is_pre && cmd.bank == 3'(b)) ? age_t'(1) : older(pre_age[b]);
        rd_age[b]  <= (is_rd  && cmd.bank == 3'(b)) ? age_t'(1) : older(rd_age[b]);
        wr_age[b]  <= (is_wr  && cmd.bank == 3'(b)) ? age_t'(1) : older(wr_age[b]);
        if (is_act && cmd.bank == 3'(b)) begin
          open_v[b]   <= 1'b1;
          open_seg[b] <= cmd_seg;
        end
      end
      rrd_age <= is_act ? age_t'(1) : older(rrd_age);
      if (is_act) begin
        faw_age[0] <= age_t'(1);
        for (int i = 1; i < 4; i++) faw_age[i] <= older(faw_age[i-1]);
      end else begin
        for (int i = 0; i < 4; i++) faw_age[i] <= older(faw_age[i]);
      end
    end
  end
endmodule
