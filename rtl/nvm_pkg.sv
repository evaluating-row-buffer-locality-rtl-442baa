// nvm_pkg: types and helper functions shared by the small-row-buffer NVM chip.
//
// The chip keeps the DDR3 command set and pins but gives two commands a new
// meaning: PRECHARGE only carries the row address into the bank, and ACTIVATE
// carries the column address, so the bank can sense just one row-buffer-sized
// segment of the row. READ and WRITE then move one 8-byte block between that
// segment and the data pins. The command type below is the decoded form that
// the decoder hands to the banks, the I/O timing and the timing monitor.
//
// Timing parameters follow the NVM column of the timing table: each is a DRAM
// cycle count scaled by a technology ratio (alpha = read energy, gamma = read
// latency, delta = write latency, all relative to DRAM) and, for the
// activation-rate limits, by the row buffer size relative to a 1 KB DRAM row.
// Ratios are passed as integers in hundredths; ceil_scale() rounds up to whole
// clock cycles of 1.875 ns.
package nvm_pkg;

  typedef enum logic [2:0] {
    CMD_NOP   = 3'd0,
    CMD_ACT   = 3'd1,  // ACTIVATE: column address, starts sensing
    CMD_PRE   = 3'd2,  // PRECHARGE: row address into the bank's row register
    CMD_RD    = 3'd3,
    CMD_WR    = 3'd4,
    CMD_OTHER = 3'd5   // refresh, mode register, ... : ignored by this chip
  } cmd_e;

  typedef struct packed {
    cmd_e        op;
    logic [2:0]  bank;
    logic [13:0] addr;  // row on PRE, column (A[9:0]) on ACT/RD/WR
  } cmd_t;

  // Timing-rule violations seen by the monitor, one flag per rule.
  typedef struct packed {
    logic rcd;   // READ/WRITE earlier than tRCD after ACTIVATE
    logic wr;    // PRECHARGE earlier than tWR after the write burst
    logic rrd;   // ACTIVATE earlier than tRRD after an ACTIVATE to any bank
    logic faw;   // fifth ACTIVATE inside a tFAW window
    logic rp;    // ACTIVATE earlier than tRP after PRECHARGE (tRP = 0 for NVM)
    logic rtp;   // PRECHARGE earlier than tRTP after READ (tRTP = 0 for NVM)
    logic seg;   // READ/WRITE to a bank with no open segment, or outside it
  } viol_t;

  // ceil(base * ratio_x100 * num / (100 * den)), the cycle count of one
  // timing-table entry.
  function automatic int ceil_scale(int base, int ratio_x100, int num, int den);
    longint p;
    p = longint'(base) * ratio_x100 * num;
    return int'((p + 100 * den - 1) / (100 * den));
  endfunction

endpackage
