// nvm_cmd_decoder: DDR3-style command pins to the chip's decoded command.
//
// The chip keeps the JEDEC DDR3 pinout and encodings (CS#, RAS#, CAS#, WE#):
// RAS# low alone is ACTIVATE, RAS# and WE# low is PRECHARGE, CAS# low alone is
// READ, CAS# and WE# low is WRITE, all pins high (or CS# high) is no operation.
// What changes is what the address pins carry: on PRECHARGE they carry the row
// address (A[13:0], so A10 is an ordinary row bit and there is no
// precharge-all), on ACTIVATE the column address (A[9:0]). Those meanings come
// from the access protocol of the design; keeping the DDR3 encodings is this
// implementation's choice. Only the four NVM commands are decoded; refresh and
// the other DDR3 commands come out as CMD_OTHER and are ignored downstream.
//
// Timing: the command is sampled on the rising clock edge and the decoded
// command is registered, so it is valid for exactly one cycle, one cycle
// after the pins. Reset returns a NOP.
module nvm_cmd_decoder
  import nvm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cs_n,
  input  logic        ras_n,
  input  logic        cas_n,
  input  logic        we_n,
  input  logic [2:0]  ba,
  input  logic [13:0] addr,
  output cmd_t        cmd
);
  cmd_e op_d;

  always_comb begin
    if (cs_n) op_d = CMD_NOP;
    else unique case ({ras_n, cas_n, we_n})
      3'b111: op_d = CMD_NOP;
      3'b011: op_d = CMD_ACT;
      3'b010: op_d = CMD_PRE;
      3'b101: op_d = CMD_RD;
      3'b100: op_d = CMD_WR;
      default: op_d = CMD_OTHER;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd <= '{op: CMD_NOP, bank: '0, addr: '0};
    end else begin
      cmd.op   <= op_d;
      cmd.bank <= ba;
      cmd.addr <= addr;
    end
  end
endmodule
