// tb_nvm_cmd_decoder: checks every combination of CS#, RAS#, CAS#, WE# against
// the DDR3 encodings (ACT, PRE, READ, WRITE, NOP, everything else OTHER), and
// that bank and address pass through with one cycle of latency. Random bank
// and address values; reset must give a NOP.
module tb_nvm_cmd_decoder;
  import nvm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cs_n, ras_n, cas_n, we_n;
  logic [2:0] ba;
  logic [13:0] addr;
  cmd_t cmd;
  int checks = 0, failures = 0;

  nvm_cmd_decoder dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic cmd_e expect_op(logic c, logic r, logic a, logic w);
    if (c) return CMD_NOP;
    case ({r, a, w})
      3'b111: return CMD_NOP;
      3'b011: return CMD_ACT;
      3'b010: return CMD_PRE;
      3'b101: return CMD_RD;
      3'b100: return CMD_WR;
      default: return CMD_OTHER;
    endcase
  endfunction

  initial begin
    {cs_n, ras_n, cas_n, we_n} = 4'b0011;  // an ACT pattern held in reset
    ba = 3'd5; addr = 14'h1234;
    @(negedge clk); @(negedge clk);
    checks++;
    if (cmd.op != CMD_NOP) begin failures++; $display("reset not NOP"); end
    rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int v = 0; v < 16; v++) begin
        logic [2:0] b; logic [13:0] a;
        b = 3'($urandom); a = 14'($urandom);
        {cs_n, ras_n, cas_n, we_n} = 4'(v);
        ba = b; addr = a;
        @(posedge clk); #1;
        checks++;
        if (cmd.op != expect_op(v[3], v[2], v[1], v[0]) || cmd.bank != b || cmd.addr != a) begin
          failures++;
          $display("pins %b: got op %s bank %0d addr %h", 4'(v), cmd.op.name(), cmd.bank, cmd.addr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
