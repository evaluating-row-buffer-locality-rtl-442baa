// tb_nvm_io_gating: random row-buffer contents for every bank; checks that the
// read side returns exactly bank rd_bank, block rd_lane, and that the write
// side enables one bank, the addressed one, only when wr_valid is high.
module tb_nvm_io_gating;
  localparam int BANKS = 8, LANES = 8, BLK = 64;
  logic [BANKS-1:0][LANES-1:0][BLK-1:0] rb_data;
  logic [2:0] rd_bank, rd_lane, wr_bank;
  logic [BLK-1:0] rd_data;
  logic wr_valid;
  logic [BANKS-1:0] bank_wr_en;
  int checks = 0, failures = 0;

  nvm_io_gating #(.BANKS(BANKS), .LANES(LANES), .BLK_BITS(BLK)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      for (int b = 0; b < BANKS; b++)
        for (int l = 0; l < LANES; l++) rb_data[b][l] = {$urandom, $urandom};
      rd_bank = 3'($urandom); rd_lane = 3'($urandom);
      wr_bank = 3'($urandom); wr_valid = $urandom_range(0, 1);
      #1;
      checks++;
      if (rd_data != rb_data[rd_bank][rd_lane]) begin
        failures++; $display("read select bank %0d lane %0d wrong", rd_bank, rd_lane);
      end
      checks++;
      if (bank_wr_en != (wr_valid ? (8'b1 << wr_bank) : 8'b0)) begin
        failures++; $display("write enable %b wrong", bank_wr_en);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
