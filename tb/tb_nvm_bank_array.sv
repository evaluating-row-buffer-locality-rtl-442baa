// tb_nvm_bank_array: random block-masked writes and segment reads against a
// reference copy of the array kept in the testbench. Checks that a read
// returns the whole segment one clock after rd_en, that only the masked
// blocks of a write change, and that different rows and segments do not alias.
module tb_nvm_bank_array;
  localparam int ROWS = 8, SEGS = 4, LANES = 4, BLK = 64;
  logic clk = 0;
  logic rd_en, wr_en;
  logic [2:0] rd_row, wr_row;
  logic [1:0] rd_seg, wr_seg;
  logic [LANES-1:0] wr_lane_mask;
  logic [LANES-1:0][BLK-1:0] rd_data, wr_data;
  logic [LANES-1:0][BLK-1:0] ref_mem [ROWS][SEGS];
  int checks = 0, failures = 0;

  nvm_bank_array #(.ROWS(ROWS), .SEGS(SEGS), .LANES(LANES), .BLK_BITS(BLK)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; rd_row = 0; rd_seg = 0; wr_row = 0; wr_seg = 0;
    wr_lane_mask = 0; wr_data = 0;
    // fill everything so the reference is known
    for (int r = 0; r < ROWS; r++)
      for (int s = 0; s < SEGS; s++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 3'(r); wr_seg = 2'(s); wr_lane_mask = '1;
        for (int l = 0; l < LANES; l++) wr_data[l] = {$urandom, $urandom};
        ref_mem[r][s] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      wr_en = $urandom_range(0, 1);
      wr_row = 3'($urandom); wr_seg = 2'($urandom); wr_lane_mask = 4'($urandom);
      for (int l = 0; l < LANES; l++) wr_data[l] = {$urandom, $urandom};
      rd_en = 1; rd_row = 3'($urandom); rd_seg = 2'($urandom);
      begin
        logic [LANES-1:0][BLK-1:0] exp;
        exp = ref_mem[rd_row][rd_seg];   // read-before-write in the same cycle
        if (wr_en) for (int l = 0; l < LANES; l++)
          if (wr_lane_mask[l]) ref_mem[wr_row][wr_seg][l] = wr_data[l];
        @(posedge clk); #1;
        checks++;
        if (rd_data != exp) begin
          failures++;
          $display("read row %0d seg %0d mismatch", rd_row, rd_seg);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
