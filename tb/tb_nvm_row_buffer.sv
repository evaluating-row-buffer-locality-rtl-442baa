// tb_nvm_row_buffer: loads, single-block writes and write-back cleaning of the
// row buffer latches against a reference model: contents, the per-block dirty
// mask, write priority over a simultaneous load, and reset of the dirty mask.
module tb_nvm_row_buffer;
  localparam int LANES = 8, BLK = 64;
  logic clk = 0, rst_n = 0;
  logic load, wr_en, clean;
  logic [LANES-1:0][BLK-1:0] load_data, data;
  logic [2:0] wr_lane;
  logic [BLK-1:0] wr_data;
  logic [LANES-1:0] dirty;
  logic [LANES-1:0][BLK-1:0] ref_data;
  logic [LANES-1:0] ref_dirty;
  int checks = 0, failures = 0;

  nvm_row_buffer #(.LANES(LANES), .BLK_BITS(BLK)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; wr_en = 0; clean = 0; load_data = '0; wr_lane = 0; wr_data = '0;
    @(negedge clk); @(negedge clk);
    checks++;
    if (dirty != '0) begin failures++; $display("dirty not reset"); end
    rst_n = 1;
    // first load everything so contents are known
    @(negedge clk);
    load = 1;
    for (int l = 0; l < LANES; l++) load_data[l] = {$urandom, $urandom};
    ref_data = load_data; ref_dirty = '0;
    @(negedge clk); load = 0;
    for (int it = 0; it < 500; it++) begin
      load = ($urandom_range(0, 7) == 0);
      wr_en = $urandom_range(0, 1);
      clean = ($urandom_range(0, 5) == 0);
      wr_lane = 3'($urandom);
      wr_data = {$urandom, $urandom};
      for (int l = 0; l < LANES; l++) load_data[l] = {$urandom, $urandom};
      for (int l = 0; l < LANES; l++) begin
        if (wr_en && wr_lane == 3'(l)) begin
          ref_data[l] = wr_data; ref_dirty[l] = 1;
        end else begin
          if (load) ref_data[l] = load_data[l];
          if (clean) ref_dirty[l] = 0;
        end
      end
      @(negedge clk);
      checks++;
      if (data != ref_data || dirty != ref_dirty) begin
        failures++;
        $display("it %0d: dirty %b exp %b", it, dirty, ref_dirty);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
