// tb_weight_buffer: fills the 64-row weight image and the 48 weight scales
// with random data and reads them back.
module tb_weight_buffer;
  import dcim_pkg::*;
  logic clk = 0, wm_wr_en = 0, we_wr_en = 0;
  logic [$clog2(ROWS)-1:0] wm_wr_row = '0, rd_row = '0;
  logic [SRAM_W-1:0] wm_wr_data = '0, rd_data;
  logic [$clog2(NCOL)-1:0] we_wr_lane = '0;
  logic signed [WEXP_W-1:0] we_wr_data = '0;
  logic signed [WEXP_W-1:0] wexp [NCOL];
  int checks = 0, failures = 0;
  logic [SRAM_W-1:0] img [ROWS];
  logic [WEXP_W-1:0] sc [NCOL];

  weight_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      img[r] = {$urandom, $urandom, $urandom};
      @(negedge clk); wm_wr_en = 1; wm_wr_row = 6'(r); wm_wr_data = img[r];
    end
    @(negedge clk); wm_wr_en = 0;
    for (int l = 0; l < NCOL; l++) begin
      sc[l] = 8'($urandom);
      @(negedge clk); we_wr_en = 1; we_wr_lane = 6'(l); we_wr_data = sc[l];
    end
    @(negedge clk); we_wr_en = 0;
    for (int r = 0; r < ROWS; r++) begin
      rd_row = 6'(r); #1;
      checks++;
      if (rd_data != img[r]) failures++;
    end
    for (int l = 0; l < NCOL; l++) begin
      checks++;
      if (wexp[l] != sc[l]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
