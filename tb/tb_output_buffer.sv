// tb_output_buffer: writes random 48-lane entries and reads every lane back
// through the registered read port, checking data and one-cycle latency.
module tb_output_buffer;
  import dcim_pkg::*;
  logic clk = 0, wr_en = 0;
  logic [3:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data [NCOL];
  logic [$clog2(NCOL)-1:0] rd_lane = '0;
  logic [31:0] rd_data;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [16][NCOL];

  output_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 16; e++) begin
      for (int l = 0; l < NCOL; l++) begin
        ref_mem[e][l] = $urandom;
        wr_data[l] = ref_mem[e][l];
      end
      @(negedge clk); wr_en = 1; wr_addr = 4'(e);
      @(negedge clk); wr_en = 0;
    end
    for (int e = 0; e < 16; e++)
      for (int l = 0; l < NCOL; l++) begin
        @(negedge clk); rd_addr = 4'(e); rd_lane = 6'(l);
        @(negedge clk);
        checks++;
        if (rd_data != ref_mem[e][l]) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
