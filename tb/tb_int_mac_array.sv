// tb_int_mac_array: loads random weight images through the word-line write
// port, streams random L-bit two's-complement inputs MSB first and checks
// every column accumulator against sum_i a_i * slice_c[i] (top slices signed),
// for all four weight modes, plus the one-cycle `done` after the last bit.
module tb_int_mac_array;
  import dcim_pkg::*;
  logic clk = 0, rst_n = 0;
  wmode_e wmode;
  logic w_en = 0;
  logic [$clog2(ROWS)-1:0] w_row = '0;
  logic [SRAM_W-1:0] w_data = '0;
  logic [ROWS-1:0] in_bits = '0;
  logic bit_valid = 0, bit_first = 0, bit_last = 0, done;
  logic signed [ACC_W-1:0] acc [NCOL];
  int checks = 0, failures = 0;
  logic [SRAM_W-1:0] img [ROWS];
  int a [ROWS];

  int_mac_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int L, n, sl, want;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 16; t++) begin
      wmode = wmode_e'(t % 4);
      n = (t % 4) + 1;
      for (int r = 0; r < ROWS; r++) begin
        img[r] = {$urandom, $urandom, $urandom};
        @(negedge clk); w_en = 1; w_row = 6'(r); w_data = img[r];
      end
      @(negedge clk); w_en = 0;
      L = $urandom_range(2, 12);
      for (int r = 0; r < ROWS; r++) a[r] = $urandom_range(0, (1 << L) - 1) - (1 << (L - 1));
      for (int b = L - 1; b >= 0; b--) begin
        for (int r = 0; r < ROWS; r++) in_bits[r] = 1'((a[r] >> b) & 1);
        bit_valid = 1; bit_first = (b == L - 1); bit_last = (b == 0);
        @(negedge clk);
      end
      bit_valid = 0; bit_first = 0; bit_last = 0;
      checks++;
      if (!done) begin failures++; $display("FAIL done not one cycle after last bit"); end
      for (int c = 0; c < NCOL; c++) begin
        want = 0;
        for (int r = 0; r < ROWS; r++) begin
          sl = int'(img[r][2*c +: 2]);
          if ((c % n) == n - 1 && sl >= 2) sl -= 4;
          want += a[r] * sl;
        end
        checks++;
        if (int'(acc[c]) != want) begin
          failures++;
          $display("FAIL t=%0d col=%0d acc=%0d want=%0d", t, c, acc[c], want);
        end
      end
      @(negedge clk);
      checks++;
      if (done) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
