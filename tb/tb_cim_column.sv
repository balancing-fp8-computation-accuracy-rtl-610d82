// tb_cim_column: writes random 2b slices into a 64x2b column through one-hot
// word lines and checks the signed column result for random input bit
// vectors, with the signed number flag off and on, against a direct sum.
module tb_cim_column;
  import dcim_pkg::*;
  logic clk = 0;
  logic [ROWS-1:0] wl = '0, in_bits = '0;
  logic [1:0] wdata = '0;
  logic snf = 0;
  logic signed [COL_W-1:0] col;
  int checks = 0, failures = 0;
  int w [ROWS];

  cim_column dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int want;
    for (int pass = 0; pass < 4; pass++) begin
      for (int r = 0; r < ROWS; r++) begin
        w[r] = (pass == 3) ? 3 : $urandom_range(0, 3);
        @(negedge clk);
        wl = '0; wl[r] = 1'b1; wdata = 2'(w[r]);
        @(negedge clk);
        wl = '0;
      end
      for (int t = 0; t < 100; t++) begin
        in_bits = (pass == 3 && t == 0) ? '1 : {$urandom, $urandom};
        snf = 1'(t & 1);
        #1;
        want = 0;
        for (int r = 0; r < ROWS; r++) begin
          if (in_bits[r]) begin
            if (snf) want += (w[r] >= 2) ? (w[r] - 4) : w[r];   // signed 2b slice
            else     want += w[r];
          end
        end
        checks++;
        if (int'(col) != want) begin
          failures++;
          $display("FAIL pass=%0d t=%0d snf=%0b col=%0d want=%0d", pass, t, snf, col, want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
