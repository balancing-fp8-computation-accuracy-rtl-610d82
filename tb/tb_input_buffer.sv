// tb_input_buffer: writes random FP8 vectors in every format and reads back
// the effective exponents (parallel) and the two's-complement mantissas bit by
// bit (serial, MSB first), compared with an independent FP8 field decoder.
module tb_input_buffer;
  import dcim_pkg::*;
  import dcim_tb_pkg::*;
  logic clk = 0;
  logic wr_en = 0;
  logic [3:0] wr_addr = '0, exp_raddr = '0, mant_raddr = '0;
  logic [7:0] wr_code [ROWS];
  logic [2:0] wr_ebits = 3'd4, mant_bit = '0, mant_w;
  logic [EXP_W-1:0] exp_rdata [ROWS];
  logic [ROWS-1:0] mant_rbits;
  int checks = 0, failures = 0;
  int codes [16][ROWS];

  input_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, m, mw, got;
    for (int eb = 2; eb <= 5; eb++) begin
      wr_ebits = 3'(eb);
      mw = 9 - eb;
      mant_w = 3'(mw);
      for (int v = 0; v < 16; v++) begin
        for (int r = 0; r < ROWS; r++) begin
          codes[v][r] = $urandom_range(0, 255);
          wr_code[r] = 8'(codes[v][r]);
        end
        @(negedge clk); wr_en = 1; wr_addr = 4'(v);
        @(negedge clk); wr_en = 0;
      end
      for (int v = 0; v < 16; v++) begin
        exp_raddr = 4'(v); mant_raddr = 4'(v);
        #1;
        for (int r = 0; r < ROWS; r++) begin
          fp8_fields(codes[v][r], eb, e, m);
          got = 0;
          for (int b = 0; b < mw; b++) begin
            mant_bit = 3'(b);
            #1;
            got = (got << 1) | int'(mant_rbits[r]);
          end
          if (got >= (1 << (mw - 1))) got -= (1 << mw);
          checks++;
          if (int'(exp_rdata[r]) != e || got != m) begin
            failures++;
            $display("FAIL eb=%0d code=%h exp=%0d/%0d mant=%0d/%0d", eb, codes[v][r], exp_rdata[r], e, got, m);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
