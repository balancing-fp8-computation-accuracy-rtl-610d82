// tb_int2fp: random integers and scales; the FP32 result must be the exact
// value in*2^scale truncated to 24 significant bits, zero must give zero, and
// out-of-range scales must flush to zero or saturate to infinity.
module tb_int2fp;
  import dcim_pkg::*;
  import dcim_tb_pkg::*;
  logic signed [FUS_W-1:0] in;
  logic signed [SCALE_W-1:0] scale;
  logic [31:0] fp;
  int checks = 0, failures = 0;

  int2fp dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real exact;
    int v, sh;
    for (int t = 0; t < 2000; t++) begin
      v  = $urandom_range(0, (1 << 28) - 1);
      sh = $urandom_range(0, 27);
      v  = v >> sh;
      in = FUS_W'(v);
      if (t % 2 == 1) in = -in;
      sh = $urandom_range(0, 80);
      scale = SCALE_W'(sh - 40);
      #1;
      v = int'(in);
      sh = int'(scale);
      exact = real'(v) * (2.0 ** sh);
      checks++;
      if (!fp32_close(fp, exact) || (in != 0 && fp[31] != in[FUS_W-1])) begin
        failures++;
        $display("FAIL in=%0d scale=%0d fp=%h", in, scale, fp);
      end
    end
    in = '0; scale = 3; #1; checks++; if (fp[30:0] != 0) failures++;
    in = 5; scale = -140; #1; checks++; if (fp[30:0] != 0) failures++;
    in = -5; scale = 200; #1; checks++; if (fp != 32'hFF80_0000) failures++;
    in = 3; scale = 0; #1; checks++; if (fp != 32'h4040_0000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
