// tb_fusion_unit: random column accumulations in all four weight modes;
// every fused lane must equal sum_j acc[n*w+j]*4^j and unused lanes zero.
module tb_fusion_unit;
  import dcim_pkg::*;
  wmode_e wmode;
  logic signed [ACC_W-1:0] acc [FU_COLS];
  logic signed [FUS_W-1:0] out [FU_COLS];
  int checks = 0, failures = 0;

  fusion_unit dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint want;
    int n, v;
    for (int t = 0; t < 400; t++) begin
      wmode = wmode_e'(t % 4);
      n = (t % 4) + 1;
      for (int c = 0; c < FU_COLS; c++) begin
        v = $urandom_range(0, 1 << 20);
        acc[c] = ACC_W'(v - (1 << 19));
      end
      #1;
      for (int l = 0; l < FU_COLS; l++) begin
        want = 0;
        if (l < FU_COLS / n)
          for (int j = 0; j < n; j++) want += longint'(acc[n*l + j]) * (longint'(1) << (2*j));
        checks++;
        if (longint'(out[l]) != want) begin
          failures++;
          $display("FAIL mode=%0d lane=%0d got=%0d want=%0d", n, l, out[l], want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
