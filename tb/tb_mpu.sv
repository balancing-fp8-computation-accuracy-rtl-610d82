// tb_mpu: random and corner-case shift groups under several (k, B_fix)
// settings. Checks the predicted bitwidth against a bit-exact fixed-point
// model and against the real-valued formula (within one bit), the 3-cycle
// latency, and that nothing moves while the unit is disabled.
module tb_mpu;
  import dcim_pkg::*;
  import dcim_tb_pkg::*;
  logic clk = 0, rst_n = 0, enable = 1, in_valid = 0, out_valid;
  logic [OFF_W-1:0] shift [ROWS];
  logic [2:0] k2;
  logic [3:0] bfix;
  logic [BG_W-1:0] bg;
  int checks = 0, failures = 0;

  mpu dut (.*);
  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sh [64];
    int exp_b, real_b, lat, spread;
    for (int i = 0; i < ROWS; i++) shift[i] = '0;
    k2 = 3'd2; bfix = 4'd4;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      k2   = 3'($urandom_range(2, 6));
      bfix = 4'($urandom_range(1, 8));
      spread = $urandom_range(0, 12);
      for (int i = 0; i < 64; i++) begin
        sh[i] = (i == 0) ? 0 : $urandom_range(0, spread);
        if (t == 0) sh[i] = 0;                      // all equal: B_dyn = 0
        if (t == 1) sh[i] = (i == 0) ? 0 : 3;       // almost all 3
        if (t == 2) sh[i] = (i == 0) ? 0 : 6;       // almost all 6
        shift[i] = OFF_W'(sh[i]);
      end
      if (t < 3) begin k2 = 3'd2; bfix = 4'd0; end
      exp_b  = mpu_ref(sh, int'(k2), int'(bfix));
      real_b = mpu_real(sh, int'(k2), int'(bfix));
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      lat = 1;
      while (!out_valid && lat < 10) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 3) begin failures++; $display("FAIL latency %0d", lat); end
      checks++;
      if (int'(bg) != exp_b) begin
        failures++; $display("FAIL t=%0d bg=%0d model=%0d", t, bg, exp_b);
      end
      checks++;
      if (int'(bg) > real_b + 1 || int'(bg) < real_b - 1) begin
        failures++; $display("FAIL t=%0d bg=%0d real=%0d", t, bg, real_b);
      end
      if (t == 0) begin checks++; if (bg != 5'd1) failures++; end   // 0 -> clamped to 1
      if (t == 1) begin checks++; if (bg != 5'd3) failures++; end   // B_dyn = 23.6/8.9 -> 3 (k = 1)
      if (t == 2) begin checks++; if (int'(bg) > 4) failures++; end // stays near 3
    end
    // disabled: in_valid is ignored
    enable = 0;
    @(negedge clk); in_valid = 1;
    @(negedge clk); in_valid = 0;
    repeat (4) begin
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
