// tb_max_exp_offset: random exponent groups; checks Emax, every offset and the
// one-cycle latency against a reference maximum.
module tb_max_exp_offset;
  import dcim_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [EXP_W-1:0] exps [ROWS];
  logic [EXP_W-1:0] emax;
  logic [OFF_W-1:0] offset [ROWS];
  int checks = 0, failures = 0;

  max_exp_offset dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mx, span;
    for (int i = 0; i < ROWS; i++) exps[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      span = (t % 4 == 0) ? 1 : (t % 4 == 1) ? 4 : (t % 4 == 2) ? 16 : 31;
      mx = 0;
      for (int i = 0; i < ROWS; i++) begin
        exps[i] = EXP_W'(1 + $urandom_range(0, span - 1));
        if (int'(exps[i]) > mx) mx = int'(exps[i]);
      end
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid || int'(emax) != mx) begin
        failures++;
        $display("FAIL t=%0d valid=%0b emax=%0d exp=%0d", t, out_valid, emax, mx);
      end
      for (int i = 0; i < ROWS; i++) begin
        checks++;
        if (int'(offset[i]) != mx - int'(exps[i])) failures++;
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
