// tb_fiau: streams random two's-complement mantissas through one FIFO-based
// alignment unit with random offsets and output lengths. The writer pushes
// bits whenever there is room, the reader steps only when r_ok; each output
// word must equal the top L bits of (mantissa >> offset). Also checks that
// the FIFO fills (w_ready low) and that the reader waits for unwritten bits.
module tb_fiau;
  import dcim_pkg::*;
  import dcim_tb_pkg::*;
  localparam int N = 300;
  logic clk = 0, rst_n = 0;
  logic [2:0] mw;
  logic w_en = 0, w_bit = 0, w_ready, step = 0, last = 0, r_bit, r_ok;
  logic [OFF_W-1:0] offset;
  logic [LEN_W-1:0] cnt;
  int checks = 0, failures = 0, full_seen = 0, wait_seen = 0;
  int mant [N];
  int offs [N];
  int lens [N];

  fiau dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  initial begin
    int k, b;
    bit ok;
    k = 0; b = 0;
    wait (rst_n);
    while (k < N) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0 && k > 5) begin
        w_en = 0;                 // idle sometimes so the reader must wait
      end else begin
        w_en  = 1;
        w_bit = 1'((mant[k] >> (int'(mw) - 1 - b)) & 1);
      end
      ok = w_en && w_ready;
      if (w_en && !w_ready) full_seen++;
      @(posedge clk);
      if (ok) begin
        b++;
        if (b == int'(mw)) begin b = 0; k++; end
      end
    end
    @(negedge clk); w_en = 0;
  end

  initial begin
    longint got, want;
    mw = 3'd5;
    for (int k = 0; k < N; k++) begin
      mant[k] = $urandom_range(0, (1 << 5) - 1) - 16;
      offs[k] = (k % 7 == 0) ? 0 : $urandom_range(0, 12);
      lens[k] = $urandom_range(2, 12);
    end
    offset = '0; cnt = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < N; k++) begin
      got = 0;
      offset = OFF_W'(offs[k]);
      for (int c = 0; c < lens[k]; c++) begin
        cnt = LEN_W'(c);
        @(negedge clk);
        last = (c == lens[k] - 1);
        #1;
        while (!r_ok) begin
          wait_seen++;
          step = 0; @(negedge clk);
        end
        got  = (got << 1) | longint'(r_bit);
        step = 1;
        @(posedge clk); #1;
        step = 0; last = 0;
      end
      // sign-extend the L-bit word
      if (got >= (longint'(1) << (lens[k] - 1))) got -= (longint'(1) << lens[k]);
      want = align_ref(mant[k], 5, offs[k], lens[k]);
      checks++;
      if (got != want) begin
        failures++;
        $display("FAIL k=%0d m=%0d off=%0d L=%0d got=%0d want=%0d", k, mant[k], offs[k], lens[k], got, want);
      end
    end
    checks++; if (full_seen == 0) begin failures++; $display("FAIL FIFO never full"); end
    checks++; if (wait_seen == 0) begin failures++; $display("FAIL reader never waited"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
