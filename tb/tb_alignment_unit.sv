// tb_alignment_unit: aligns random 64-element groups in fixed and dynamic
// mode. Mantissas are written bit-serially while the config register is
// loaded; in dynamic mode the bitwidth arrives three cycles later, as from the
// prediction unit. Every row's serial output must equal the top L bits of
// (mantissa >> offset), with L = B+1; bit_first/bit_last must frame the
// group; a group with B_fix = 1 must stall for the late bitwidth and one with
// B_fix >= 2 must not.
module tb_alignment_unit;
  import dcim_pkg::*;
  import dcim_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [2:0] mw;
  logic dyn, cfg_load = 0, bg_valid = 0, w_en = 0, w_ready, r_en = 0, busy;
  logic [3:0] bfix;
  logic [OFF_W-1:0] offsets_in [ROWS];
  logic [BG_W-1:0] bg;
  logic [ROWS-1:0] w_bits = '0, bits;
  logic bit_valid, bit_first, bit_last, ev_len_stall, ev_data_stall;
  logic [LEN_W-1:0] len_o;
  int checks = 0, failures = 0, len_stalls = 0;

  alignment_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (ev_len_stall) len_stalls++;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int mant [ROWS];
  int offs [ROWS];
  longint got [ROWS];
  int nbits, L, firsts;

  // collect the serial output
  always @(posedge clk) begin
    if (bit_valid) begin
      if (bit_first) begin
        firsts++;
        for (int r = 0; r < ROWS; r++) got[r] = 0;
        nbits = 0;
      end
      for (int r = 0; r < ROWS; r++) got[r] = (got[r] << 1) | longint'(bits[r]);
      nbits++;
    end
  end

  task automatic run_group(input bit d, input int bf, input int bgv, input int ebits);
    int stalls0;
    mw   = mant_width(3'(ebits));
    dyn  = d;
    bfix = 4'(bf);
    for (int r = 0; r < ROWS; r++) begin
      mant[r] = $urandom_range(0, (1 << mw) - 1) - (1 << (mw - 1));
      offs[r] = (r == 5) ? 0 : $urandom_range(0, (ebits == 5) ? 20 : 6);
      offsets_in[r] = OFF_W'(offs[r]);
    end
    L = (d ? bgv : bf) + 1;
    stalls0 = len_stalls;
    firsts = 0;
    @(negedge clk);
    cfg_load = 1;
    fork
      begin
        for (int b = 0; b < mw; b++) begin
          for (int r = 0; r < ROWS; r++) w_bits[r] = 1'((mant[r] >> (int'(mw) - 1 - b)) & 1);
          w_en = 1;
          @(negedge clk);
          cfg_load = 0;
          r_en = 1;
        end
        w_en = 0;
      end
      begin
        if (d) begin
          repeat (3) @(negedge clk);
          bg = BG_W'(bgv); bg_valid = 1;
          @(negedge clk); bg_valid = 0;
        end
      end
    join
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    r_en = 0;
    checks++;
    if (firsts != 1 || nbits != L || int'(len_o) != L) begin
      failures++;
      $display("FAIL framing firsts=%0d nbits=%0d L=%0d len_o=%0d", firsts, nbits, L, len_o);
    end
    for (int r = 0; r < ROWS; r++) begin
      longint v;
      v = got[r];
      if (v >= (longint'(1) << (L - 1))) v -= (longint'(1) << L);
      checks++;
      if (v != align_ref(mant[r], int'(mw), offs[r], L)) begin
        failures++;
        $display("FAIL row=%0d m=%0d off=%0d L=%0d got=%0d", r, mant[r], offs[r], L, v);
      end
    end
    checks++;
    if (d && bf <= 1 && len_stalls == stalls0) begin failures++; $display("FAIL no length stall"); end
    if (bf >= 2 && len_stalls != stalls0)      begin failures++; $display("FAIL unexpected stall"); end
  endtask

  initial begin
    int bf, bgv;
    for (int r = 0; r < ROWS; r++) offsets_in[r] = '0;
    mw = 3'd5; dyn = 0; bfix = 4'd4; bg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      bf  = (t % 10 == 0) ? 1 : $urandom_range(2, 9);
      bgv = $urandom_range(bf, 11);
      run_group(t % 2 == 0, bf, bgv, 2 + (t % 4));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
