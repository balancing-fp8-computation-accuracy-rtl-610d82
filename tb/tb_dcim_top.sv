// tb_dcim_top: end-to-end test of the FP8 DCIM macro at its default size.
//
// For each of six configurations (dynamic "precise" and "efficient" settings,
// fixed 8b and 4b settings, and two small-B_fix corner settings) it writes a
// random weight image and weight scales, loads the SRAM, writes 16 random FP8
// input groups, runs them and reads back every result lane. The expected
// value of each lane is computed here from the FP8 codes: per-group maximum
// exponent, offsets, the bitwidth (fixed, or the shift-aware formula),
// truncating alignment to B+1 bits, the integer dot product with the weights
// and the FP32 conversion. It also counts how often each mechanism occurred:
// dynamic prediction, clock-gated (fixed) groups, every weight width, the
// stall for a late bitwidth, the alignment FIFO filling up and the alignment
// waiting for mantissa bits, and fails if one never did.
module tb_dcim_top;
  import dcim_pkg::*;
  import dcim_tb_pkg::*;

  localparam int NV = 16;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_wr_en = 0;
  logic [3:0] in_wr_addr = '0;
  logic [7:0] in_wr_code [ROWS];
  logic wm_wr_en = 0, we_wr_en = 0, load_w = 0, start = 0, busy, done;
  logic ev_len_stall, ev_data_stall;
  logic [5:0] wm_wr_row = '0, we_wr_lane = '0, ob_rd_lane = '0;
  logic [SRAM_W-1:0] wm_wr_data = '0;
  logic signed [WEXP_W-1:0] we_wr_data = '0;
  logic [4:0] n_vec = '0;
  logic [3:0] ob_rd_addr = '0;
  logic [31:0] ob_rd_data;
  int checks = 0, failures = 0;

  dcim_top dut (.*);
  always #5 clk = ~clk;

  // mechanism counters
  int n_dyn = 0, n_fixed = 0, n_len_stall = 0, n_fifo_full = 0, n_data_wait = 0;
  int n_mode [4] = '{0, 0, 0, 0};
  int n_gated = 0;
  always @(posedge clk) begin
    if (ev_len_stall)  n_len_stall++;
    if (ev_data_stall) n_data_wait++;
    if (dut.al_w_en && !dut.al_w_ready) n_fifo_full++;
    if (busy && !cfg.dyn) n_gated++;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int codes [NV][ROWS];
  int wint  [NCOL][ROWS];
  int wsc   [NCOL];

  task automatic run_cfg(input int ebits, input bit dyn, input int k2, input int bfix,
                         input int wm, input int espread);
    int n, nw, e [ROWS], m [ROWS], d [ROWS], emax, L, mw, bias, cyc;
    longint a [ROWS];
    longint dot;
    real exact;
    logic [SRAM_W-1:0] row;
    cfg.ebits = 3'(ebits); cfg.dyn = dyn; cfg.k2 = 3'(k2); cfg.bfix = 4'(bfix);
    cfg.wmode = wmode_e'(wm);
    n  = wm + 1;
    nw = NCOL / n;
    mw = 9 - ebits;
    bias = (1 << (ebits - 1)) - 1;
    // weights: nw signed integers of 2n bits per row, and their scales
    for (int w = 0; w < nw; w++) begin
      wsc[w] = $urandom_range(0, 10) - 5;
      for (int r = 0; r < ROWS; r++) wint[w][r] = $urandom_range(0, (1 << (2*n)) - 1) - (1 << (2*n - 1));
    end
    for (int r = 0; r < ROWS; r++) begin
      row = '0;
      for (int w = 0; w < nw; w++)
        for (int j = 0; j < n; j++)
          row[2*(n*w + j) +: 2] = 2'((wint[w][r] >> (2*j)) & 3);
      @(negedge clk); wm_wr_en = 1; wm_wr_row = 6'(r); wm_wr_data = row;
    end
    @(negedge clk); wm_wr_en = 0;
    for (int l = 0; l < NCOL; l++) begin
      @(negedge clk); we_wr_en = 1; we_wr_lane = 6'(l); we_wr_data = WEXP_W'((l < nw) ? wsc[l] : 0);
    end
    @(negedge clk); we_wr_en = 0; load_w = 1;
    @(negedge clk); load_w = 0;
    while (!done) @(negedge clk);
    // input groups: a random exponent centre, spread of `espread`
    for (int v = 0; v < NV; v++) begin
      int c, ex, mx;
      mx = (1 << ebits) - 1;
      c = $urandom_range(1, mx);
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        ex = c - $urandom_range(0, espread);
        if (ex < 0) ex = 0;
        codes[v][r] = ($urandom_range(0, 1) << 7) | (ex << (7 - ebits)) | $urandom_range(0, (1 << (7 - ebits)) - 1);
        in_wr_code[r] = 8'(codes[v][r]);
      end
      in_wr_en = 1; in_wr_addr = 4'(v);
    end
    @(negedge clk); in_wr_en = 0;
    n_vec = 5'(NV); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    // check every group and lane
    for (int v = 0; v < NV; v++) begin
      emax = 0;
      for (int r = 0; r < ROWS; r++) begin
        fp8_fields(codes[v][r], ebits, e[r], m[r]);
        if (e[r] > emax) emax = e[r];
      end
      for (int r = 0; r < ROWS; r++) d[r] = emax - e[r];
      L = (dyn ? mpu_ref(d, k2, bfix) : bfix) + 1;
      if (dyn) n_dyn++; else n_fixed++;
      n_mode[wm]++;
      for (int r = 0; r < ROWS; r++) a[r] = align_ref(m[r], mw, d[r], L);
      for (int w = 0; w < nw; w++) begin
        dot = 0;
        for (int r = 0; r < ROWS; r++) dot += a[r] * longint'(wint[w][r]);
        exact = real'(dot) * (2.0 ** (emax - bias + 2 - L + wsc[w]));
        @(negedge clk); ob_rd_addr = 4'(v); ob_rd_lane = 6'(w);
        @(negedge clk);
        checks++;
        if (!fp32_close(ob_rd_data, exact)) begin
          failures++;
          if (failures < 10)
            $display("FAIL cfg e%0d dyn=%0b wm=%0d group=%0d lane=%0d got=%h (%f) want %f",
                     ebits, dyn, wm, v, w, ob_rd_data, fp32_real(ob_rd_data), exact);
        end
      end
    end
    $display("config E%0dM%0d dyn=%0b k=%0d/2 Bfix=%0d W%0db: %0d groups in %0d cycles",
             ebits, 7 - ebits, dyn, k2, bfix, 2*n, NV, cyc);
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) in_wr_code[r] = '0;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_cfg(4, 1, 2, 6, 2, 6);   // "precise": k = 1, B_fix = 6, 6b weights (E4M3 inputs)
    run_cfg(5, 1, 4, 4, 2, 8);   // "efficient": k = 2, B_fix = 4 (E5M2 inputs)
    run_cfg(5, 0, 0, 7, 3, 8);   // fixed 8/8b ("E5M7")
    run_cfg(5, 0, 0, 3, 1, 8);   // fixed 4/4b ("E5M3")
    run_cfg(2, 1, 6, 1, 0, 3);   // dynamic, B_fix = 1, 2b weights: waits for the bitwidth
    run_cfg(2, 0, 0, 1, 0, 3);   // fixed 2b inputs from 7b mantissas
    checks++; if (n_dyn == 0)       begin failures++; $display("FAIL no dynamic group"); end
    checks++; if (n_fixed == 0)     begin failures++; $display("FAIL no fixed group"); end
    checks++; if (n_gated == 0)     begin failures++; $display("FAIL predictor never gated"); end
    checks++; if (n_len_stall == 0) begin failures++; $display("FAIL no bitwidth stall"); end
    checks++; if (n_fifo_full == 0) begin failures++; $display("FAIL FIFO never full"); end
    checks++; if (n_data_wait == 0) begin failures++; $display("FAIL alignment never waited for data"); end
    for (int i = 0; i < 4; i++) begin
      checks++; if (n_mode[i] == 0) begin failures++; $display("FAIL weight mode %0d unused", i); end
    end
    $display("mechanisms: dyn=%0d fixed=%0d gated_cycles=%0d len_stall=%0d fifo_full=%0d data_wait=%0d",
             n_dyn, n_fixed, n_gated, n_len_stall, n_fifo_full, n_data_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
