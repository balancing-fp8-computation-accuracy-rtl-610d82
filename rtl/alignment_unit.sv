// alignment_unit: the input alignment block, 64 FIAUs and their config register.
//
// The config register holds, for the group being aligned, each row's
// exponent offset (loaded by cfg_load) and the bitwidth shared by all rows.
// In fixed mode the shared length is B_fix+1 (sign included) from the start.
// In dynamic mode the FIAUs start streaming before the prediction unit has
// answered, provisionally working to B_fix+1 bits (the prediction is never
// below B_fix); when bg_valid arrives the length becomes B_g+1. Only if the
// provisional bits run out first (B_fix below 2) does the block stall and
// wait for B_g.
//
// All rows share one output-bit counter and advance together: a step happens
// when r_en is high, every FIAU has its bit (r_ok) and the length is known far
// enough. Outputs are registered: bits/bit_valid/bit_first/bit_last in cycle
// t+1 describe the step of cycle t; bit_first marks the sign bit of each
// element, bit_last the last bit of the group, and len_o the length used.
// ev_len_stall and ev_data_stall flag the two stall causes. A B_g above the
// largest input width (11) is limited to it. w_ready is the AND of all FIFOs.
// Overlapping prediction with alignment and the shared bitwidth follow the
// paper; the provisional-length rule and the stall are this design's way of
// making that overlap exact.
module alignment_unit
  import dcim_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [2:0]       mw,
  input  logic             dyn,
  input  logic [3:0]       bfix,
  // config register load (one group)
  input  logic             cfg_load,
  input  logic [OFF_W-1:0] offsets_in [ROWS],
  // bitwidth from the prediction unit
  input  logic             bg_valid,
  input  logic [BG_W-1:0]  bg,
  // serial mantissa input from the mantissa buffer
  input  logic             w_en,
  input  logic [ROWS-1:0]  w_bits,
  output logic             w_ready,
  // serial aligned output to the MAC array
  input  logic             r_en,
  output logic             busy,
  output logic [ROWS-1:0]  bits,
  output logic             bit_valid,
  output logic             bit_first,
  output logic             bit_last,
  output logic [LEN_W-1:0] len_o,
  output logic             ev_len_stall,
  output logic             ev_data_stall
);

  logic [OFF_W-1:0] off_q [ROWS];
  logic [LEN_W-1:0] len_q, len_eff, fix_len, cnt;
  logic             len_valid, len_known;
  logic             active;
  logic [ROWS-1:0]  r_bits, r_ok, wr_rdy;
  logic             all_ok, len_stall, step, at_end, last;
  logic [LEN_W-1:0] bg_lim;

  // widths above the largest input width are limited to it
  assign bg_lim    = (bg > BG_W'(BG_MAX)) ? LEN_W'(BG_MAX) : LEN_W'(bg);
  assign fix_len   = LEN_W'(bfix) + 1'b1;
  assign len_known = len_valid || (dyn && bg_valid);
  assign len_eff   = len_valid ? len_q : (LEN_W'(bg_lim) + 1'b1);
  assign all_ok    = &r_ok;
  assign len_stall = !len_known && (cnt >= fix_len - 1'b1);
  assign step      = active && r_en && all_ok && !len_stall;
  assign at_end    = len_known && (cnt == len_eff - 1'b1);
  assign last      = step && at_end;
  assign busy      = active;
  assign w_ready   = &wr_rdy;
  assign ev_len_stall  = active && r_en && all_ok && len_stall;
  assign ev_data_stall = active && r_en && !all_ok;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    fiau #(.DEPTH(DEPTH)) u_fiau (
      .clk, .rst_n, .mw,
      .w_en, .w_bit(w_bits[r]), .w_ready(wr_rdy[r]),
      .offset(off_q[r]), .cnt, .step, .last(at_end),
      .r_bit(r_bits[r]), .r_ok(r_ok[r])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) off_q[r] <= '0;
      len_q     <= '0;
      len_valid <= 1'b0;
      active    <= 1'b0;
      cnt       <= '0;
      bits      <= '0;
      bit_valid <= 1'b0;
      bit_first <= 1'b0;
      bit_last  <= 1'b0;
      len_o     <= '0;
    end else begin
      bit_valid <= step;
      bit_first <= step && (cnt == '0);
      bit_last  <= last;
      if (step) bits <= r_bits;
      if (cfg_load) begin
        for (int r = 0; r < ROWS; r++) off_q[r] <= offsets_in[r];
        active    <= 1'b1;
        cnt       <= '0;
        len_valid <= !dyn;
        len_q     <= fix_len;
      end else begin
        if (dyn && bg_valid && !len_valid) begin
          len_valid <= 1'b1;
          len_q     <= LEN_W'(bg_lim) + 1'b1;
        end
        if (step) cnt <= cnt + 1'b1;
        if (last) begin
          active <= 1'b0;
          len_o  <= len_eff;
        end
      end
    end
  end

endmodule
