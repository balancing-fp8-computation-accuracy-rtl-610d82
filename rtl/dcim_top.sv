// dcim_top: variable-mantissa FP8 digital compute-in-memory macro.
//
// Computes dot products of 64-element FP8 input groups with up to 48 weight
// columns stored in a 64x96 SRAM array. Each input group is aligned to its
// own largest exponent; the number of aligned bits kept per element (B_g plus
// a sign bit) is either fixed (B_fix) or predicted on the fly from the
// distribution of exponent offsets by the mantissa prediction unit (MPU).
// Aligned mantissas are streamed bit-serially into the array, whose columns
// multiply them with 2b weight slices; a fusion unit combines slices into
// 2/4/6/8b weights and an INT-to-FP stage applies the group and weight
// scales, giving one FP32 result per weight column and group.
//
// Datapath per group (one "reader" pass, controlled by the top controller):
//   input exponent buffer -> max_exp_offset (Emax, offsets, 1 cycle)
//   -> config register of alignment_unit + MPU (3 cycles, dynamic mode only)
//   -> 64 FIAUs stream B_g+1 bits -> int_mac_array (AND, adder trees,
//   accumulators) -> 4 fusion units -> 48 int2fp -> output_buffer entry.
// Independently a "writer" pass streams the two's-complement mantissas of the
// queued groups, bit-serially and MSB first, from the input mantissa buffer
// into the FIAU FIFOs, running ahead as far as the FIFOs allow.
//
// Host interface: write input groups (in_wr_*), weight image and weight
// scales (wm_wr_*, we_wr_*); pulse load_w to copy the weight image into the
// SRAM (64 cycles); pulse start to process groups 0 .. n_vec-1 of the input
// buffer; `done` pulses when the last result is in the output buffer; read
// results through ob_rd_* (one cycle latency). cfg must stay stable while busy.
// ev_len_stall / ev_data_stall flag cycles in which streaming pauses because
// the predicted bitwidth is still pending or a FIFO has not received its next
// bit; they are meant for performance counters.
// Timing: a group of L = B_g+1 bits takes L+4 cycles when nothing stalls.
// Result lane w of group v: FP32 of sum_i a_i * W_w * 2^(Emax - bias + 2 - L
// + wexp_w), where a_i are the aligned L-bit inputs and W_w the integer weight.
// The block structure follows the paper's architecture figure; the host
// interface, the controller's sequencing, the buffers' sizes and the output
// format are this design's choices.
module dcim_top
  import dcim_pkg::*;
#(
  parameter int IN_DEPTH   = 16,
  parameter int OB_DEPTH   = 16,
  parameter int FIFO_DEPTH = 16,
  localparam int IAW = $clog2(IN_DEPTH),
  localparam int OAW = $clog2(OB_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  cfg_t                     cfg,
  // input groups
  input  logic                     in_wr_en,
  input  logic [IAW-1:0]           in_wr_addr,
  input  logic [7:0]               in_wr_code [ROWS],
  // weights
  input  logic                     wm_wr_en,
  input  logic [$clog2(ROWS)-1:0]  wm_wr_row,
  input  logic [SRAM_W-1:0]        wm_wr_data,
  input  logic                     we_wr_en,
  input  logic [$clog2(NCOL)-1:0]  we_wr_lane,
  input  logic signed [WEXP_W-1:0] we_wr_data,
  // commands
  input  logic                     load_w,
  input  logic                     start,
  input  logic [IAW:0]             n_vec,
  output logic                     busy,
  output logic                     done,
  output logic                     ev_len_stall,   // streaming paused: bitwidth not yet known
  output logic                     ev_data_stall,  // streaming paused: a FIFO lacks its next bit
  // results
  input  logic [OAW-1:0]           ob_rd_addr,
  input  logic [$clog2(NCOL)-1:0]  ob_rd_lane,
  output logic [31:0]              ob_rd_data
);

  typedef enum logic [1:0] {S_IDLE, S_LOADW, S_RUN} state_e;
  typedef enum logic [1:0] {G_EXP, G_CFG, G_STREAM, G_DRAIN} gstate_e;

  state_e  state;
  gstate_e gstate;

  logic [2:0] mw;
  assign mw = mant_width(cfg.ebits);

  // ---------------- buffers ----------------
  logic [IAW-1:0]          exp_raddr, wv;
  logic [2:0]              wbit;
  logic [EXP_W-1:0]        exps [ROWS];
  logic [ROWS-1:0]         mant_bits;
  logic [$clog2(ROWS)-1:0] lrow;
  logic [SRAM_W-1:0]       wimg_row;
  logic signed [WEXP_W-1:0] wexp [NCOL];

  input_buffer #(.DEPTH(IN_DEPTH)) u_ibuf (
    .clk, .wr_en(in_wr_en), .wr_addr(in_wr_addr), .wr_code(in_wr_code),
    .wr_ebits(cfg.ebits), .exp_raddr, .exp_rdata(exps),
    .mant_raddr(wv), .mant_bit(wbit), .mant_w(mw), .mant_rbits(mant_bits)
  );

  weight_buffer u_wbuf (
    .clk, .wm_wr_en, .wm_wr_row, .wm_wr_data, .rd_row(lrow), .rd_data(wimg_row),
    .we_wr_en, .we_wr_lane, .we_wr_data, .wexp
  );

  // ---------------- exponent path and prediction ----------------
  logic             mx_in_valid, mx_valid;
  logic [EXP_W-1:0] emax;
  logic [OFF_W-1:0] offsets [ROWS];
  logic             bg_valid;
  logic [BG_W-1:0]  bg;

  max_exp_offset u_maxexp (
    .clk, .rst_n, .in_valid(mx_in_valid), .exps, .out_valid(mx_valid),
    .emax, .offset(offsets)
  );

  mpu u_mpu (
    .clk, .rst_n, .enable(cfg.dyn), .in_valid(mx_valid && cfg.dyn),
    .shift(offsets), .k2(cfg.k2), .bfix(cfg.bfix), .out_valid(bg_valid), .bg
  );

  // ---------------- alignment ----------------
  logic             al_w_en, al_w_ready, al_r_en, al_busy;
  logic [ROWS-1:0]  al_bits;
  logic             al_valid, al_first, al_last;
  logic [LEN_W-1:0] al_len;


  alignment_unit #(.DEPTH(FIFO_DEPTH)) u_align (
    .clk, .rst_n, .mw, .dyn(cfg.dyn), .bfix(cfg.bfix),
    .cfg_load(mx_valid), .offsets_in(offsets), .bg_valid, .bg,
    .w_en(al_w_en), .w_bits(mant_bits), .w_ready(al_w_ready),
    .r_en(al_r_en), .busy(al_busy), .bits(al_bits), .bit_valid(al_valid),
    .bit_first(al_first), .bit_last(al_last), .len_o(al_len),
    .ev_len_stall, .ev_data_stall
  );

  // ---------------- MAC array, fusion, INT to FP ----------------
  logic                    arr_w_en, mac_done;
  logic signed [ACC_W-1:0] acc [NCOL];

  int_mac_array u_array (
    .clk, .rst_n, .wmode(cfg.wmode),
    .w_en(arr_w_en), .w_row(lrow), .w_data(wimg_row),
    .in_bits(al_bits), .bit_valid(al_valid), .bit_first(al_first),
    .bit_last(al_last), .done(mac_done), .acc
  );

  logic signed [ACC_W-1:0] fu_in  [N_FU][FU_COLS];
  logic signed [FUS_W-1:0] fu_out [N_FU][FU_COLS];
  logic signed [FUS_W-1:0] lane_int [NCOL];
  logic [31:0]             lane_fp  [NCOL];
  logic signed [SCALE_W-1:0] grp_scale;
  logic signed [SCALE_W-1:0] lane_scale [NCOL];
  logic [OAW-1:0]          ob_waddr;
  logic [3:0]              per_fu;

  for (genvar u = 0; u < N_FU; u++) begin : g_fu
    always_comb
      for (int c = 0; c < FU_COLS; c++) fu_in[u][c] = acc[u*FU_COLS + c];
    fusion_unit u_fu (.wmode(cfg.wmode), .acc(fu_in[u]), .out(fu_out[u]));
  end

  // lane w of fusion unit u is result u*(12/n) + w
  assign per_fu = 4'(FU_COLS / (int'(cfg.wmode) + 1));
  always_comb begin
    for (int l = 0; l < NCOL; l++) lane_int[l] = '0;
    for (int u = 0; u < N_FU; u++)
      for (int l = 0; l < FU_COLS; l++)
        if (l < int'(per_fu)) lane_int[u*int'(per_fu) + l] = fu_out[u][l];
  end

  for (genvar l = 0; l < NCOL; l++) begin : g_cvt
    assign lane_scale[l] = grp_scale + SCALE_W'(wexp[l]);
    int2fp u_cvt (.in(lane_int[l]), .scale(lane_scale[l]), .fp(lane_fp[l]));
  end

  output_buffer #(.DEPTH(OB_DEPTH)) u_ob (
    .clk, .wr_en(mac_done), .wr_addr(ob_waddr), .wr_data(lane_fp),
    .rd_addr(ob_rd_addr), .rd_lane(ob_rd_lane), .rd_data(ob_rd_data)
  );

  // ---------------- top controller ----------------
  logic [IAW:0]       nv_q, rv;
  logic               wr_act;
  logic [EXP_W-1:0]   emax_q;

  assign busy        = (state != S_IDLE) || al_busy;
  assign arr_w_en    = (state == S_LOADW);
  assign exp_raddr   = IAW'(rv);
  assign mx_in_valid = (state == S_RUN) && (gstate == G_EXP);
  assign al_r_en     = (state == S_RUN) && (gstate == G_STREAM);
  assign al_w_en     = (state == S_RUN) && wr_act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      gstate    <= G_EXP;
      done      <= 1'b0;
      lrow      <= '0;
      nv_q      <= '0;
      rv        <= '0;
      wv        <= '0;
      wbit      <= '0;
      wr_act    <= 1'b0;
      emax_q    <= '0;
      grp_scale <= '0;
      ob_waddr  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          lrow <= '0;
          if (load_w) begin
            state <= S_LOADW;
          end else if (start && n_vec != '0) begin
            state  <= S_RUN;
            gstate <= G_EXP;
            nv_q   <= n_vec;
            rv     <= '0;
            wv     <= '0;
            wbit   <= '0;
            wr_act <= 1'b1;
          end
        end
        S_LOADW: begin
          lrow <= lrow + 1'b1;
          if (lrow == $clog2(ROWS)'(ROWS - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_RUN: begin
          // writer: mantissa bits of queued groups into the FIAU FIFOs
          if (wr_act && al_w_ready) begin
            if (wbit == mw - 3'd1) begin
              wbit <= '0;
              wv   <= wv + 1'b1;
              if ((IAW+1)'(wv) + 1'b1 == nv_q) wr_act <= 1'b0;
            end else begin
              wbit <= wbit + 1'b1;
            end
          end
          // reader: one group at a time through exponent, alignment and MAC
          unique case (gstate)
            G_EXP:    gstate <= G_CFG;
            G_CFG:    if (mx_valid) begin
                        emax_q <= emax;
                        gstate <= G_STREAM;
                      end
            G_STREAM: if (al_last) begin
                        grp_scale <= SCALE_W'(emax_q) - SCALE_W'(exp_bias(cfg.ebits))
                                   + SCALE_W'(2) - SCALE_W'(al_len);
                        ob_waddr  <= OAW'(rv);
                        rv        <= rv + 1'b1;
                        gstate    <= (rv + 1'b1 == nv_q) ? G_DRAIN : G_EXP;
                      end
            G_DRAIN:  if (mac_done) begin
                        state  <= S_IDLE;
                        gstate <= G_EXP;
                        done   <= 1'b1;
                      end
            default:  gstate <= G_EXP;
          endcase
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
