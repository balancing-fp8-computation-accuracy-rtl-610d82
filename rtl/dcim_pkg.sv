// dcim_pkg: sizes, types and shared helper functions of the variable-mantissa
// FP8 digital compute-in-memory (DCIM) macro.
//
// The macro multiplies a group of 64 FP8 inputs against a 64x96 bit SRAM array
// that holds pre-aligned integer weights. The array is organised as 48 columns
// of 64x2b cells (12 groups of 4 columns); 2/4/6/8b weights occupy 1/2/3/4
// adjacent columns. Inputs are aligned to a shared exponent and streamed
// bit-serially, MSB (sign) first, with 2..12 bits per element.
//
// Numbers that come from the paper: 64 rows, 96 SRAM bit columns, 2b cells,
// 9b column result, 2..12b input and 2/4/6/8b weight aligned-mantissa width,
// 5b saturated bitwidth prediction, 8b reciprocal table. Everything else
// (FIFO depth, buffer depths, the FP32 output format, fixed-point widths of
// the predictor) is this implementation's choice.
package dcim_pkg;

  localparam int ROWS      = 64;   // elements per group (rows of the array)
  localparam int NCOL      = 48;   // 2b-wide compute columns (96 SRAM bit columns)
  localparam int SRAM_W    = 2 * NCOL;
  localparam int FU_COLS   = 12;   // columns fused by one fusion unit
  localparam int N_FU      = NCOL / FU_COLS;
  localparam int EXP_W     = 5;    // widest FP8 exponent field (E5M2)
  localparam int MANT_W    = 7;    // widest two's-complement mantissa (E2M5: sign+hidden+5)
  localparam int OFF_W     = 5;    // exponent offset Emax-Ei, 0..30
  localparam int LEN_W     = 4;    // aligned length incl. sign, 2..12
  localparam int BG_W      = 5;    // predicted bitwidth, saturated to 5b
  localparam int BG_MAX    = 11;   // largest input aligned bitwidth (without sign)
  localparam int COL_W     = 9;    // signed column result of one 64x2b MAC
  localparam int ACC_W     = COL_W + 12 + 1;
  localparam int FUS_W     = ACC_W + 7;
  localparam int SCALE_W   = 9;    // signed power-of-two scale of a result
  localparam int WEXP_W    = 8;    // signed weight scale exponent

  // weight bitwidth mode: number of 2b columns per weight = mode + 1
  typedef enum logic [1:0] {W2 = 2'd0, W4 = 2'd1, W6 = 2'd2, W8 = 2'd3} wmode_e;

  // run-time configuration written by the host
  typedef struct packed {
    logic [2:0] ebits;  // input exponent bits: 2 (E2M5) .. 5 (E5M2)
    logic       dyn;    // 1: dynamic bitwidth prediction (MPU on), 0: fixed
    logic [2:0] k2;     // scaling factor k in half steps: k = k2/2
    logic [3:0] bfix;   // fixed bitwidth B_fix (1..11)
    wmode_e     wmode;  // weight width 2/4/6/8b
  } cfg_t;

  // two's-complement mantissa width of an FP8 format: sign + hidden + fraction
  function automatic logic [2:0] mant_width(input logic [2:0] ebits);
    return 3'(4'd9 - 4'(ebits));
  endfunction

  // exponent bias of an FP8 format with `ebits` exponent bits
  function automatic logic [4:0] exp_bias(input logic [2:0] ebits);
    return 5'((1 << (ebits - 3'd1)) - 1);
  endfunction

  // Split an FP8 code into its effective exponent (subnormals use 1) and a
  // right-aligned two's-complement mantissa of mant_width(ebits) bits.
  function automatic logic [EXP_W+MANT_W-1:0] fp8_split(input logic [7:0] code,
                                                        input logic [2:0] ebits);
    logic [2:0] mbits;
    logic [4:0] e;
    logic [6:0] frac;
    logic [6:0] mag;
    logic [6:0] s;
    mbits = 3'(4'd7 - 4'(ebits));
    e     = 5'((code[6:0] >> mbits) & 7'((1 << ebits) - 1));
    frac  = code[6:0] & 7'((1 << mbits) - 1);
    mag   = frac | ((e != 5'd0) ? (7'd1 << mbits) : 7'd0);
    s     = code[7] ? (~mag + 7'd1) : mag;
    if (e == 5'd0) e = 5'd1;
    return {e, s & 7'((1 << (mbits + 3'd2)) - 1)};
  endfunction

endpackage
