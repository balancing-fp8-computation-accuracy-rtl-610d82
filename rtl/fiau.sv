// fiau: FIFO-based input alignment unit (one per array row).
//
// Replaces a barrel shifter by pointer control over a small bit FIFO. The
// element's two's-complement mantissa (mw bits) is written serially, MSB
// first, at w_ptr. Reading starts at the mantissa's MSB; r_ptr stays on the
// MSB for offset+1 output cycles and then advances one bit per cycle, so the
// sign is replicated `offset` extra times: an arithmetic right shift by the
// exponent offset. Once the read has passed the mantissa's LSB, zeros are
// emitted. After save_len output bits the read jumps to the start of the next
// stored mantissa (the position the write pointer had reached when this
// mantissa was complete), so the output is the top save_len bits of
// (mantissa >> offset), i.e. truncation, not rounding.
//
// Interface: w_en/w_bit write one bit; w_ready says the FIFO has room (the
// bits of the mantissa being read are never overwritten). Each cycle `r_bit`
// is the bit at the current read position and r_ok says it is already
// written; `step` (a shared strobe, one per output bit) advances the read and
// `last`, given with the bit before the step is decided, marks the final bit of
// the mantissa (r_ok then also waits until the whole mantissa is written, so
// the read never jumps past the write pointer). Timing: the bit written in cycle
// t can be read from cycle t+1.
// Hold-at-MSB for offset+1 cycles, the jump after save_len bits and two's
// complement storage follow the paper; DEPTH and the zero padding are this
// design's choices.
module fiau
  import dcim_pkg::*;
#(
  parameter int DEPTH = 16,
  localparam int PW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [2:0]       mw,       // mantissa width in the FIFO
  // write side
  input  logic             w_en,
  input  logic             w_bit,
  output logic             w_ready,
  // read side
  input  logic [OFF_W-1:0] offset,   // exponent offset of this row's element
  input  logic [LEN_W-1:0] cnt,      // output bits already produced for this mantissa
  input  logic             step,
  input  logic             last,
  output logic             r_bit,
  output logic             r_ok
);

  logic [DEPTH-1:0] mem;
  logic [PW:0]      w_ptr;     // one extra bit tells full from empty
  logic [PW:0]      start;     // MSB position of the mantissa being read
  logic [PW:0]      fill;
  logic [OFF_W:0]   rel;       // bit index inside the mantissa being read
  logic [PW-1:0]    r_ptr;

  assign fill    = w_ptr - start;
  assign w_ready = fill < (PW+1)'(DEPTH);

  always_comb begin
    rel   = ((OFF_W+1)'(cnt) > (OFF_W+1)'(offset)) ? ((OFF_W+1)'(cnt) - (OFF_W+1)'(offset)) : '0;
    r_ptr = PW'(start) + PW'(rel);
    if (rel >= (OFF_W+1)'(mw)) begin
      r_bit = 1'b0;                       // past the LSB: zero padding
      r_ok  = 1'b1;
    end else begin
      r_bit = mem[r_ptr];
      r_ok  = (PW+1)'(rel) < fill;
    end
    // the read may only leave a mantissa that has been written completely
    if (last && fill < (PW+1)'(mw)) r_ok = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem   <= '0;
      w_ptr <= '0;
      start <= '0;
    end else begin
      if (w_en && w_ready) begin
        mem[PW'(w_ptr)] <= w_bit;
        w_ptr           <= w_ptr + 1'b1;
      end
      if (step && last) start <= start + (PW+1)'(mw);
    end
  end

endmodule
