// shift_quantizer: bit-shifting requantizer, 32-bit integer in, n-bit integer out.
//
// This is the quantization operation of the joint quantization scheme. A
// convolution result O_int32 carries the scale 2^-(N_x+N_w); the layer output
// must carry 2^-N_o. Because both scales are powers of two, the conversion is
// an arithmetic right shift by s = N_x + N_w - N_o with rounding to nearest,
// followed by clipping to the range of an n-bit integer:
//     q = min(hi, max(lo, floor((d + 2^(s-1)) / 2^s)))
// with [lo, hi] = [-2^(n-1), 2^(n-1)-1] for signed outputs and [0, 2^n-1]
// for unsigned outputs (results that went through a ReLU). No multiplier and
// no codebook are involved.
//
// Interface: data_i, shift_i, nbits_i and is_unsigned_i are sampled when
// valid_i is high. q_o is the clipped result in the low bits of an OUT_W-bit
// word (sign-extended when signed), sat_hi_o / sat_lo_o tell that clipping
// took place at the top or the bottom of the range.
// Timing: one register stage; outputs are valid one clock after valid_i.
//
// From the paper: 32-bit input, 8-bit output, right shift followed by
// rounding to nearest and clipping (Eq. 1 with min/max), shift amounts in
// the range 1..10, unsigned 0..255 range after a ReLU.
// Own choices: ties round upwards (add half, then floor); shift 0 is
// allowed and passes the value unrounded; nbits_i outside 2..OUT_W is
// clamped into that range; the single output register.
module shift_quantizer #(
  parameter int unsigned IN_W    = 32,
  parameter int unsigned OUT_W   = 8,
  parameter int unsigned SHIFT_W = 4,
  parameter int unsigned NB_W    = $clog2(OUT_W + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid_i,
  input  logic signed [IN_W-1:0]   data_i,
  input  logic [SHIFT_W-1:0]       shift_i,
  input  logic [NB_W-1:0]          nbits_i,
  input  logic                     is_unsigned_i,
  output logic                     valid_o,
  output logic [OUT_W-1:0]         q_o,
  output logic                     sat_hi_o,
  output logic                     sat_lo_o
);

  localparam int unsigned EXT_W = IN_W + 2;

  logic signed [EXT_W-1:0] ext, half, rounded, shifted, hi, lo, clipped;
  logic [NB_W-1:0]         n;
  logic                    over, under;

  always_comb begin
    // Clamp the requested output width into 2..OUT_W.
    if (nbits_i < NB_W'(2))          n = NB_W'(2);
    else if (nbits_i > NB_W'(OUT_W)) n = NB_W'(OUT_W);
    else                             n = nbits_i;

    ext     = EXT_W'(data_i);
    half    = (shift_i == '0) ? '0 : (EXT_W'(1) <<< (shift_i - SHIFT_W'(1)));
    rounded = ext + half;
    shifted = rounded >>> shift_i;

    if (is_unsigned_i) begin
      hi = (EXT_W'(1) <<< n) - EXT_W'(1);
      lo = '0;
    end else begin
      hi = (EXT_W'(1) <<< (n - NB_W'(1))) - EXT_W'(1);
      lo = -(EXT_W'(1) <<< (n - NB_W'(1)));
    end

    over  = shifted > hi;
    under = shifted < lo;
    if (over)       clipped = hi;
    else if (under) clipped = lo;
    else            clipped = shifted;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o  <= 1'b0;
      q_o      <= '0;
      sat_hi_o <= 1'b0;
      sat_lo_o <= 1'b0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) begin
        q_o      <= clipped[OUT_W-1:0];
        sat_hi_o <= over;
        sat_lo_o <= under;
      end
    end
  end

endmodule
