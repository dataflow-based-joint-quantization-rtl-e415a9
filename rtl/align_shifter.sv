// align_shifter: brings an integer operand onto the accumulator's scale.
//
// In the integer-only convolution the accumulator holds values with the
// scale 2^-(N_x+N_w). A bias stored with scale 2^-N_b, or a shortcut operand
// stored with scale 2^-N_s, must be moved onto that scale before it is added:
// it is multiplied by 2^(N_x+N_w-N_b) (or 2^(N_x+N_w-N_s)), which is a shift.
// A positive shift_i shifts left and saturates to the OUT_W-bit signed range;
// a negative shift_i shifts right and rounds to nearest (ties upwards), so the
// smallest bits of an over-precise bias are dropped.
//
// Interface: data_i (IN_W-bit signed), shift_i (SH_W-bit signed),
// data_o (OUT_W-bit signed), sat_o high when a left shift saturated.
// Timing: purely combinational.
//
// From the paper: the bias is aligned by the shift N_x + N_w - N_b, the
// shortcut operand of a residual module must be aligned to the convolution
// output, and small bias values are sacrificed in the alignment.
// Own choices: the rounding of right shifts, the saturation of left shifts,
// and the use of one module for both the bias and the shortcut.
module align_shifter #(
  parameter int unsigned IN_W  = 8,
  parameter int unsigned OUT_W = 32,
  parameter int unsigned SH_W  = 6
) (
  input  logic signed [IN_W-1:0]  data_i,
  input  logic signed [SH_W-1:0]  shift_i,
  output logic signed [OUT_W-1:0] data_o,
  output logic                    sat_o
);

  // Wide enough for the largest left shift plus one bit for rounding.
  localparam int unsigned MAXSH = 1 << (SH_W - 1);
  localparam int unsigned W     = ((IN_W > OUT_W) ? IN_W : OUT_W) + MAXSH + 2;

  logic signed [W-1:0] ext, half, res, max_v, min_v;
  logic [SH_W-1:0]     mag;

  always_comb begin
    ext   = W'(data_i);
    max_v = (W'(1) <<< (OUT_W - 1)) - W'(1);
    min_v = -(W'(1) <<< (OUT_W - 1));
    mag   = shift_i[SH_W-1] ? SH_W'(-shift_i) : SH_W'(shift_i);
    half  = '0;
    if (shift_i[SH_W-1]) begin
      half = W'(1) <<< (mag - SH_W'(1));
      res  = (ext + half) >>> mag;
    end else begin
      res  = ext <<< mag;
    end
    sat_o = 1'b0;
    if (res > max_v) begin
      data_o = max_v[OUT_W-1:0];
      sat_o  = 1'b1;
    end else if (res < min_v) begin
      data_o = min_v[OUT_W-1:0];
      sat_o  = 1'b1;
    end else begin
      data_o = res[OUT_W-1:0];
    end
  end

endmodule
