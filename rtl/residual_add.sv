// residual_add: the Add node of a residual module.
//
// Adds the shortcut operand, already aligned to the accumulator's scale, to
// the convolution accumulator. Both are 32-bit signed integers with the same
// scale 2^-(N_x+N_w), so the addition is exact; only a result beyond the
// 32-bit range is saturated, and sat_o reports it. With en_i low the
// convolution value passes unchanged (plain convolution modules).
//
// Interface: conv_i, sc_i, en_i in; sum_o, sat_o out.
// Timing: purely combinational.
//
// From the paper: residual modules add the shortcut and the convolution in
// the integer domain after aligning the two, and quantize only once after
// the addition (and after the ReLU, if there is one).
// Own choice: saturation instead of wrap-around on overflow.
module residual_add #(
  parameter int unsigned W = 32
) (
  input  logic signed [W-1:0] conv_i,
  input  logic signed [W-1:0] sc_i,
  input  logic                en_i,
  output logic signed [W-1:0] sum_o,
  output logic                sat_o
);

  logic signed [W:0] full, a, b;

  always_comb begin
    a     = {conv_i[W-1], conv_i};
    b     = en_i ? {sc_i[W-1], sc_i} : '0;
    full  = a + b;
    sat_o = 1'b0;
    sum_o = full[W-1:0];
    // Overflow when the two top bits of the W+1-bit sum differ.
    if (full[W] != full[W-1]) begin
      sat_o = 1'b1;
      sum_o = full[W] ? {1'b1, {(W-1){1'b0}}} : {1'b0, {(W-1){1'b1}}};
    end
  end

endmodule
