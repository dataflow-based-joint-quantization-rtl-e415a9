// relu: rectified linear unit on the integer accumulator.
//
// Replaces negative values by zero. In the joint quantization scheme the ReLU
// acts on the 32-bit integer before the single requantization of its module,
// so the quantizer afterwards may use the whole unsigned n-bit range.
// With en_i low the value passes unchanged (modules without a ReLU).
//
// Interface: d_i, en_i in; d_o out, clamped_o high when a negative value was
// set to zero. Timing: purely combinational.
//
// From the paper: ReLU is the only activation function, and it comes before
// the quantization. Own choice: the clamped_o status output.
module relu #(
  parameter int unsigned W = 32
) (
  input  logic signed [W-1:0] d_i,
  input  logic                en_i,
  output logic signed [W-1:0] d_o,
  output logic                clamped_o
);

  always_comb begin
    clamped_o = en_i && d_i[W-1];
    d_o       = clamped_o ? '0 : d_i;
  end

endmodule
