// conv_mac: integer multiply-accumulate for one convolution output.
//
// Computes O_int32 = B_aligned + sum_k X^I_k * W^I_k, the integer core of a
// quantized convolution: every activation X^I and weight W^I is an 8-bit
// integer, their product is exact, and the products are summed in a 32-bit
// accumulator so that long sums do not overflow. The accumulator is preloaded
// with the bias after it has been aligned to the accumulator's scale.
// Activations can be signed (-128..127) or unsigned (0..255, the output of a
// ReLU module); weights are signed.
//
// Interface: load_i copies bias_i into the accumulator; en_i adds x_i * w_i.
// If both are high in one cycle the accumulator becomes bias_i + x_i * w_i,
// so a new sum can begin directly after the previous one. acc_o is the
// accumulator register.
// Timing: one product per clock, result visible one clock after the last en_i.
//
// From the paper: 8-bit operands, 32-bit accumulation, bias added in the
// accumulator scale, unsigned activations after ReLU (range 0..255).
// Own choices: a single multiplier processing one product per clock (the
// paper does not describe how many products run in parallel), and two's
// complement wrap-around at 32 bits.
module conv_mac #(
  parameter int unsigned X_W   = 8,
  parameter int unsigned W_W   = 8,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load_i,
  input  logic signed [ACC_W-1:0] bias_i,
  input  logic                    en_i,
  input  logic [X_W-1:0]          x_i,
  input  logic                    x_unsigned_i,
  input  logic signed [W_W-1:0]   w_i,
  output logic signed [ACC_W-1:0] acc_o
);

  logic signed [X_W:0]          x_ext;
  logic signed [X_W+W_W:0]      prod;
  logic signed [ACC_W-1:0]      base;

  always_comb begin
    // One extra bit lets the same signed multiplier take 0..255 and -128..127.
    x_ext = x_unsigned_i ? $signed({1'b0, x_i}) : $signed({x_i[X_W-1], x_i});
    prod  = x_ext * w_i;
    base  = load_i ? bias_i : acc_o;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_o <= '0;
    end else if (en_i) begin
      acc_o <= base + ACC_W'(prod);
    end else if (load_i) begin
      acc_o <= bias_i;
    end
  end

endmodule
