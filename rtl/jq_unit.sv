// jq_unit: one unified quantized module of the joint quantization scheme.
//
// The scheme groups the layers between two quantization points into one
// module and quantizes only once, at the module's end. Four module types are
// supported (cfg.mode):
//   MODE_CONV       conv                      -> quantize (signed)
//   MODE_CONV_RELU  conv -> ReLU              -> quantize (unsigned)
//   MODE_RES_RELU   conv -> + shortcut -> ReLU -> quantize (unsigned)
//   MODE_RES        conv -> + shortcut        -> quantize (signed)
// The unit produces one output activation O^I[l,m,n] per operation:
//   1. the 8-bit bias B^I is aligned by cfg.bias_shift (= N_x+N_w-N_b) and
//      loaded into the 32-bit accumulator;
//   2. the C*H*W activation/weight pairs of the receptive field are streamed
//      in and multiplied-accumulated, one pair per clock;
//   3. for residual modes the shortcut operand is aligned by cfg.sc_shift
//      (= N_x+N_w-N_s) and added;
//   4. an optional ReLU clamps negatives to zero;
//   5. the result is shifted right by cfg.out_shift (= N_x+N_w-N_o),
//      rounded to nearest and clipped to cfg.nbits bits.
// Only bit-shift amounts reach the hardware, never fractional bits; they sit
// in a per-layer shift table inside the unit.
//
// Interface and timing:
//   cfg_wr_en_i, cfg_wr_layer_i, cfg_wr_data_i : write one layer's
//                         configuration into the shift table (LAYERS entries)
//                         before that layer is used.
//   start_i / ready_o   : when ready_o is high, start_i takes layer_i and
//                         bias_i and begins an operation (cycle 0); the
//                         layer's configuration (cfg below) is read from the
//                         shift table in that clock.
//   x_valid_i / x_ready_o / x_last_i, x_i, w_i : operand stream, one pair
//                         per clock while x_ready_o; x_last_i marks the last
//                         pair. Gaps (x_valid_i low) are allowed.
//   sc_valid_i / sc_ready_o, sc_i : shortcut operand for residual modes,
//                         32-bit signed (an 8-bit activation sign- or
//                         zero-extended, or a shortcut convolution's
//                         accumulator). The unit waits for it after the last
//                         pair; it stalls until sc_valid_i is high.
//   q_valid_o, q_o      : result, valid for one clock. With L pairs and no
//                         gaps or stalls, q_valid_o rises L+2 clocks after
//                         start_i. A new start_i is taken on the clock in
//                         which the result is being registered, so L+2 clocks
//                         per output is the steady-state rate.
//   sat_hi_o, sat_lo_o, relu_o, add_sat_o, bias_sat_o : status of the result.
//
// From the paper: the four module types, the order conv / add / ReLU /
// quantize, 8-bit operands and biases, 32-bit accumulation, bias and
// shortcut alignment by shifts, requantization by shift with rounding and
// clipping, unsigned output range after a ReLU.
// Own choices: one multiplier (the paper gives no parallelism), the shift
// table's depth and its asynchronous read (see shift_table), the
// ready/valid handshakes, the stream format and the status outputs.
module jq_unit
  import jq_pkg::*;
#(
  parameter int unsigned DATA_W   = jq_pkg::NBITS,
  parameter int unsigned ACC_BITS = jq_pkg::ACC_W,
  parameter int unsigned LAYERS   = 256,
  parameter int unsigned LAYER_W  = $clog2(LAYERS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // per-layer shift table, written by the host
  input  logic                     cfg_wr_en_i,
  input  logic [LAYER_W-1:0]       cfg_wr_layer_i,
  input  jq_cfg_t                  cfg_wr_data_i,
  // operation start
  input  logic                     start_i,
  input  logic [LAYER_W-1:0]       layer_i,
  input  logic signed [DATA_W-1:0] bias_i,
  output logic                     ready_o,
  // activation / weight stream
  input  logic                     x_valid_i,
  input  logic                     x_last_i,
  input  logic [DATA_W-1:0]        x_i,
  input  logic signed [DATA_W-1:0] w_i,
  output logic                     x_ready_o,
  // shortcut operand
  input  logic                     sc_valid_i,
  input  logic signed [ACC_BITS-1:0]  sc_i,
  output logic                     sc_ready_o,
  // result
  output logic                     q_valid_o,
  output logic [DATA_W-1:0]        q_o,
  output logic                     sat_hi_o,
  output logic                     sat_lo_o,
  output logic                     relu_o,
  output logic                     add_sat_o,
  output logic                     bias_sat_o
);

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_POST} state_e;

  state_e                  state;
  jq_cfg_t                 cfg_q;
  logic signed [ACC_BITS-1:0] bias_al, sc_al, acc, sum, post;
  logic                    bias_sat_c, sc_sat_c, add_sat_c, relu_c;
  logic                    take_start, take_x, fire;
  jq_cfg_t                 cfg_rd;

  // Configuration of the layer being started, read from the shift table.
  shift_table #(.DEPTH(LAYERS), .ADDR_W(LAYER_W)) u_table (
    .clk      (clk),
    .wr_en_i  (cfg_wr_en_i),
    .wr_addr_i(cfg_wr_layer_i),
    .wr_data_i(cfg_wr_data_i),
    .rd_addr_i(layer_i),
    .rd_data_o(cfg_rd)
  );

  assign ready_o    = (state == S_IDLE);
  assign x_ready_o  = (state == S_ACC);
  assign sc_ready_o = (state == S_POST) && mode_has_shortcut(cfg_q.mode);
  assign take_start = ready_o && start_i;
  assign take_x     = x_ready_o && x_valid_i;
  assign fire       = (state == S_POST) && (!mode_has_shortcut(cfg_q.mode) || sc_valid_i);

  // Bias alignment (combinational, applied as the accumulator is loaded).
  align_shifter #(.IN_W(DATA_W), .OUT_W(ACC_BITS), .SH_W(ALIGN_W)) u_bias_align (
    .data_i (bias_i),
    .shift_i(cfg_rd.bias_shift),
    .data_o (bias_al),
    .sat_o  (bias_sat_c)
  );

  conv_mac #(.X_W(DATA_W), .W_W(DATA_W), .ACC_W(ACC_BITS)) u_mac (
    .clk         (clk),
    .rst_n       (rst_n),
    .load_i      (take_start),
    .bias_i      (bias_al),
    .en_i        (take_x),
    .x_i         (x_i),
    .x_unsigned_i(cfg_q.x_unsigned),
    .w_i         (w_i),
    .acc_o       (acc)
  );

  // Shortcut alignment and residual addition.
  align_shifter #(.IN_W(ACC_BITS), .OUT_W(ACC_BITS), .SH_W(ALIGN_W)) u_sc_align (
    .data_i (sc_i),
    .shift_i(cfg_q.sc_shift),
    .data_o (sc_al),
    .sat_o  (sc_sat_c)
  );

  residual_add #(.W(ACC_BITS)) u_add (
    .conv_i(acc),
    .sc_i  (sc_al),
    .en_i  (mode_has_shortcut(cfg_q.mode)),
    .sum_o (sum),
    .sat_o (add_sat_c)
  );

  relu #(.W(ACC_BITS)) u_relu (
    .d_i      (sum),
    .en_i     (mode_has_relu(cfg_q.mode)),
    .d_o      (post),
    .clamped_o(relu_c)
  );

  shift_quantizer #(.IN_W(ACC_BITS), .OUT_W(DATA_W), .SHIFT_W(SHIFT_W), .NB_W(NB_W)) u_quant (
    .clk          (clk),
    .rst_n        (rst_n),
    .valid_i      (fire),
    .data_i       (post),
    .shift_i      (cfg_q.out_shift),
    .nbits_i      (cfg_q.nbits),
    .is_unsigned_i(mode_has_relu(cfg_q.mode)),
    .valid_o      (q_valid_o),
    .q_o          (q_o),
    .sat_hi_o     (sat_hi_o),
    .sat_lo_o     (sat_lo_o)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cfg_q      <= '0;
      relu_o     <= 1'b0;
      add_sat_o  <= 1'b0;
      bias_sat_o <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (take_start) begin
          state      <= S_ACC;
          cfg_q      <= cfg_rd;
          bias_sat_o <= bias_sat_c;
        end
        S_ACC:  if (take_x && x_last_i) state <= S_POST;
        S_POST: if (fire) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      if (fire) begin
        relu_o    <= relu_c;
        add_sat_o <= add_sat_c || (mode_has_shortcut(cfg_q.mode) && sc_sat_c);
      end
    end
  end

  // Stream rules: the last marker only travels with a valid pair, and a
  // start request is only made when the unit is ready for it.
  a_last_with_valid: assert property (@(posedge clk) disable iff (!rst_n)
    x_last_i |-> x_valid_i);
  a_result_one_cycle: assert property (@(posedge clk) disable iff (!rst_n)
    q_valid_o |=> !q_valid_o);

endmodule
