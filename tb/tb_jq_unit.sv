// tb_jq_unit: end-to-end test of the unified quantized module at its default size.
//
// Each operation either writes a new entry of the per-layer shift table or
// reuses one written earlier, and starts the unit on that layer. New
// entries pick a random module type (conv, conv+ReLU, residual+ReLU,
// residual), random shift amounts, output width 6..8 bits, signed or
// unsigned input activations, and a receptive field of 1..300 pairs (or
// 4608, a 3x3x512 window). Operands are streamed with random gaps and the
// shortcut is offered after a random delay, so the stall path is used. The
// expected result is computed with the 64-bit reference arithmetic of
// jq_ref_pkg: aligned bias, exact dot product wrapped to 32 bits, aligned
// shortcut, saturating add, ReLU, rounded shift, clipping.
// The test also checks the latency: with no gaps and no stall, q_valid_o
// must rise L+2 clocks after start_i for L pairs.
// Mechanisms counted (each must occur at least once): the four module types,
// a ReLU that clamps, output clipping at the top and at the bottom, bias
// shifted left and right, shortcut shifted left and right, a saturated
// residual addition, a shortcut stall, a gap in the stream, 6- and 7-bit
// outputs, unsigned input activations, reuse of a stored table entry.
module tb_jq_unit;
  import jq_pkg::*;
  import jq_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start_i = 0;
  logic cfg_wr_en_i = 0;
  logic [7:0] cfg_wr_layer_i = '0, layer_i = '0;
  jq_cfg_t cfg_wr_data_i = '0;
  jq_cfg_t shadow [256];
  bit      written [256] = '{default: 1'b0};
  logic signed [7:0] bias_i = '0;
  logic ready_o;
  logic x_valid_i = 0, x_last_i = 0;
  logic [7:0] x_i = '0;
  logic signed [7:0] w_i = '0;
  logic x_ready_o;
  logic sc_valid_i = 0;
  logic signed [31:0] sc_i = '0;
  logic sc_ready_o;
  logic q_valid_o;
  logic [7:0] q_o;
  logic sat_hi_o, sat_lo_o, relu_o, add_sat_o, bias_sat_o;

  int checks = 0, failures = 0;
  longint cycle = 0;

  typedef enum int {
    EV_CONV, EV_CONV_RELU, EV_RES_RELU, EV_RES, EV_RELU_CLAMP, EV_SAT_HI, EV_SAT_LO,
    EV_BIAS_LEFT, EV_BIAS_RIGHT, EV_SC_LEFT, EV_SC_RIGHT, EV_ADD_SAT, EV_SC_STALL,
    EV_GAP, EV_NB6, EV_NB7, EV_X_UNSIGNED, EV_TABLE_REUSE, EV_N
  } ev_e;
  int ev[EV_N];
  string ev_name[EV_N] = '{"conv", "conv_relu", "res_relu", "res", "relu_clamp", "sat_hi",
                            "sat_lo", "bias_left", "bias_right", "sc_left", "sc_right",
                            "add_sat", "sc_stall", "stream_gap", "nbits6", "nbits7",
                            "x_unsigned", "table_reuse"};

  jq_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_op(jq_mode_e mode, int len, bit gaps, int sc_delay, bit extreme,
                        bit reuse = 0);
    jq_cfg_t c;
    int lay;
    longint acc, s_al, sum, post, e, raw;
    longint t_start;
    bit res, rl, e_add_sat;
    int xv, wv;
    logic [7:0] eq;

    c.mode       = mode;
    c.bias_shift = 6'($signed(int'($urandom_range(24)) - 8));
    c.sc_shift   = 6'($signed(int'($urandom_range(20)) - 10));
    c.out_shift  = 4'(1 + $urandom_range(9));
    c.nbits      = 4'(6 + $urandom_range(2));
    c.x_unsigned = 1'($urandom_range(1));
    if (extreme) begin
      c.sc_shift  = 6'sd31;
      c.out_shift = 4'd10;
    end

    // Either reuse a layer already in the shift table, or write a new entry.
    lay = int'($urandom_range(255));
    if (reuse && written[lay]) begin
      c = shadow[lay];
      ev[EV_TABLE_REUSE]++;
    end else begin
      while (!ready_o) @(negedge clk);
      cfg_wr_en_i = 1; cfg_wr_layer_i = 8'(lay); cfg_wr_data_i = c;
      @(negedge clk);
      cfg_wr_en_i = 0; cfg_wr_data_i = '0;
      shadow[lay] = c; written[lay] = 1;
    end
    mode = c.mode;
    res  = mode_has_shortcut(mode);
    rl   = mode_has_relu(mode);

    while (!ready_o) @(negedge clk);
    layer_i = 8'(lay);
    bias_i  = 8'($urandom());
    start_i = 1;
    acc     = align_ref(longint'(bias_i), int'(c.bias_shift));
    ev[int'(mode)]++;
    if (c.bias_shift > 0) ev[EV_BIAS_LEFT]++;
    if (c.bias_shift < 0) ev[EV_BIAS_RIGHT]++;
    if (c.nbits == 6) ev[EV_NB6]++;
    if (c.nbits == 7) ev[EV_NB7]++;
    if (c.x_unsigned) ev[EV_X_UNSIGNED]++;
    @(negedge clk);
    t_start = cycle;
    start_i = 0;
    layer_i = 8'($urandom());
    for (int i = 0; i < len; i++) begin
      if (gaps && $urandom_range(4) == 0) begin
        x_valid_i = 0;
        ev[EV_GAP]++;
        @(negedge clk);
      end
      xv = int'($urandom_range(255));
      wv = int'($signed(8'($urandom())));
      if (extreme) begin xv = c.x_unsigned ? 255 : 127; wv = 127; end
      x_valid_i = 1; x_last_i = (i == len - 1);
      x_i = 8'(xv); w_i = 8'(wv);
      if (!x_ready_o) begin failures++; $display("FAIL stream not ready"); end
      acc += (c.x_unsigned ? longint'(x_i) : longint'($signed(x_i))) * longint'(w_i);
      @(negedge clk);
    end
    x_valid_i = 0; x_last_i = 0;
    acc = wrap32(acc);

    sum = acc;
    e_add_sat = 0;
    if (res) begin
      sc_i = extreme ? 32'sd1 : 32'($signed(8'($urandom())));
      if (!extreme && $urandom_range(1) != 0) sc_i = 32'($urandom_range(255));
      s_al = align_ref(longint'(sc_i), int'(c.sc_shift));
      raw  = (c.sc_shift >= 0) ? longint'(sc_i) * pow2(int'(c.sc_shift))
                               : round_div_pow2(longint'(sc_i), -int'(c.sc_shift));
      sum  = sat32(acc + s_al);
      e_add_sat = (sum != acc + s_al) || (raw != s_al);
      if (c.sc_shift > 0) ev[EV_SC_LEFT]++;
      if (c.sc_shift < 0) ev[EV_SC_RIGHT]++;
      for (int d = 0; d < sc_delay; d++) begin
        if (!sc_ready_o) begin failures++; $display("FAIL shortcut not requested"); end
        @(negedge clk);
      end
      if (sc_delay > 0) ev[EV_SC_STALL]++;
      sc_valid_i = 1;
      @(negedge clk);
      sc_valid_i = 0;
    end else begin
      @(negedge clk);
    end
    post = (rl && sum < 0) ? 0 : sum;
    e    = quant_ref(post, int'(c.out_shift), int'(c.nbits), rl);
    raw  = round_div_pow2(post, int'(c.out_shift));
    eq   = e[7:0];

    checks++;
    if (!q_valid_o || q_o !== eq || sat_hi_o !== (raw > e) || sat_lo_o !== (raw < e)
        || relu_o !== (rl && sum < 0) || add_sat_o !== e_add_sat) begin
      failures++;
      $display("FAIL mode=%s len=%0d: q=%0d v=%0b hi=%0b lo=%0b relu=%0b as=%0b exp q=%0d (pre=%0d)",
               mode.name(), len, q_o, q_valid_o, sat_hi_o, sat_lo_o, relu_o, add_sat_o, eq, post);
    end
    if (rl && sum < 0) ev[EV_RELU_CLAMP]++;
    if (raw > e) ev[EV_SAT_HI]++;
    if (raw < e) ev[EV_SAT_LO]++;
    if (e_add_sat) ev[EV_ADD_SAT]++;
    // Latency without gaps or stalls: L + 2 clocks from the start edge.
    if (!gaps && sc_delay == 0) begin
      checks++;
      if (cycle - t_start + 1 != longint'(len) + 2) begin
        failures++;
        $display("FAIL latency %0d for L=%0d", cycle - t_start + 1, len);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // Directed: one of each module type without gaps, latency checked.
    run_op(MODE_CONV, 9, 0, 0, 0);
    run_op(MODE_CONV_RELU, 9, 0, 0, 0);
    run_op(MODE_RES_RELU, 9, 0, 0, 0);
    run_op(MODE_RES, 1, 0, 0, 0);
    run_op(MODE_RES, 4608, 0, 3, 1);       // 3x3x512 window, saturating add
    run_op(MODE_CONV_RELU, 4608, 0, 0, 1);
    repeat (1500)
      run_op(jq_mode_e'($urandom_range(3)), 1 + int'($urandom_range(299)),
             1'($urandom_range(1)), int'($urandom_range(3)), 0, 1'($urandom_range(1)));
    for (int i = 0; i < EV_N; i++) begin
      $display("event %-12s %0d", ev_name[i], ev[i]);
      checks++;
      if (ev[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", ev_name[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
