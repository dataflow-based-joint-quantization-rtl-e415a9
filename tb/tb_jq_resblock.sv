// tb_jq_resblock: a scaled-down ResNet bottleneck block run through jq_unit.
//
// The block has the structure of a ResNet-50 bottleneck, at a size that
// simulates in seconds: input 16 channels x 8 x 8 (unsigned 8-bit, as after
// a ReLU), conv1 1x1 16->4 + ReLU, conv2 3x3 4->4 (stride 1, zero padding)
// + ReLU, conv3 1x1 4->16 + identity shortcut + ReLU. Every output
// activation is one operation of the unit; the outputs of one layer are the
// unsigned inputs of the next, and the block input is the shortcut of conv3.
// The three layers' shift settings are written into the unit's shift table
// (entries 0, 1, 2) once, before the block runs.
// Fractional bits chosen for the test: N_x = 4, N_w = N_b = 6 for all
// layers, N_o = 3, 3, 4. The shifts handed to the unit are therefore
//   conv1: bias 4, out 7;  conv2: bias 3, out 6;
//   conv3: bias 3, out 5, shortcut 5,
// all inside the 1..10 bit-shift range. Each output is compared with an
// integer reference of the same equations, computed here per layer.
module tb_jq_resblock;
  import jq_pkg::*;
  import jq_ref_pkg::*;

  localparam int CI = 16, CM = 4, HH = 8, WW = 8;

  logic clk = 0, rst_n = 0;
  logic start_i = 0;
  logic cfg_wr_en_i = 0;
  logic [7:0] cfg_wr_layer_i = '0, layer_i = '0;
  jq_cfg_t cfg_wr_data_i = '0;
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

  jq_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned xin [CI][HH][WW];
  byte unsigned a1  [CM][HH][WW];
  byte unsigned a2  [CM][HH][WW];
  byte unsigned a3  [CI][HH][WW];
  byte          w1 [CM][CI];
  byte          w2 [CM][CM][3][3];
  byte          w3 [CI][CM];
  byte          b1 [CM], b2 [CM], b3 [CI];

  // Operand buffer for one operation.
  byte unsigned ox [$];
  byte          ow [$];

  // Writes one layer's entry of the unit's shift table.
  task automatic set_layer(int lay, jq_mode_e mode, int bsh, int ssh, int osh);
    jq_cfg_t c;
    c = '0;
    c.mode = mode; c.bias_shift = 6'(bsh); c.sc_shift = 6'(ssh);
    c.out_shift = 4'(osh); c.nbits = 4'd8; c.x_unsigned = 1'b1;
    @(negedge clk);
    cfg_wr_en_i = 1; cfg_wr_layer_i = 8'(lay); cfg_wr_data_i = c;
    @(negedge clk);
    cfg_wr_en_i = 0;
  endtask

  task automatic do_op(int lay, jq_mode_e mode, int bsh, int ssh, int osh, byte bias,
                       longint sc, output byte unsigned q);
    longint acc, e;
    // Independent integer reference of the same operation.
    acc = align_ref(longint'(bias), bsh);
    foreach (ox[i]) acc += longint'(ox[i]) * longint'(ow[i]);
    acc = wrap32(acc);
    if (mode_has_shortcut(mode)) acc = sat32(acc + align_ref(sc, ssh));
    if (mode_has_relu(mode) && acc < 0) acc = 0;
    e = quant_ref(acc, osh, 8, mode_has_relu(mode));

    while (!ready_o) @(negedge clk);
    layer_i = 8'(lay); bias_i = bias; start_i = 1;
    @(negedge clk);
    start_i = 0;
    foreach (ox[i]) begin
      x_valid_i = 1; x_last_i = (i == ox.size() - 1);
      x_i = ox[i]; w_i = ow[i];
      @(negedge clk);
    end
    x_valid_i = 0; x_last_i = 0;
    if (mode_has_shortcut(mode)) begin
      sc_i = 32'(sc); sc_valid_i = 1;
    end
    @(negedge clk);
    sc_valid_i = 0;
    q = q_o;
    checks++;
    if (!q_valid_o || q_o !== 8'(e)) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", mode.name(), q_o, e);
    end
    ox.delete(); ow.delete();
  endtask

  initial begin
    byte unsigned q;
    foreach (xin[c, y, x]) xin[c][y][x] = byte'($urandom_range(120));
    foreach (w1[o, c]) w1[o][c] = byte'($signed(int'($urandom_range(60)) - 30));
    foreach (w2[o, c, i, j]) w2[o][c][i][j] = byte'($signed(int'($urandom_range(60)) - 30));
    foreach (w3[o, c]) w3[o][c] = byte'($signed(int'($urandom_range(60)) - 30));
    foreach (b1[o]) b1[o] = byte'($signed(int'($urandom_range(100)) - 50));
    foreach (b2[o]) b2[o] = byte'($signed(int'($urandom_range(100)) - 50));
    foreach (b3[o]) b3[o] = byte'($signed(int'($urandom_range(100)) - 50));

    repeat (3) @(posedge clk);
    rst_n = 1;
    // Shift table: layers 0..2 of the block.
    set_layer(0, MODE_CONV_RELU, 4, 0, 7);
    set_layer(1, MODE_CONV_RELU, 3, 0, 6);
    set_layer(2, MODE_RES_RELU, 3, 5, 5);
    @(negedge clk);

    // conv1: 1x1, ReLU.
    for (int o = 0; o < CM; o++)
      for (int y = 0; y < HH; y++)
        for (int x = 0; x < WW; x++) begin
          for (int c = 0; c < CI; c++) begin ox.push_back(xin[c][y][x]); ow.push_back(w1[o][c]); end
          do_op(0, MODE_CONV_RELU, 4, 0, 7, b1[o], 0, q);
          a1[o][y][x] = q;
        end
    // conv2: 3x3, zero padding, ReLU.
    for (int o = 0; o < CM; o++)
      for (int y = 0; y < HH; y++)
        for (int x = 0; x < WW; x++) begin
          for (int c = 0; c < CM; c++)
            for (int i = 0; i < 3; i++)
              for (int j = 0; j < 3; j++) begin
                automatic int yy = y + i - 1, xx = x + j - 1;
                ox.push_back((yy < 0 || yy >= HH || xx < 0 || xx >= WW) ? 8'd0 : a1[c][yy][xx]);
                ow.push_back(w2[o][c][i][j]);
              end
          do_op(1, MODE_CONV_RELU, 3, 0, 6, b2[o], 0, q);
          a2[o][y][x] = q;
        end
    // conv3: 1x1, identity shortcut, ReLU.
    for (int o = 0; o < CI; o++)
      for (int y = 0; y < HH; y++)
        for (int x = 0; x < WW; x++) begin
          for (int c = 0; c < CM; c++) begin ox.push_back(a2[c][y][x]); ow.push_back(w3[o][c]); end
          do_op(2, MODE_RES_RELU, 3, 5, 5, b3[o], longint'(xin[o][y][x]), q);
          a3[o][y][x] = q;
        end
    // The block output must not be trivially constant.
    begin
      automatic int nz = 0;
      foreach (a3[c, y, x]) if (a3[c][y][x] != 0 && a3[c][y][x] != 255) nz++;
      checks++;
      if (nz < CI * HH * WW / 8) begin
        failures++;
        $display("FAIL block output mostly zero or clipped (%0d in range)", nz);
      end
      $display("block output: %0d of %0d activations strictly inside 1..254", nz, CI * HH * WW);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
