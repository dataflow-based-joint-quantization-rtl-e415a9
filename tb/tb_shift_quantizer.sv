// tb_shift_quantizer: self-checking test of the bit-shifting requantizer.
//
// Drives directed corner cases (ties, the ends of the 8-bit range, every
// shift from 0 to 15, widths 2..8, signed and unsigned) and random 32-bit
// inputs with the paper's shift range 1..10, and compares each registered
// result with floor-division arithmetic from jq_ref_pkg. Also checks the
// one-clock latency of valid_o and the saturation flags.
module tb_shift_quantizer;
  import jq_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        valid_i = 0;
  logic signed [31:0] data_i = '0;
  logic [3:0]  shift_i = '0;
  logic [3:0]  nbits_i = 4'd8;
  logic        is_unsigned_i = 0;
  logic        valid_o, sat_hi_o, sat_lo_o;
  logic [7:0]  q_o;
  int checks = 0, failures = 0;

  shift_quantizer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(longint d, int s, int n, bit uns);
    longint exp_v, raw;
    logic [7:0] exp_q;
    bit exp_hi, exp_lo;
    @(negedge clk);
    valid_i = 1; data_i = 32'(d); shift_i = 4'(s); nbits_i = 4'(n); is_unsigned_i = uns;
    @(negedge clk);
    valid_i = 0;
    exp_v  = quant_ref(longint'($signed(32'(d))), s, n, uns);
    raw    = round_div_pow2(longint'($signed(32'(d))), s);
    exp_q  = exp_v[7:0];
    exp_hi = raw > exp_v;
    exp_lo = raw < exp_v;
    checks++;
    if (!valid_o || q_o !== exp_q || sat_hi_o !== exp_hi || sat_lo_o !== exp_lo) begin
      failures++;
      $display("FAIL d=%0d s=%0d n=%0d u=%0d: got q=%0d v=%0b hi=%0b lo=%0b exp q=%0d hi=%0b lo=%0b",
               d, s, n, uns, q_o, valid_o, sat_hi_o, sat_lo_o, exp_q, exp_hi, exp_lo);
    end
    @(negedge clk);
    checks++;
    if (valid_o) begin failures++; $display("FAIL valid_o held high"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Ties and rounding around zero.
    apply(4, 3, 8, 0);    // 0.5 -> 1
    apply(-4, 3, 8, 0);   // -0.5 -> 0 (ties upward)
    apply(-5, 3, 8, 0);   // -0.625 -> -1
    apply(12, 3, 8, 0);   // 1.5 -> 2
    apply(11, 3, 8, 0);   // 1.375 -> 1
    // Range ends, signed 8-bit.
    apply(127 * 8, 3, 8, 0);
    apply(127 * 8 + 4, 3, 8, 0);  // rounds to 128 -> clip 127
    apply(-128 * 8, 3, 8, 0);
    apply(-128 * 8 - 5, 3, 8, 0); // -> clip -128
    // Unsigned after ReLU: 0..255.
    apply(255 * 4, 2, 8, 1);
    apply(255 * 4 + 2, 2, 8, 1);
    apply(-7, 2, 8, 1);
    apply(200 * 1024, 10, 8, 1);
    // Big values and every shift amount.
    for (int s = 0; s < 16; s++) begin
      apply(longint'(32'sh7fffffff), s, 8, 0);
      apply(-longint'(32'sh7fffffff) - 1, s, 8, 0);
      apply(longint'(93) << s, s, 8, 0);
      apply(longint'(3) << s | (s > 0 ? (longint'(1) << (s - 1)) : 0), s, 8, 1);
    end
    // Reduced widths used for 7- and 6-bit networks.
    for (int n = 2; n <= 8; n++) begin
      apply(1000, 3, n, 0);
      apply(-1000, 3, n, 0);
      apply(1000, 3, n, 1);
      apply(20, 1, n, 0);
    end
    // Random values, paper shift range 1..10.
    repeat (3000) begin
      int s, n;
      longint d;
      s = 1 + int'($urandom_range(9));
      n = 6 + int'($urandom_range(2));
      case ($urandom_range(2))
        0: d = longint'($signed($urandom()));
        1: d = longint'($signed($urandom())) >>> 18;
        default: d = longint'($signed($urandom())) >>> 24;
      endcase
      apply(d, s, n, 1'($urandom_range(1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
