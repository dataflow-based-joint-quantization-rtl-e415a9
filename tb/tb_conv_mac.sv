// tb_conv_mac: self-checking test of the 8-bit x 8-bit, 32-bit accumulate MAC.
//
// Runs dot products of random lengths (1..600) with signed and unsigned
// activations, with and without gaps in en_i, starting each from a random
// preloaded bias and sometimes chaining load+en in one cycle. The expected
// sum is computed with 64-bit integers and wrapped to 32 bits. Each dot
// product must be complete one clock after its last en_i, which the test
// checks by sampling exactly then.
module tb_conv_mac;
  import jq_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic load_i = 0, en_i = 0, x_unsigned_i = 0;
  logic signed [31:0] bias_i = '0;
  logic [7:0] x_i = '0;
  logic signed [7:0] w_i = '0;
  logic signed [31:0] acc_o;
  int checks = 0, failures = 0;

  conv_mac dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic dot(int len, bit uns, bit gaps, bit fused, longint bias, bit big);
    longint exp_v = bias;
    int xv, wv;
    @(negedge clk);
    x_unsigned_i = uns;
    load_i = 1; bias_i = 32'(bias);
    if (!fused) begin
      @(negedge clk);
      load_i = 0;
    end
    for (int i = 0; i < len; i++) begin
      if (gaps && $urandom_range(3) == 0) begin
        en_i = 0;
        @(negedge clk);
        load_i = 0;
      end
      xv = big ? (uns ? 255 : -128) : int'($urandom_range(255));
      wv = big ? -128 : int'($signed(8'($urandom())));
      x_i = 8'(xv); w_i = 8'(wv); en_i = 1;
      exp_v += (uns ? longint'(x_i) : longint'($signed(x_i))) * longint'(w_i);
      @(negedge clk);
      load_i = 0;
    end
    en_i = 0;
    checks++;
    if (longint'(acc_o) != wrap32(exp_v)) begin
      failures++;
      $display("FAIL len=%0d uns=%0b got %0d exp %0d", len, uns, acc_o, wrap32(exp_v));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    dot(1, 0, 0, 0, 0, 0);
    dot(9, 1, 0, 0, 1000, 0);
    dot(9, 0, 0, 1, -1000, 0);
    dot(4608, 1, 0, 0, 5, 1);   // 3x3x512 window of extreme values
    dot(4608, 0, 0, 0, 5, 1);
    dot(200000, 1, 0, 0, 0, 1); // long enough to wrap the 32-bit accumulator
    repeat (300) dot(1 + int'($urandom_range(599)), 1'($urandom_range(1)),
                     1'($urandom_range(1)), 1'($urandom_range(1)),
                     longint'($signed($urandom())) >>> 8, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
