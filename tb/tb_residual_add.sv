// tb_residual_add: self-checking test of the residual Add node.
//
// Checks exact sums, pass-through with en_i low, and saturation at both ends
// of the 32-bit range against 64-bit reference arithmetic.
module tb_residual_add;
  import jq_ref_pkg::*;

  logic signed [31:0] conv_i, sc_i, sum_o;
  logic en_i, sat_o;
  int checks = 0, failures = 0;

  residual_add dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(longint a, longint b, bit en);
    longint full, e;
    conv_i = 32'(a); sc_i = 32'(b); en_i = en;
    #1;
    full = longint'(conv_i) + (en ? longint'(sc_i) : 0);
    e = sat32(full);
    checks++;
    if (longint'(sum_o) != e || sat_o !== (full != e)) begin
      failures++;
      $display("FAIL a=%0d b=%0d en=%0b got %0d sat=%0b exp %0d", a, b, en, sum_o, sat_o, e);
    end
  endtask

  initial begin
    check(5, 7, 1);
    check(5, 7, 0);
    check(-100, 40, 1);
    check(pow2(31) - 1, 1, 1);
    check(-pow2(31), -1, 1);
    check(pow2(31) - 1, pow2(31) - 1, 1);
    check(-pow2(31), -pow2(31), 1);
    check(pow2(31) - 1, -pow2(31), 1);
    repeat (5000)
      check(longint'($signed($urandom())), longint'($signed($urandom())), 1'($urandom_range(3) != 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
