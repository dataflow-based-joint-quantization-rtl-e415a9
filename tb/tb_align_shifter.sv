// tb_align_shifter: self-checking test of the bias / shortcut alignment shifter.
//
// Two instances are tested: the 8-bit bias variant and the 32-bit shortcut
// variant, both producing 32-bit results with a 6-bit signed shift. Directed
// cases cover rounding ties on right shifts and saturation on left shifts;
// random cases sweep shifts -32..31. Expected values come from the
// multiply / floor-division reference in jq_ref_pkg. Combinational block:
// each check waits one time step after the inputs change.
module tb_align_shifter;
  import jq_ref_pkg::*;

  logic signed [7:0]  b_d;
  logic signed [31:0] s_d;
  logic signed [5:0]  b_sh, s_sh;
  logic signed [31:0] b_o, s_o;
  logic               b_sat, s_sat;
  int checks = 0, failures = 0;

  align_shifter #(.IN_W(8),  .OUT_W(32), .SH_W(6)) u_b (.data_i(b_d), .shift_i(b_sh), .data_o(b_o), .sat_o(b_sat));
  align_shifter #(.IN_W(32), .OUT_W(32), .SH_W(6)) u_s (.data_i(s_d), .shift_i(s_sh), .data_o(s_o), .sat_o(s_sat));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_b(int d, int k);
    longint e, raw;
    b_d = 8'(d); b_sh = 6'(k);
    #1;
    e   = align_ref(longint'(d), k);
    raw = (k >= 0) ? longint'(d) * pow2(k) : round_div_pow2(longint'(d), -k);
    checks++;
    if (longint'(b_o) != e || b_sat !== (raw != e)) begin
      failures++;
      $display("FAIL bias d=%0d k=%0d got %0d sat=%0b exp %0d", d, k, b_o, b_sat, e);
    end
  endtask

  task automatic check_s(longint d, int k);
    longint e, raw;
    s_d = 32'(d); s_sh = 6'(k);
    #1;
    e   = align_ref(d, k);
    raw = (k >= 0) ? d * pow2(k) : round_div_pow2(d, -k);
    checks++;
    if (longint'(s_o) != e || s_sat !== (raw != e)) begin
      failures++;
      $display("FAIL sc d=%0d k=%0d got %0d sat=%0b exp %0d", d, k, s_o, s_sat, e);
    end
  endtask

  initial begin
    check_b(3, -1);   // 1.5 -> 2
    check_b(-3, -1);  // -1.5 -> -1
    check_b(5, -2);   // 1.25 -> 1
    check_b(-6, -2);  // -1.5 -> -1
    check_b(100, 5);
    check_b(-128, 24);
    check_b(127, 24); // fits
    check_b(127, 25); // saturates
    check_b(-128, 31);
    check_b(77, -32);
    check_b(-77, 0);
    check_s(longint'(32'sh40000000), 1);  // saturates
    check_s(-longint'(32'sh40000000), 1); // exactly min
    check_s(12345, -4);
    check_s(-12345, -4);
    check_s(255, 8);
    for (int k = -32; k < 32; k++) begin
      check_b(int'($signed(8'($urandom()))), k);
      check_s(longint'($signed($urandom())) >>> 20, k);
    end
    repeat (4000) begin
      check_b(int'($signed(8'($urandom()))), int'($signed(6'($urandom()))));
      check_s(longint'($signed($urandom())) >>> $urandom_range(31), int'($signed(6'($urandom()))));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
