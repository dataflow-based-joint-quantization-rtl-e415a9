// tb_relu: self-checking test of the integer ReLU.
//
// Checks zero, the range ends and random values with the ReLU enabled and
// disabled; the expected value is max(0, d) or d.
module tb_relu;
  logic signed [31:0] d_i, d_o;
  logic en_i, clamped_o;
  int checks = 0, failures = 0;

  relu dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int d, bit en);
    int e;
    d_i = d; en_i = en;
    #1;
    e = (en && d < 0) ? 0 : d;
    checks++;
    if (d_o !== e || clamped_o !== (en && d < 0)) begin
      failures++;
      $display("FAIL d=%0d en=%0b got %0d clamped=%0b", d, en, d_o, clamped_o);
    end
  endtask

  initial begin
    check(0, 1); check(-1, 1); check(1, 1); check(-1, 0);
    check(32'sh7fffffff, 1); check(32'sh80000000, 1); check(32'sh80000000, 0);
    repeat (2000) check(int'($urandom()), 1'($urandom_range(1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
