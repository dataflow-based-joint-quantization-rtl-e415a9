// tb_shift_table: self-checking test of the per-layer shift table.
//
// Writes every one of the 256 entries with a random configuration, reads
// them all back in random order, then overwrites random entries one at a
// time while checking that each write is visible from the next clock and
// that the other entries keep their values. A shadow array holds the
// expected contents.
module tb_shift_table;
  import jq_pkg::*;

  logic clk = 0;
  logic wr_en_i = 0;
  logic [7:0] wr_addr_i = '0, rd_addr_i = '0;
  jq_cfg_t wr_data_i = '0, rd_data_o;
  jq_cfg_t shadow [256];
  int checks = 0, failures = 0;

  shift_table dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic jq_cfg_t rnd_cfg();
    return jq_cfg_t'($urandom());
  endfunction

  task automatic check(int a);
    rd_addr_i = 8'(a);
    #1;
    checks++;
    if (rd_data_o !== shadow[a]) begin
      failures++;
      $display("FAIL entry %0d: got %h exp %h", a, rd_data_o, shadow[a]);
    end
  endtask

  initial begin
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      wr_en_i = 1; wr_addr_i = 8'(a); wr_data_i = rnd_cfg();
      shadow[a] = wr_data_i;
    end
    @(negedge clk);
    wr_en_i = 0;
    repeat (1000) check(int'($urandom_range(255)));
    for (int a = 0; a < 256; a++) check(a);
    repeat (500) begin
      automatic int a = int'($urandom_range(255));
      automatic int b = int'($urandom_range(255));
      @(negedge clk);
      wr_en_i = 1; wr_addr_i = 8'(a); wr_data_i = rnd_cfg();
      @(negedge clk);
      wr_en_i = 0;
      shadow[a] = wr_data_i;
      check(a);
      check(b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
