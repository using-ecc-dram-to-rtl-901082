// tb_line_shift_reg: shifts eight chip-8 words in and checks that word i
// lands in bytes [8i +: 8]; checks parallel load, load priority over shift,
// hold, and reset, one clock per operation.
module tb_line_shift_reg;
  import cream_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  line_t ld, q;
  chip_word_t sin;
  int checks = 0;
  int failures = 0;

  line_shift_reg dut (.clk, .rst_n, .load, .load_data(ld), .shift, .shift_in(sin), .q);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chip_word_t w [8];
    line_t exp;
    ld = '0; sin = '0;
    repeat (2) @(negedge clk);
    check(q == '0, "reset clears");
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < 8; i++) begin
        w[i] = {$urandom, $urandom};
        @(negedge clk); shift = 1; sin = w[i];
        @(negedge clk); shift = 0;
      end
      for (int i = 0; i < 8; i++) exp[64*i +: 64] = w[i];
      check(q == exp, "eight shifts assemble the line in order");
      repeat (3) @(negedge clk);
      check(q == exp, "holds without load or shift");
      for (int i = 0; i < 16; i++) ld[32*i +: 32] = $urandom;
      load = 1; shift = 1; sin = '1;
      @(negedge clk); load = 0; shift = 0;
      check(q == ld, "load has priority over shift");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
