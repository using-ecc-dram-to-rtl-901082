// tb_line_parity_gen: compares the 8-bit line parity with a per-burst
// population count computed in the testbench, and checks that flipping one
// bit of burst b flips exactly parity bit b.
module tb_line_parity_gen;
  import cream_pkg::*;
  line_t      line;
  logic [7:0] par;
  int checks = 0;
  int failures = 0;

  line_parity_gen dut (.line(line), .parity(par));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] exp, p0;
    int k;
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < 16; i++) line[32*i +: 32] = $urandom;
      #1;
      for (int b = 0; b < 8; b++) exp[b] = ($countones(line[64*b +: 64]) % 2) == 1;
      check(par == exp, "parity equals burst popcount parity");
      p0 = par;
      k = $urandom % 512;
      line[k] = ~line[k]; #1;
      check((par ^ p0) == (8'd1 << (k / 64)), "one flip changes its burst's bit only");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
