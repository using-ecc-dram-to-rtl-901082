// tb_secded_encoder: checks the SECDED encoder against properties of an
// odd-weight-column code worked out independently of the design: the check
// byte of each single data bit has odd weight 3 or 5, all 64 differ, the
// first weight-3 and weight-5 columns are the smallest such bytes, and the
// code is linear (check(a^b) = check(a)^check(b)).
module tb_secded_encoder;
  logic [63:0] d;
  logic [7:0]  c;
  int checks = 0;
  int failures = 0;

  secded_encoder dut (.data(d), .check(c));

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
    logic [7:0] col [64];
    logic [63:0] a, b;
    logic [7:0] ca, cb;
    for (int i = 0; i < 64; i++) begin
      d = 64'd1 << i;
      #1;
      col[i] = c;
      check($countones(c) == 3 || $countones(c) == 5, $sformatf("column %0d odd weight 3/5", i));
    end
    for (int i = 0; i < 64; i++)
      for (int j = i + 1; j < 64; j++)
        if (col[i] == col[j]) check(1'b0, $sformatf("columns %0d and %0d equal", i, j));
    check(col[0] == 8'b0000_0111, "first column is the smallest weight-3 byte");
    check(col[55] == 8'b1110_0000, "column 55 is the largest weight-3 byte");
    check(col[56] == 8'b0001_1111, "column 56 is the smallest weight-5 byte");
    d = '0; #1;
    check(c == 8'h00, "zero data has zero check");
    for (int t = 0; t < 200; t++) begin
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      d = a; #1; ca = c;
      d = b; #1; cb = c;
      d = a ^ b; #1;
      check(c == (ca ^ cb), "linearity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
