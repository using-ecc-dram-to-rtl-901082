// tb_secded_decoder: encodes random bursts, flips zero, one or two of the
// 72 bits, and checks that the decoder returns the original data with
// 'corrected' for one flip and raises 'uncorrectable' for two.
module tb_secded_decoder;
  logic [63:0] d, din, dout;
  logic [7:0]  c, cin;
  logic        corr, unc;
  int checks = 0;
  int failures = 0;

  secded_encoder u_enc (.data(d), .check(c));
  secded_decoder dut (.data(din), .check(cin), .data_out(dout), .corrected(corr), .uncorrectable(unc));

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
    logic [71:0] cw;
    int p, q;
    for (int t = 0; t < 300; t++) begin
      d = {$urandom, $urandom};
      #1;
      cw = {c, d};
      p = $urandom % 72;
      q = (p + 1 + $urandom % 71) % 72;
      // no error
      {cin, din} = cw; #1;
      check(dout == d && !corr && !unc, "clean burst");
      // one error
      {cin, din} = cw ^ (72'd1 << p); #1;
      check(dout == d && corr && !unc, $sformatf("single error at %0d corrected", p));
      // two errors
      {cin, din} = cw ^ (72'd1 << p) ^ (72'd1 << q); #1;
      check(unc && !corr, $sformatf("double error %0d,%0d detected", p, q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
