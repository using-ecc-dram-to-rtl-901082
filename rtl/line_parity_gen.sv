// line_parity_gen: the 8-bit parity code of the detection-only region.
//
// The paper's detection-only layout keeps 8 parity bits per 64-byte cache
// line, enough to detect one error in each of the eight data bursts; this
// is what makes the region gain 10.7% capacity (8 bits per 512, counted for
// the extra pages too). Bit b of the code is the even parity (XOR) of burst
// b, i.e. of line bits [64*b +: 64]. The even polarity is this design's
// choice.
//
// Interface: line (512 bits) in, parity (8 bits) out. Combinational.
module line_parity_gen
  import cream_pkg::*;
(
  input  line_t      line,
  output logic [7:0] parity
);
  always_comb begin
    for (int b = 0; b < BURSTS; b++) parity[b] = ^line[64*b +: 64];
  end
endmodule
