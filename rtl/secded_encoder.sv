// secded_encoder: 8-bit SECDED check byte for one 64-bit data burst.
//
// In the ECC region of a CREAM module each 64-bit burst travels with an
// 8-bit single-error-correct, double-error-detect code stored in chip 8,
// exactly as in a conventional ECC DIMM. The paper cites Hsiao's
// odd-weight-column codes; this block uses one such code: check bit j is
// the XOR of the data bits whose column (cream_pkg::hsiao_columns) has bit j
// set. The choice of the 64 columns is this design's own.
//
// Interface: data (64 bits) in, check (8 bits) out. Purely combinational.
module secded_encoder
  import cream_pkg::*;
(
  input  logic [63:0] data,
  output logic [7:0]  check
);
  localparam logic [63:0][7:0] H = hsiao_columns();

  always_comb begin
    check = '0;
    for (int i = 0; i < 64; i++) begin
      if (data[i]) check = check ^ H[i];
    end
  end
endmodule
