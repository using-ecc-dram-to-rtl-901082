// secded_decoder: checks and corrects one 72-bit burst (64 data + 8 check).
//
// The syndrome is the recomputed check byte XOR the stored one. With the
// odd-weight-column (Hsiao) code of secded_encoder: a zero syndrome means no
// error; a syndrome equal to a data column flips that data bit; a
// single-bit syndrome is an error in the check byte itself (data is good);
// any other syndrome (every even-weight one, which is what two errors give,
// and unused odd-weight ones) is an uncorrectable error. Correcting one bit
// and detecting two per 64-bit burst is what the paper requires of the ECC
// region; the particular code is this design's choice.
//
// Interface: data, check in; corrected data, 'corrected' (a single-bit error
// was fixed) and 'uncorrectable' out. Purely combinational.
module secded_decoder
  import cream_pkg::*;
(
  input  logic [63:0] data,
  input  logic [7:0]  check,
  output logic [63:0] data_out,
  output logic        corrected,
  output logic        uncorrectable
);
  localparam logic [63:0][7:0] H = hsiao_columns();

  logic [7:0] recomputed;
  logic [7:0] syndrome;

  secded_encoder u_enc (.data(data), .check(recomputed));

  always_comb begin
    logic hit;
    syndrome      = recomputed ^ check;
    data_out      = data;
    hit           = 1'b0;
    corrected     = 1'b0;
    uncorrectable = 1'b0;
    if (syndrome != 8'h00) begin
      for (int i = 0; i < 64; i++) begin
        if (syndrome == H[i]) begin
          data_out[i] = ~data[i];
          hit         = 1'b1;
        end
      end
      if ($countones(syndrome) == 1) hit = 1'b1;  // error in the check byte
      corrected     = hit;
      uncorrectable = ~hit;
    end
  end
endmodule
