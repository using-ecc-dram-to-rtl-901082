// line_shift_reg: the 64-byte staging shift register of the CREAM memory
// controller.
//
// A line of an extra page lives in chip 8 only, 8 bytes per column access,
// so the controller reads it with eight accesses and assembles it here:
// each access shifts its chip-8 word in at the top while the register moves
// down by 8 bytes, so after eight shifts part i sits in bytes [8i +: 8].
// The paper also reuses the register to stage data for read-modify-writes;
// for that it can be loaded in parallel. Load has priority over shift.
//
// Interface: load/load_data (512 bits), shift/shift_in (64 bits), q.
// Timing: one clock per load or shift; q is the register output. Reset
// clears it (reset value is this design's choice).
module line_shift_reg
  import cream_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  line_t      load_data,
  input  logic       shift,
  input  chip_word_t shift_in,
  output line_t      q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q <= '0;
    else if (load)  q <= load_data;
    else if (shift) q <= {shift_in, q[LINE_BITS-1:64]};
  end
endmodule
