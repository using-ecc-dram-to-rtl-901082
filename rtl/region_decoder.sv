// region_decoder: classifies a physical line address against the CREAM
// boundary and derives the capacity and the parity-layout geometry.
//
// Follows the paper's boundary scheme: lines below 'boundary' use the CREAM
// layout (chips 0-7 part), lines from the boundary up to 8GB keep the
// conventional SECDED layout, and the extra pages that the CREAM region
// frees in chip 8 are addressed from 8GB upwards, so the address MSB marks
// them. For the correction-free layouts the extra space is boundary>>3
// lines and the capacity is 8GB + (boundary>>3), the paper's formula.
//
// Design choices: the boundary is a line address whose low GROUP_SHIFT bits
// are ignored, so the CREAM region always covers whole rows in all eight
// banks (R rows per bank). For the parity layout the paper gives no
// formula; here each bank's chip 8 holds, in rows 0..R-1, first the parity
// rows and then E extra pages of 8 rows each. Parity is kept for R + E
// pages per bank, one byte per line, eight pages per chip-8 row, so
// E = floor(7R/65) and the first extra-page row is P = ceil((R+E)/8). This
// gives the paper's 10.7% (7/65) extra capacity.
//
// Interface: layout, boundary, addr in; region, capacity (lines),
// cream_rows (R), par_extra_pages (E, per bank), par_first_row (P) out.
// Combinational.
module region_decoder
  import cream_pkg::*;
(
  input  layout_e     layout,
  input  line_addr_t  boundary,
  input  line_addr_t  addr,
  output region_e     region,
  output line_addr_t  capacity,
  output logic [ROW_W:0] cream_rows,
  output logic [ROW_W:0] par_extra_pages,
  output logic [ROW_W:0] par_first_row
);
  logic [PA_W-1:0]  b_aligned;
  logic [PA_W-1:0]  extra_lines;
  logic [ROW_W+3:0] seven_r;
  logic [ROW_W+1:0] r_plus_e;

  always_comb begin
    b_aligned = {boundary[PA_W-1:GROUP_SHIFT], {GROUP_SHIFT{1'b0}}};
    if (b_aligned > line_addr_t'(1 << NLINE_W)) b_aligned = line_addr_t'(1 << NLINE_W);
    cream_rows      = b_aligned[GROUP_SHIFT +: ROW_W+1];
    seven_r         = (ROW_W+4)'(cream_rows) * (ROW_W+4)'(7);
    par_extra_pages = (ROW_W+1)'(seven_r / (ROW_W+4)'(65));
    r_plus_e        = (ROW_W+2)'(cream_rows) + (ROW_W+2)'(par_extra_pages) + (ROW_W+2)'(7);
    par_first_row   = (ROW_W+1)'(r_plus_e >> 3);

    // Extra lines: one page (row of 128 lines) per 8 CREAM pages, or
    // 8*E pages for the parity layout.
    if (layout == LAYOUT_PARITY)
      extra_lines = PA_W'(par_extra_pages) << GROUP_SHIFT;
    else
      extra_lines = b_aligned >> 3;
    capacity = line_addr_t'(1 << NLINE_W) + extra_lines;

    if (!addr[PA_W-1])
      region = (addr < b_aligned) ? REGION_CREAM : REGION_ECC;
    else
      region = ({1'b0, addr[NLINE_W-1:0]} < extra_lines) ? REGION_EXTRA : REGION_NONE;
  end
endmodule
