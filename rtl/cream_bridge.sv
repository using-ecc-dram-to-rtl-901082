// cream_bridge: the logic CREAM adds to the register ("bridge chip") of an
// RDIMM. It turns each column access sent by the memory controller into a
// chip-select per chip and a bank/row/column per chip, which is what rank
// subsetting needs.
//
// Per layout (which follows the paper unless marked):
//  * ECC region, any layout, and every access in the packed layout without
//    rank subsetting (Solution 1, where the controller already translated
//    the address): all nine chips in lockstep at the conventional
//    bank/row/column of the address. No translation.
//  * Packed + rank subsetting (Solution 2): the address MSB picks the
//    subset. A CREAM-region line enables chips 0-7 (the x64 subset); part i
//    of an extra line enables chip 8 only (the x8 subset) at the location
//    of line ((addr - 8GB) << 3) + i, the same arithmetic as Solution 1.
//  * Inter-bank wrap-around (Solution 3): a line in page group k (k = the
//    original bank, the three LSBs of the paper's row number; k = 8 for the
//    extra page) leaves chip 8-k idle, sends chips below it to bank k and
//    chips above it to bank k-1, all at the same row and column. Pages 0-7
//    and A of one row then occupy nine disjoint sets of bank slices.
//  * Parity layout: CREAM lines use chips 0-7. Parity of a page in bank i is
//    in chip 8 of bank (i+4) mod 8 (paper); the parity rows come first and
//    then extra pages of 8 chip-8 rows each (paper's figure). Within that,
//    the row/column arithmetic is this design's: parity slot idx (the page's
//    row in its bank, or R + q for extra page q of a bank) is in row idx>>3,
//    column (idx mod 8)*16 + line>>3, burst line mod 8; line l of extra
//    page q of bank b is in row P + 8q + l>>4, columns (l mod 16)*8 + part.
//
// Timing: the command is registered, so cmd_valid/cmd follow acc_valid/acc
// by one clock (the paper models the bridge as one DRAM cycle of delay).
// The bridge accepts one access per clock; it has no back-pressure.
// Interface: layout and boundary (a copy of the controller's boundary
// register, as the paper requires for Solutions 2 and 3), acc_valid/acc in;
// cmd_valid/cmd (per-chip chip_cmd_t) and cmd_group (the page group 0..8
// the access occupies; 9 groups = 9 independent "banks" in the wrap-around
// layout) out.
module cream_bridge
  import cream_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  layout_e    layout,
  input  line_addr_t boundary,
  input  logic       acc_valid,
  input  access_t    acc,
  output logic       cmd_valid,
  output chip_cmd_t  cmd,
  output logic [3:0] cmd_group
);
  region_e         region;
  line_addr_t      capacity;
  logic [ROW_W:0]  cream_rows;
  logic [ROW_W:0]  par_extra_pages;
  logic [ROW_W:0]  par_first_row;

  region_decoder u_region (
    .layout          (layout),
    .boundary        (boundary),
    .addr            (acc.addr),
    .region          (region),
    .capacity        (capacity),
    .cream_rows      (cream_rows),
    .par_extra_pages (par_extra_pages),
    .par_first_row   (par_first_row)
  );

  chip_cmd_t  nxt;
  logic [3:0] nxt_group;

  always_comb begin
    nline_t     n;        // the address below 8GB, or the offset above it
    nline_t     host;     // Solution-2 host line of an extra part
    logic [3:0] k;
    row_t       r;
    col_t       l;        // line within its page
    logic [NLINE_W-COL_W-1:0] xpage;   // extra page number
    logic [ROW_W+1:0] idx;             // parity slot within a bank
    bank_t      pbank;
    logic [ROW_W+1:0] prow;

    n         = acc.addr[NLINE_W-1:0];
    l         = n[COL_W-1:0];
    xpage     = n[NLINE_W-1:COL_W];
    host      = '0;
    k         = '0;
    r         = '0;
    idx       = '0;
    pbank     = '0;
    prow      = '0;
    nxt_group = {1'b0, line_bank(n)};

    // Default: conventional lockstep access to all nine chips.
    nxt.we   = acc.we;
    nxt.cs   = '1;
    for (int c = 0; c < CHIPS; c++) begin
      nxt.bank[c] = line_bank(n);
      nxt.row[c]  = line_row(n);
      nxt.col[c]  = line_col(n);
    end

    if (region != REGION_ECC) begin
      unique case (layout)
        LAYOUT_PACKED: ;  // controller already translated; all chips

        LAYOUT_PACKED_RS: begin
          if (acc.addr[PA_W-1]) begin
            // x8 subset: chip 8 at the host line of this part
            host = {n[NLINE_W-4:0], acc.part};
            nxt.cs = 9'h100;
            for (int c = 0; c < CHIPS; c++) begin
              nxt.bank[c] = line_bank(host);
              nxt.row[c]  = line_row(host);
              nxt.col[c]  = line_col(host);
            end
            nxt_group = 4'd8;
          end else begin
            nxt.cs = 9'h0FF;  // x64 subset
          end
        end

        LAYOUT_INTER_WRAP: begin
          if (acc.addr[PA_W-1]) begin
            k = 4'd8;
            r = row_t'(xpage);
          end else begin
            k = {1'b0, line_bank(n)};
            r = line_row(n);
          end
          nxt_group = k;
          for (int c = 0; c < CHIPS; c++) begin
            nxt.cs[c]   = (4'(c) != 4'd8 - k);
            nxt.bank[c] = (4'(c) < 4'd8 - k) ? bank_t'(k) : bank_t'(k - 4'd1);
            nxt.row[c]  = r;
            nxt.col[c]  = l;
          end
        end

        LAYOUT_PARITY: begin
          if (acc.kind == ACC_LINE) begin
            nxt.cs = 9'h0FF;
          end else begin
            nxt.cs = 9'h100;
            nxt_group = 4'd8;
            if (acc.kind == ACC_PART) begin
              // line l of extra page q = xpage>>3 in bank xpage mod 8
              prow = (ROW_W+2)'(par_first_row)
                   + (ROW_W+2)'({xpage[NLINE_W-COL_W-1:BANK_W], 3'b000})
                   + (ROW_W+2)'(l[COL_W-1:4]);
              for (int c = 0; c < CHIPS; c++) begin
                nxt.bank[c] = xpage[BANK_W-1:0];
                nxt.row[c]  = row_t'(prow);
                nxt.col[c]  = {l[3:0], acc.part};
              end
            end else begin
              if (acc.addr[PA_W-1]) begin
                pbank = xpage[BANK_W-1:0];
                idx   = (ROW_W+2)'(cream_rows)
                      + (ROW_W+2)'(xpage[NLINE_W-COL_W-1:BANK_W]);
              end else begin
                pbank = line_bank(n);
                idx   = (ROW_W+2)'(line_row(n));
              end
              for (int c = 0; c < CHIPS; c++) begin
                nxt.bank[c] = pbank + bank_t'(4);     // (i + 4) mod 8
                nxt.row[c]  = row_t'(idx >> 3);
                nxt.col[c]  = {idx[2:0], l[COL_W-1:3]};
              end
            end
          end
        end

        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_valid <= 1'b0;
      cmd       <= '0;
      cmd_group <= '0;
    end else begin
      cmd_valid <= acc_valid;
      if (acc_valid) begin
        cmd       <= nxt;
        cmd_group <= nxt_group;
      end
    end
  end
endmodule
