// cream_pkg: shared geometry, types and address arithmetic for CREAM
// (Capacity- and Reliability-Adaptive Memory).
//
// CREAM lets one ECC DIMM (eight x8 data chips plus one x8 ECC chip, chip 8)
// hold two kinds of memory at once. Physical line addresses below a
// programmable boundary use a reduced-protection layout that frees the
// space of chip 8 for extra pages; lines between the boundary and 8GB keep
// the conventional SECDED layout. The extra pages are addressed from 8GB
// upwards, so the most significant bit of a physical line address says
// "extra page".
//
// Geometry that follows the paper: 64-byte cache lines sent as eight 64-bit
// bursts, x8 chips, 9 chips per rank, 8 banks, 8GB module, one channel, one
// rank, and (as the paper's figures assume) one OS page per DRAM row with
// consecutive pages in consecutive banks. Geometry chosen here: an 8KB row
// (1KB per x8 chip, the usual DDR3 x8 page), so 128 lines per row and
// 131072 rows per bank; the line address is therefore {row, bank, column}.
//
// Data lane convention (from the paper's cache-line figure): within burst b,
// chip c carries byte c of the burst, i.e. line byte 8*b + c. A chip's
// 64-bit column word holds its 8 bursts, burst b in bits [8*b +: 8].
package cream_pkg;

  localparam int unsigned LINE_BYTES    = 64;   // paper: 64-byte cache line
  localparam int unsigned LINE_BITS     = LINE_BYTES * 8;
  localparam int unsigned BURSTS        = 8;    // paper: eight 64-bit bursts
  localparam int unsigned DATA_CHIPS    = 8;    // paper: chips 0-7 hold data
  localparam int unsigned CHIPS         = 9;    // paper: plus chip 8 for ECC
  localparam int unsigned BANKS         = 8;    // paper: DDR3, 8 banks
  localparam int unsigned BANK_W        = 3;
  localparam int unsigned COL_W         = 7;    // 128 lines per 8KB row (assumed)
  localparam int unsigned LINES_PER_ROW = 1 << COL_W;
  localparam int unsigned ROW_W         = 17;   // 8GB / 8 banks / 8KB rows
  localparam int unsigned NLINE_W       = ROW_W + BANK_W + COL_W;  // 27: 8GB of lines
  localparam int unsigned PA_W          = NLINE_W + 1;             // + extra-region MSB
  // Lines in one row across all eight banks: the boundary's granularity.
  localparam int unsigned GROUP_SHIFT   = BANK_W + COL_W;          // 1024 lines = 64KB

  typedef logic [PA_W-1:0]      line_addr_t;   // physical cache-line address
  typedef logic [NLINE_W-1:0]   nline_t;       // line address below 8GB
  typedef logic [LINE_BITS-1:0] line_t;        // one 64-byte cache line
  typedef logic [63:0]          chip_word_t;   // 8 bursts x 8 bits of one chip
  typedef chip_word_t [CHIPS-1:0] dimm_data_t; // one column access, all 9 chips
  typedef logic [ROW_W-1:0]     row_t;
  typedef logic [BANK_W-1:0]    bank_t;
  typedef logic [COL_W-1:0]     col_t;

  // Data layout used for the region below the boundary.
  typedef enum logic [1:0] {
    LAYOUT_PACKED     = 2'd0,  // Solution 1: packed, no DIMM change
    LAYOUT_PACKED_RS  = 2'd1,  // Solution 2: packed + rank subsetting
    LAYOUT_INTER_WRAP = 2'd2,  // Solution 3: inter-bank wrap-around
    LAYOUT_PARITY     = 2'd3   // detection only: 8-bit parity per line
  } layout_e;

  typedef enum logic [1:0] {
    REGION_ECC   = 2'd0,  // boundary <= addr < 8GB: conventional SECDED
    REGION_CREAM = 2'd1,  // addr < boundary: CREAM layout, chips 0-7 part
    REGION_EXTRA = 2'd2,  // 8GB <= addr < capacity: extra pages
    REGION_NONE  = 2'd3   // beyond the capacity
  } region_e;

  // What one column access sent to the bridge chip touches.
  typedef enum logic [1:0] {
    ACC_LINE   = 2'd0,  // the line at addr as a whole (8 or 9 chips)
    ACC_PART   = 2'd1,  // chip-8 part 'part' of the extra line at addr
    ACC_PARITY = 2'd2   // chip-8 column holding the parity byte of addr
  } acc_kind_e;

  typedef struct packed {
    logic       we;
    acc_kind_e  kind;
    logic [2:0] part;
    line_addr_t addr;
  } access_t;

  // Per-chip command produced by the bridge chip.
  typedef struct packed {
    logic                   we;
    logic [CHIPS-1:0]       cs;
    bank_t [CHIPS-1:0]      bank;
    row_t  [CHIPS-1:0]      row;
    col_t  [CHIPS-1:0]      col;
  } chip_cmd_t;

  // Conventional mapping of a line below 8GB.
  function automatic col_t  line_col (nline_t n); return n[COL_W-1:0];                  endfunction
  function automatic bank_t line_bank(nline_t n); return n[COL_W +: BANK_W];            endfunction
  function automatic row_t  line_row (nline_t n); return n[GROUP_SHIFT +: ROW_W];        endfunction

  // Inter-bank wrap-around: byte lane carried by chip c for a line whose
  // group index is k (k = original bank 0..7, or 8 for the extra page).
  // Chip 8-k is unused; chips above it carry the lane one below.
  function automatic logic [3:0] wrap_lane(logic [3:0] c, logic [3:0] k);
    return (c < 4'd8 - k) ? c : c - 4'd1;
  endfunction

  // Hsiao odd-weight-column SECDED(72,64): column of data bit i. The 56
  // weight-3 bytes in increasing order, then the first 8 weight-5 bytes.
  function automatic logic [63:0][7:0] hsiao_columns();
    logic [63:0][7:0] h;
    int unsigned n;
    n = 0;
    h = '0;
    for (int w = 3; w <= 5; w += 2) begin
      for (int v = 0; v < 256; v++) begin
        if ($countones(v[7:0]) == w && n < 64) begin
          h[n] = v[7:0];
          n++;
        end
      end
    end
    return h;
  endfunction

endpackage
