// ecc_dimm_model: behavioural model of the nine x8 DRAM chips of an ECC
// DIMM, at the level of column accesses (not synthesizable: it uses
// associative arrays as sparse storage).
//
// Each chip keeps its own storage indexed by {bank, row, column}; a column
// word is the chip's 8 bursts of 8 bits. On dimm_cmd_valid every chip whose
// chip-select is set reads or writes its word at its own bank/row/column,
// which is what rank subsetting allows. After LAT clocks 'done' pulses with
// the read data (unselected chips return zero). Unwritten words read as
// zero. The model also counts commands per chip, tracks the open row of each
// of the 72 bank slices (chip x bank) to count row-buffer hits, and offers
// flip_bit() to inject errors.
module ecc_dimm_model
  import cream_pkg::*;
#(
  parameter int unsigned LAT = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  input  chip_cmd_t  cmd,
  input  dimm_data_t wdata,
  output logic       done,
  output dimm_data_t rdata
);
  typedef logic [BANK_W+ROW_W+COL_W-1:0] key_t;
  chip_word_t mem [CHIPS][key_t];
  row_t       open_row [CHIPS][BANKS];
  logic       row_open [CHIPS][BANKS];

  int unsigned chip_cmds [CHIPS];
  int unsigned row_hits;
  int unsigned row_misses;

  int unsigned cnt;
  logic        busy;

  function automatic key_t key_of(int c);
    return {cmd.bank[c], cmd.row[c], cmd.col[c]};
  endfunction

  task automatic flip_bit(input int c, input bank_t b, input row_t r, input col_t col, input int bit_i);
    key_t k;
    k = {b, r, col};
    if (!mem[c].exists(k)) mem[c][k] = '0;
    mem[c][k][bit_i] = ~mem[c][k][bit_i];
  endtask

  task automatic clear();
    for (int c = 0; c < CHIPS; c++) mem[c].delete();
  endtask

  function automatic chip_word_t peek(int c, bank_t b, row_t r, col_t col);
    key_t k;
    k = {b, r, col};
    return mem[c].exists(k) ? mem[c][k] : '0;
  endfunction

  initial begin
    for (int c = 0; c < CHIPS; c++) begin
      chip_cmds[c] = 0;
      for (int b = 0; b < BANKS; b++) row_open[c][b] = 1'b0;
    end
    row_hits = 0;
    row_misses = 0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done  <= 1'b0;
      busy  <= 1'b0;
      cnt   <= 0;
      rdata <= '0;
    end else begin
      done <= 1'b0;
      if (cmd_valid) begin
        for (int c = 0; c < CHIPS; c++) begin
          rdata[c] <= '0;
          if (cmd.cs[c]) begin
            chip_cmds[c] <= chip_cmds[c] + 1;
            if (row_open[c][cmd.bank[c]] && open_row[c][cmd.bank[c]] == cmd.row[c]) row_hits++;
            else row_misses++;
            row_open[c][cmd.bank[c]] <= 1'b1;
            open_row[c][cmd.bank[c]] <= cmd.row[c];
            if (cmd.we) mem[c][key_of(c)] = wdata[c];
            else rdata[c] <= mem[c].exists(key_of(c)) ? mem[c][key_of(c)] : '0;
          end
        end
        busy <= 1'b1;
        cnt  <= LAT - 1;
      end else if (busy) begin
        if (cnt == 0) begin
          done <= 1'b1;
          busy <= 1'b0;
        end else cnt <= cnt - 1;
      end
    end
  end
endmodule
