// tb_cream_bridge: checks the bridge chip's per-chip commands against the
// paper's layout figures and address formulas, computed here on their own:
//  * inter-bank wrap-around: the figure's table of row 0 (which page each
//    chip of each bank holds) for pages 0-7 and the extra page A, in rows 0
//    and 77; the 72 bank slices are used once each by the nine pages;
//  * packed + rank subsetting: part i of extra line x goes to chip 8 alone
//    at the conventional location of line 8x + i (so extra page A sits in
//    row 0 of every bank, as in the packed-layout figure); CREAM lines use
//    chips 0-7;
//  * parity: parity of a page in bank i lives in chip 8 of bank (i+4) mod 8;
//  * ECC region and the packed layout: all nine chips, no translation;
//  * timing: the command appears exactly one clock after the access.
module tb_cream_bridge;
  import cream_pkg::*;
  logic clk = 0, rst_n = 0;
  layout_e layout;
  line_addr_t boundary;
  logic acc_valid;
  access_t acc;
  logic cmd_valid;
  chip_cmd_t cmd;
  logic [3:0] group;
  int checks = 0;
  int failures = 0;

  cream_bridge dut (.clk, .rst_n, .layout, .boundary, .acc_valid, .acc,
                    .cmd_valid, .cmd, .cmd_group(group));
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam longint G = 1 << 27;

  // send one access; the command must be there one clock later, not before
  task automatic send(input logic we, input acc_kind_e kind, input int part, input longint a);
    @(negedge clk);
    acc_valid = 1; acc.we = we; acc.kind = kind; acc.part = 3'(part); acc.addr = line_addr_t'(a);
    @(posedge clk); #1;
    check(cmd_valid, "command one clock after the access");
    acc_valid = 0;
    @(posedge clk); #1;
    check(!cmd_valid, "single command per access");
  endtask

  // Figure: inter-bank wrap-around, row 0; entry [bank][chip], 8 = page A
  int fig [8][9] = '{
    '{0,0,0,0,0,0,0,0,1},
    '{1,1,1,1,1,1,1,2,2},
    '{2,2,2,2,2,2,3,3,3},
    '{3,3,3,3,3,4,4,4,4},
    '{4,4,4,4,5,5,5,5,5},
    '{5,5,5,6,6,6,6,6,6},
    '{6,6,7,7,7,7,7,7,7},
    '{7,8,8,8,8,8,8,8,8}};

  initial begin
    int used [8][9];
    longint n, x, h;
    int pb;
    acc_valid = 0; acc = '0;
    layout = LAYOUT_INTER_WRAP;
    boundary = line_addr_t'(G);
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- wrap-around, rows 0 and 77
    foreach (used[b, c]) used[b][c] = 0;
    for (int ri = 0; ri < 2; ri++) begin
      int row;
      row = (ri == 0) ? 0 : 77;
      for (int k = 0; k <= 8; k++) begin
        if (k < 8) send(0, ACC_LINE, 0, (longint'(row) << 10) + (k << 7) + 9);
        else       send(0, ACC_LINE, 0, G + (longint'(row) << 7) + 9);
        check(group == 4'(k), "page group");
        for (int c = 0; c < 9; c++) begin
          int bank_exp;
          bank_exp = -1;
          for (int b = 0; b < 8; b++) if (fig[b][c] == k) bank_exp = b;
          if (bank_exp < 0) check(!cmd.cs[c], $sformatf("wrap page %0d chip %0d idle", k, c));
          else begin
            check(cmd.cs[c] && cmd.bank[c] == 3'(bank_exp) && cmd.row[c] == row_t'(row) && cmd.col[c] == 7'd9,
                  $sformatf("wrap page %0d chip %0d in bank %0d", k, c, bank_exp));
            if (ri == 0) used[bank_exp][c]++;
          end
        end
        if (k < 8) check(!cmd.cs[8 - k], "ignored chip is 8 - bank id");
      end
    end
    foreach (used[b, c]) check(used[b][c] == 1, "each of the 72 bank slices used once");

    // ---- ECC region is never translated
    boundary = line_addr_t'(1024 * 10);
    n = 1024 * 10 + 3 * 128 + 44;
    send(1, ACC_LINE, 0, n);
    check(cmd.cs == 9'h1FF && cmd.we, "ECC region: all nine chips");
    for (int c = 0; c < 9; c++)
      check(cmd.bank[c] == 3'((n >> 7) & 7) && cmd.row[c] == row_t'(n >> 10) && cmd.col[c] == 7'(n & 127),
            "ECC region: conventional location");

    // ---- packed (Solution 1): all nine chips at the given line
    layout = LAYOUT_PACKED;
    boundary = line_addr_t'(G);
    n = 123456;
    send(0, ACC_LINE, 0, n);
    check(cmd.cs == 9'h1FF && cmd.bank[8] == 3'((n >> 7) & 7) && cmd.row[8] == row_t'(n >> 10),
          "packed: lockstep access, no translation");

    // ---- packed + rank subsetting (Solution 2)
    layout = LAYOUT_PACKED_RS;
    send(1, ACC_LINE, 0, 5000);
    check(cmd.cs == 9'h0FF, "CREAM line: x64 subset, chips 0-7");
    for (int t = 0; t < 40; t++) begin
      int i;
      x = (t < 8) ? t * 16 : longint'($urandom % (1 << 24));
      i = $urandom % 8;
      send(0, ACC_PART, i, G + x);
      h = 8 * x + i;
      check(cmd.cs == 9'h100, "extra part: x8 subset, chip 8 only");
      check(cmd.bank[8] == 3'((h >> 7) & 7) && cmd.row[8] == row_t'(h >> 10) && cmd.col[8] == 7'(h & 127),
            "extra part at line 8x+i");
      if (t < 8) check(cmd.row[8] == '0 && cmd.bank[8] == 3'(t), "page A spread over row 0 of all banks");
    end

    // ---- parity
    layout = LAYOUT_PARITY;
    boundary = line_addr_t'(1024 * 65);   // R = 65 rows: E = 7, P = 9
    for (int b = 0; b < 8; b++) begin
      n = (longint'(20) << 10) + (b << 7) + 37;          // page in row 20, bank b, line 37
      send(0, ACC_PARITY, 0, n);
      pb = (b + 4) % 8;
      check(cmd.cs == 9'h100 && cmd.bank[8] == 3'(pb), $sformatf("parity of bank %0d in bank %0d", b, pb));
      check(cmd.row[8] == row_t'(20 / 8) && cmd.col[8] == 7'((20 % 8) * 16 + 37 / 8), "parity row/column");
    end
    send(0, ACC_LINE, 0, 777);
    check(cmd.cs == 9'h0FF, "parity CREAM line: chips 0-7");
    // extra page 13 = bank 5, index 1; line 50, part 6
    x = 13 * 128 + 50;
    send(1, ACC_PART, 6, G + x);
    check(cmd.cs == 9'h100 && cmd.bank[8] == 3'd5 && cmd.row[8] == row_t'(9 + 8 + 50 / 16)
          && cmd.col[8] == 7'((50 % 16) * 8 + 6), "parity-layout extra part location");
    send(0, ACC_PARITY, 0, G + x);
    check(cmd.bank[8] == 3'((5 + 4) % 8) && cmd.row[8] == row_t'((65 + 1) / 8)
          && cmd.col[8] == 7'(((65 + 1) % 8) * 16 + 50 / 8), "parity of an extra page");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
