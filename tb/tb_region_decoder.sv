// tb_region_decoder: for boundaries of 0, a few whole rows, an unaligned
// value and all of 8GB, checks the region of addresses on both sides of
// every edge, the capacity 8GB + (boundary >> 3) of the correction-free
// layouts, and for the parity layout E = floor(7R/65) extra pages per bank,
// the first extra row P = ceil((R+E)/8), and P + 8E <= R.
module tb_region_decoder;
  import cream_pkg::*;
  layout_e    layout;
  line_addr_t boundary, addr, capacity;
  region_e    region;
  logic [ROW_W:0] rows, epages, prow;
  int checks = 0;
  int failures = 0;

  region_decoder dut (.layout, .boundary, .addr, .region, .capacity,
                      .cream_rows(rows), .par_extra_pages(epages), .par_first_row(prow));

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

  localparam longint G = 1 << 27;   // 8GB in lines

  task automatic probe(input longint a, input region_e exp, input string what);
    addr = line_addr_t'(a); #1;
    check(region == exp, $sformatf("%s: addr %0d region %0d expected %0d", what, a, region, exp));
  endtask

  initial begin
    longint bl [5] = '{0, 1024, 65 * 1024, 1300 * 1024 + 77, G};
    longint b, r, e, x;
    for (int l = 0; l < 4; l++) begin
      layout = layout_e'(l);
      for (int i = 0; i < 5; i++) begin
        boundary = line_addr_t'(bl[i]);
        b = (bl[i] / 1024) * 1024;
        r = b / 1024;
        e = (7 * r) / 65;
        x = (layout == LAYOUT_PARITY) ? e * 1024 : b / 8;
        addr = '0; #1;
        check(capacity == line_addr_t'(G + x), $sformatf("capacity layout %0d boundary %0d", l, bl[i]));
        check(rows == (ROW_W+1)'(r), "rows per bank");
        if (layout == LAYOUT_PARITY) begin
          check(epages == (ROW_W+1)'(e), "parity extra pages");
          check(prow == (ROW_W+1)'((r + e + 7) / 8), "first extra row");
          check(longint'(prow) + 8 * e <= r || r == 0, "parity and extra pages fit in R rows");
        end
        if (b > 0) begin
          probe(0, REGION_CREAM, "first line");
          probe(b - 1, REGION_CREAM, "below boundary");
        end
        if (b < G) begin
          probe(b, REGION_ECC, "at boundary");
          probe(G - 1, REGION_ECC, "last line below 8GB");
        end
        if (x > 0) begin
          probe(G, REGION_EXTRA, "first extra line");
          probe(G + x - 1, REGION_EXTRA, "last extra line");
        end
        probe(G + x, REGION_NONE, "beyond capacity");
      end
    end
    // the paper's ratio: 7/65 = 10.7% extra for parity, 12.5% otherwise
    layout = LAYOUT_PARITY; boundary = line_addr_t'(G); addr = '0; #1;
    check((real'(capacity) - real'(G)) / real'(G) > 0.107 && (real'(capacity) - real'(G)) / real'(G) < 0.108,
          "parity layout gains 10.7% over a whole module");
    layout = LAYOUT_INTER_WRAP; #1;
    check(capacity == line_addr_t'(G + G / 8), "correction-free layouts gain 12.5%");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
