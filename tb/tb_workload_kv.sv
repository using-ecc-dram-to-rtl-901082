// tb_workload_kv: a key-value-store workload (in the style of memcached)
// run on the full-size CREAM memory system, in every layout, with the whole
// module given over to the CREAM layout (boundary = 8GB).
//
// How it works: each key owns one 256-byte item (four consecutive cache
// lines) at a slot address spread by a multiplicative hash over a chosen
// footprint. A skewed key choice (half of the requests go to a hot 1/16 of
// the keys) drives a 90% GET / 10% SET mix; a SET writes all four lines of
// the item, a GET reads them and compares them with a reference copy. Two
// footprints are run, with the same code:
//   * "fits": slots spread over the whole capacity the layout offers
//     (8GB + 1GB, or 8GB + 10.7% with parity): every request must succeed,
//     and items above 8GB exercise the extra pages;
//   * "10GB": slots spread over 10GB of lines: items beyond the capacity
//     must be refused (resp_err, no DRAM access) and the rest must succeed,
//     which shows that a 10GB working set does not fit.
// Per layout it prints the column accesses per request, the DRAM-model row
// hit rate and the clocks per request, and checks the access counts against
// the per-layout rule (1 per line everywhere in the wrap-around layout,
// more for extra lines in the packed and parity layouts). The item size,
// operation mix and key skew are this testbench's choices.
//
// Interface: none (top-level testbench). Timing: the DRAM model answers
// each column access after 4 clocks; a watchdog ends the run.
module tb_workload_kv;
  import cream_pkg::*;

  localparam int unsigned LAT        = 4;
  localparam int unsigned KEYS       = 4096;
  localparam int unsigned OPS        = 600;   // requests per layout and footprint
  localparam int unsigned ITEM_LINES = 4;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  layout_e    layout = LAYOUT_PACKED;
  logic       cfg_we = 1'b0;
  line_addr_t cfg_boundary = '0;
  logic       cfg_ready;
  line_addr_t capacity;
  logic       req_valid = 1'b0, req_ready, req_we = 1'b0;
  line_addr_t req_addr = '0;
  line_t      req_wdata = '0;
  logic       resp_valid, resp_err, resp_corrected;
  line_t      resp_rdata;
  logic       dimm_cmd_valid;
  chip_cmd_t  dimm_cmd;
  logic [3:0] dimm_cmd_group;
  dimm_data_t dimm_wdata, dimm_rdata;
  logic       dimm_done;

  always #5 clk = ~clk;

  cream_top dut (.*);

  ecc_dimm_model #(.LAT(LAT)) u_dimm (
    .clk, .rst_n, .cmd_valid(dimm_cmd_valid), .cmd(dimm_cmd),
    .wdata(dimm_wdata), .done(dimm_done), .rdata(dimm_rdata)
  );

  int checks = 0;
  int failures = 0;
  int unsigned n_acc = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) begin
    cycle++;
    if (dimm_cmd_valid) n_acc++;
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic do_req(input logic we, input line_addr_t a, input line_t wd,
                        output line_t rd, output logic err, output int unsigned nacc);
    int unsigned start;
    @(negedge clk);
    req_valid = 1'b1; req_we = we; req_addr = a; req_wdata = wd;
    start = n_acc;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 1'b0;
    while (!resp_valid) @(negedge clk);
    rd = resp_rdata; err = resp_err;
    nacc = n_acc - start;
  endtask

  // item slot of a key: a multiplicative hash spread over 'span' items
  function automatic line_addr_t item_addr(int unsigned key, longint unsigned span);
    longint unsigned h;
    h = (longint'(key) * 64'd2654435761) % span;
    return line_addr_t'(h * ITEM_LINES);
  endfunction

  function automatic line_t item_data(int unsigned key, int unsigned ver, int unsigned l);
    line_t d;
    for (int i = 0; i < LINE_BITS / 32; i++) d[32*i +: 32] = (key * 32'h9E3779B9) ^ (ver << 8) ^ (l << 4) ^ i;
    return d;
  endfunction

  int unsigned version [KEYS];

  initial begin
    static string lname[4] = '{"packed", "packed_rs", "inter_wrap", "parity"};
    line_t rd;
    logic err;
    int unsigned nacc;
    line_addr_t xlines, a;
    longint unsigned span, fit_items;
    int unsigned key, reqs, accs, extra_reqs, rejected, served, out_lines;
    longint unsigned c0;
    int unsigned h0, m0;
    logic all_fit;

    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int lay = 0; lay < 4; lay++) begin
      layout = layout_e'(lay);
      @(negedge clk);
      while (!cfg_ready) @(negedge clk);
      cfg_we = 1'b1; cfg_boundary = line_addr_t'(1 << NLINE_W);
      @(negedge clk);
      cfg_we = 1'b0;
      @(negedge clk);
      xlines = (layout == LAYOUT_PARITY)
             ? line_addr_t'(((1 << (NLINE_W - GROUP_SHIFT)) * 7 / 65) << GROUP_SHIFT)
             : line_addr_t'(1 << (NLINE_W - 3));
      check(capacity == line_addr_t'(1 << NLINE_W) + xlines, "capacity at the full boundary");
      fit_items = (longint'(1 << NLINE_W) + xlines) / ITEM_LINES;

      for (int fp = 0; fp < 2; fp++) begin
        // fp 0: spread over the capacity; fp 1: spread over 10GB
        span = (fp == 0) ? fit_items : (longint'(10) << (NLINE_W - 3)) / ITEM_LINES;
        u_dimm.clear();
        for (int k = 0; k < KEYS; k++) version[k] = 0;
        reqs = 0; accs = 0; extra_reqs = 0; rejected = 0; served = 0; out_lines = 0;
        c0 = cycle; h0 = u_dimm.row_hits; m0 = u_dimm.row_misses;
        for (int op = 0; op < OPS; op++) begin
          key = ($urandom % 2) ? $urandom % (KEYS / 16) : $urandom % KEYS;
          a   = item_addr(key, span);
          all_fit = (longint'(a) + ITEM_LINES <= longint'(1 << NLINE_W) + xlines);
          if ($urandom % 10 == 0 || version[key] == 0) begin
            version[key]++;
            for (int l = 0; l < ITEM_LINES; l++) begin
              do_req(1'b1, a + line_addr_t'(l), item_data(key, version[key], l), rd, err, nacc);
              reqs++; accs += nacc;
              if (a[PA_W-1]) extra_reqs++;
              if (longint'(a) + l >= longint'(1 << NLINE_W) + xlines) out_lines++;
            end
          end else begin
            for (int l = 0; l < ITEM_LINES; l++) begin
              do_req(1'b0, a + line_addr_t'(l), '0, rd, err, nacc);
              reqs++; accs += nacc;
              if (a[PA_W-1]) extra_reqs++;
              if (longint'(a) + l >= longint'(1 << NLINE_W) + xlines) out_lines++;
              if (all_fit)
                check(!err && rd == item_data(key, version[key], l),
                      $sformatf("%s GET key %0d line %0d", lname[lay], key, l));
            end
          end
          if (all_fit) served++;
          else begin
            rejected++;
            check(err && nacc == 0, "item beyond the capacity is refused without access");
          end
        end
        $display("%-10s footprint %-4s: %0d requests, %0d extra-page, %0d items refused, %0.2f accesses/request, row hits %0d%%, %0d clocks/request",
                 lname[lay], fp == 0 ? "fits" : "10GB", reqs, extra_reqs, rejected,
                 real'(accs) / real'(reqs),
                 (u_dimm.row_hits - h0) * 100 / ((u_dimm.row_hits - h0) + (u_dimm.row_misses - m0) + 1),
                 int'((cycle - c0) / reqs));
        check(extra_reqs > 0, "workload reached the extra pages");
        check(served > 0, "workload served requests");
        if (fp == 0) check(rejected == 0, "footprint within capacity is fully served");
        else         check(rejected > 0, "10GB footprint does not fit");
        if (layout == LAYOUT_INTER_WRAP) check(accs == reqs - out_lines, "wrap-around: one access per served request");
        else                             check(accs > reqs, "extra lines cost extra accesses");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
