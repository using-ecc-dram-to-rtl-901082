// tb_cream_top: end-to-end test of the CREAM memory system at full size
// (8GB module, default geometry), driving cache-line reads and writes and
// checking every read against a reference memory kept by the testbench.
//
// For each of the four layouts it programs a boundary, fills an address
// pool that mixes lines of the ECC region, the CREAM region (including the
// eight host lines of an extra line, and lines sharing a parity word) and
// the extra region, and runs random reads and writes. It checks the number
// of column accesses of every request against the paper's per-layout
// counts, the capacity register, single-bit correction and double-bit
// detection in the ECC region, parity detection in the parity region,
// rejection of addresses beyond the capacity, a change of the boundary, and
// that the wrap-around layout uses all nine page groups. Every mechanism is
// counted and one that never happened counts as a failure.
module tb_cream_top;
  import cream_pkg::*;

  localparam int unsigned LAT = 4;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  layout_e    layout;
  logic       cfg_we;
  line_addr_t cfg_boundary;
  logic       cfg_ready;
  line_addr_t capacity;
  logic       req_valid, req_ready, req_we;
  line_addr_t req_addr;
  line_t      req_wdata;
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
  always @(posedge clk) if (dimm_cmd_valid) n_acc++;

  // mechanism counters
  int m_layout[4];
  int m_ecc_rd = 0, m_ecc_wr = 0, m_cream_rd = 0, m_cream_wr = 0, m_extra_rd = 0, m_extra_wr = 0;
  int m_rmw = 0, m_assemble8 = 0, m_wrap_extra = 0, m_parity_detect = 0, m_parity_rmw = 0;
  int m_secded_fix = 0, m_secded_due = 0, m_range_err = 0, m_boundary_change = 0;
  logic [8:0] wrap_groups;
  always @(posedge clk) if (dimm_cmd_valid && layout == LAYOUT_INTER_WRAP) wrap_groups[dimm_cmd_group] <= 1'b1;

  line_t golden [line_addr_t];

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Paper's access counts per request (see the table in cream_mc).
  function automatic int expected_accesses(layout_e lay, region_e rg, logic we);
    if (rg == REGION_ECC) return 1;
    case (lay)
      LAYOUT_PACKED:     return rg == REGION_EXTRA ? (we ? 16 : 8) : (we ? 2 : 1);
      LAYOUT_PACKED_RS:  return rg == REGION_EXTRA ? 8 : 1;
      LAYOUT_INTER_WRAP: return 1;
      default:           return rg == REGION_EXTRA ? (we ? 10 : 9) : (we ? 3 : 2);
    endcase
  endfunction

  line_addr_t bnd;          // current boundary
  line_addr_t xlines;       // current extra lines

  function automatic region_e region_of(line_addr_t a);
    if (!a[PA_W-1]) return (a < bnd) ? REGION_CREAM : REGION_ECC;
    return ({1'b0, a[NLINE_W-1:0]} < xlines) ? REGION_EXTRA : REGION_NONE;
  endfunction

  task automatic do_req(input logic we, input line_addr_t a, input line_t wd,
                        output line_t rd, output logic err, output logic corr,
                        output int unsigned nacc);
    int unsigned start;
    @(negedge clk);
    req_valid = 1'b1; req_we = we; req_addr = a; req_wdata = wd;
    start = n_acc;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 1'b0;
    while (!resp_valid) @(negedge clk);
    rd = resp_rdata; err = resp_err; corr = resp_corrected;
    nacc = n_acc - start;
  endtask

  task automatic set_boundary(input line_addr_t b);
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);
    cfg_we = 1'b1; cfg_boundary = b;
    @(negedge clk);
    cfg_we = 1'b0;
    bnd = b;
    xlines = (layout == LAYOUT_PARITY)
           ? line_addr_t'(((b >> GROUP_SHIFT) * 7 / 65) << GROUP_SHIFT)
           : (b >> 3);
    @(negedge clk);
    check(capacity == line_addr_t'(1 << NLINE_W) + xlines, "capacity = 8GB + extra");
    golden.delete();
    u_dimm.clear();
  endtask

  // one checked request against the reference memory
  task automatic op(input logic we, input line_addr_t a);
    line_t wd, rd, exp;
    logic err, corr;
    int unsigned nacc;
    region_e rg;
    rg = region_of(a);
    for (int i = 0; i < LINE_BITS / 32; i++) wd[32*i +: 32] = $urandom;
    do_req(we, a, wd, rd, err, corr, nacc);
    if (rg == REGION_NONE) begin
      check(err && nacc == 0, "out-of-range request rejected without access");
      m_range_err++;
      return;
    end
    check(nacc == expected_accesses(layout, rg, we),
          $sformatf("accesses layout=%0d region=%0d we=%0d got %0d", layout, rg, we, nacc));
    if (we) golden[a] = wd;
    else begin
      exp = golden.exists(a) ? golden[a] : '0;
      check(rd == exp && !err && !corr, $sformatf("read data layout=%0d addr=%h region=%0d", layout, a, rg));
    end
    case (rg)
      REGION_ECC:   if (we) m_ecc_wr++;   else m_ecc_rd++;
      REGION_CREAM: if (we) m_cream_wr++; else m_cream_rd++;
      default:      if (we) m_extra_wr++; else m_extra_rd++;
    endcase
    if (layout == LAYOUT_PACKED && we && rg != REGION_ECC) m_rmw++;
    if (layout == LAYOUT_PARITY && we && rg != REGION_ECC) m_parity_rmw++;
    if ((layout == LAYOUT_PACKED || layout == LAYOUT_PACKED_RS) && !we && rg == REGION_EXTRA) m_assemble8++;
    if (layout == LAYOUT_INTER_WRAP && rg == REGION_EXTRA) m_wrap_extra++;
  endtask

  line_addr_t pool[$];

  task automatic build_pool();
    line_addr_t x0, n1;
    pool.delete();
    x0 = line_addr_t'($urandom % (xlines - 2));
    pool.push_back(line_addr_t'(1 << NLINE_W) + x0);
    pool.push_back(line_addr_t'(1 << NLINE_W) + x0 + 1);
    pool.push_back(line_addr_t'(1 << NLINE_W) + xlines - 1);        // last extra line
    pool.push_back(line_addr_t'(1 << NLINE_W) + xlines);            // beyond capacity
    for (int i = 0; i < 8; i += 3) pool.push_back((x0 << 3) + line_addr_t'(i)); // host lines
    n1 = line_addr_t'($urandom % (bnd - 8)) & ~line_addr_t'(7);
    for (int i = 0; i < 3; i++) pool.push_back(n1 + line_addr_t'(i));
    pool.push_back(bnd - 1);
    pool.push_back(bnd);
    for (int i = 0; i < 3; i++)
      pool.push_back(bnd + line_addr_t'($urandom % ((1 << NLINE_W) - bnd)));
    pool.push_back(line_addr_t'(1 << NLINE_W) - 1);
    // all nine page groups of one row for the wrap-around layout
    for (int k = 0; k < 8; k++) pool.push_back(line_addr_t'((3 << GROUP_SHIFT) + (k << COL_W) + 5));
    pool.push_back(line_addr_t'(1 << NLINE_W) + line_addr_t'((3 << COL_W) + 5));
  endtask

  task automatic error_injection();
    line_t wd, rd;
    logic err, corr;
    int unsigned nacc;
    line_addr_t a;
    nline_t n;
    for (int i = 0; i < LINE_BITS / 32; i++) wd[32*i +: 32] = $urandom;
    // ECC region: one flipped bit is corrected, two in a burst are detected
    a = bnd + 17;
    n = a[NLINE_W-1:0];
    do_req(1'b1, a, wd, rd, err, corr, nacc);
    u_dimm.flip_bit(2, line_bank(n), line_row(n), line_col(n), 8*3 + 5);
    do_req(1'b0, a, '0, rd, err, corr, nacc);
    check(rd == wd && corr && !err, "SECDED corrects a single-bit error");
    if (rd == wd && corr) m_secded_fix++;
    u_dimm.flip_bit(8, line_bank(n), line_row(n), line_col(n), 8*3 + 1);
    do_req(1'b0, a, '0, rd, err, corr, nacc);
    check(err, "SECDED detects a double-bit error");
    if (err) m_secded_due++;
    // parity region: a flipped data bit is detected
    if (layout == LAYOUT_PARITY) begin
      a = 40;
      n = a[NLINE_W-1:0];
      do_req(1'b1, a, wd, rd, err, corr, nacc);
      do_req(1'b0, a, '0, rd, err, corr, nacc);
      check(!err && rd == wd, "parity clean read");
      u_dimm.flip_bit(6, line_bank(n), line_row(n), line_col(n), 8*7 + 0);
      do_req(1'b0, a, '0, rd, err, corr, nacc);
      check(err, "parity detects a flipped bit");
      if (err) m_parity_detect++;
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t rd; logic err, corr; int unsigned nacc;
    req_valid = 0; req_we = 0; req_addr = '0; req_wdata = '0;
    cfg_we = 0; cfg_boundary = '0;
    wrap_groups = '0;
    layout = LAYOUT_PACKED;
    bnd = '0; xlines = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // after reset everything is SECDED: extra region is empty
    do_req(1'b0, line_addr_t'(1 << NLINE_W), '0, rd, err, corr, nacc);
    check(err && nacc == 0, "no extra capacity before the boundary is set");
    check(capacity == line_addr_t'(1 << NLINE_W), "capacity 8GB after reset");

    for (int l = 0; l < 4; l++) begin
      layout = layout_e'(l);
      m_layout[l] = 0;
      // a partial CREAM region, then the whole module
      for (int pass = 0; pass < 2; pass++) begin
        set_boundary(pass == 0 ? line_addr_t'(1300 << GROUP_SHIFT) : line_addr_t'(1 << NLINE_W));
        m_boundary_change++;
        build_pool();
        for (int i = 0; i < pool.size(); i++) op(1'b0, pool[i]);     // unwritten reads
        for (int i = 0; i < 90; i++) op(1'($urandom % 2), pool[$urandom % pool.size()]);
        for (int i = 0; i < pool.size(); i++) op(1'b0, pool[i]);     // final read-back
        m_layout[l]++;
        if (pass == 0) error_injection();
      end
    end

    begin : mechanisms
      string names[$];
      int    counts[$];
      names = '{"packed", "packed_rs", "inter_wrap", "parity", "ecc_read", "ecc_write",
                "cream_read", "cream_write", "extra_read", "extra_write",
                "packed_rmw", "assemble_8_parts", "wrap_extra_page", "parity_rmw",
                "parity_detect", "secded_correct", "secded_detect", "range_reject",
                "boundary_change", "wrap_nine_groups"};
      counts = '{m_layout[0], m_layout[1], m_layout[2], m_layout[3], m_ecc_rd, m_ecc_wr,
                 m_cream_rd, m_cream_wr, m_extra_rd, m_extra_wr, m_rmw, m_assemble8,
                 m_wrap_extra, m_parity_rmw, m_parity_detect, m_secded_fix, m_secded_due,
                 m_range_err, m_boundary_change, (wrap_groups == 9'h1FF) ? 1 : 0};
      for (int i = 0; i < names.size(); i++) begin
        $display("mechanism %-18s %0d", names[i], counts[i]);
        check(counts[i] > 0, {"mechanism never happened: ", names[i]});
      end
      $display("row buffer hits %0d misses %0d", u_dimm.row_hits, u_dimm.row_misses);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
