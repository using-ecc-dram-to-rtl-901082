// tb_cream_mc: checks the memory-controller extension on its own. A
// responder in the testbench plays bridge and DIMM: it logs every column
// access, answers each after a few clocks with random read data, and
// captures the write data. For every layout, region and direction the test
// compares the access sequence (write flag, kind, part, address) with the
// sequence the paper prescribes, and checks the data path: assembly of an
// extra line from eight chip-8 words, chip-8 preservation in packed
// read-modify-writes, the eight host-line read-modify-writes of a packed
// extra write, wrap-around lane steering (chip 8-k idle), the parity byte
// and its check, and SECDED round trip with a single-bit correction.
module tb_cream_mc;
  import cream_pkg::*;
  logic clk = 0, rst_n = 0;
  layout_e layout;
  logic cfg_we, cfg_ready;
  line_addr_t cfg_boundary, boundary, capacity;
  logic req_valid, req_ready, req_we;
  line_addr_t req_addr;
  line_t req_wdata, resp_rdata;
  logic resp_valid, resp_err, resp_corrected;
  logic acc_valid;
  access_t acc;
  dimm_data_t dimm_wdata, dimm_rdata;
  logic dimm_done;
  int checks = 0;
  int failures = 0;

  cream_mc dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- responder
  access_t    log_acc [$];
  dimm_data_t log_rd  [$];
  dimm_data_t log_wr  [$];
  logic       force_rd;        // answer with fixed_rd instead of random data
  dimm_data_t fixed_rd;
  initial begin
    dimm_done = 0; dimm_rdata = '0;
    forever begin
      @(posedge clk);
      if (acc_valid && rst_n) begin
        dimm_data_t d;
        log_acc.push_back(acc);
        for (int c = 0; c < CHIPS; c++) d[c] = {$urandom, $urandom};
        if (force_rd) d = fixed_rd;
        repeat (3) @(posedge clk);
        @(negedge clk);
        log_wr.push_back(dimm_wdata);
        log_rd.push_back(d);
        dimm_rdata = d; dimm_done = 1;
        @(negedge clk);
        dimm_done = 0;
      end
    end
  end

  localparam longint G = 1 << 27;

  task automatic request(input logic we, input longint a, input line_t wd);
    log_acc.delete(); log_rd.delete(); log_wr.delete();
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = line_addr_t'(a); req_wdata = wd;
    do @(posedge clk); while (!req_ready);
    @(negedge clk); req_valid = 0;
    while (!resp_valid) @(negedge clk);
  endtask

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  task automatic expect_acc(input int idx, input logic we, input acc_kind_e kind, input int part, input longint a);
    check(idx < log_acc.size(), $sformatf("access %0d issued", idx));
    if (idx < log_acc.size())
      check(log_acc[idx].we == we && log_acc[idx].kind == kind && log_acc[idx].part == 3'(part)
            && log_acc[idx].addr == line_addr_t'(a),
            $sformatf("layout %0d access %0d: we=%0d kind=%0d part=%0d addr=%h (expected %0d %0d %0d %h)",
                      layout, idx, log_acc[idx].we, log_acc[idx].kind, log_acc[idx].part, log_acc[idx].addr,
                      we, kind, part, a));
  endtask

  function automatic logic [7:0] byte_of(line_t l, int b, int c); return l[64*b + 8*c +: 8]; endfunction

  initial begin
    line_t wd, exp;
    logic [7:0] p;
    longint n, x;
    force_rd = 0; fixed_rd = '0;
    req_valid = 0; req_we = 0; req_addr = '0; req_wdata = '0;
    cfg_we = 0; cfg_boundary = '0;
    layout = LAYOUT_PACKED;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_we = 1; cfg_boundary = line_addr_t'(1024 * 100);
    @(negedge clk); cfg_we = 0;
    check(boundary == line_addr_t'(1024 * 100), "boundary register written");

    for (int l = 0; l < 4; l++) begin
      layout = layout_e'(l);
      n = 1024 * 37 + 5 * 128 + 42;      // CREAM line: row 37, bank 5, line 42
      x = 3 * 128 + 77;                  // extra line 77 of extra page 3
      // ---------- CREAM region read
      request(0, n, '0);
      case (layout)
        LAYOUT_PACKED, LAYOUT_PACKED_RS: begin
          check(log_acc.size() == 1, "CREAM read: one access");
          expect_acc(0, 0, ACC_LINE, 0, n);
          for (int b = 0; b < 8; b++) for (int c = 0; c < 8; c++)
            check(byte_of(resp_rdata, b, c) == log_rd[0][c][8*b +: 8], "chips 0-7 lanes");
        end
        LAYOUT_INTER_WRAP: begin
          check(log_acc.size() == 1, "wrap read: one access");
          for (int b = 0; b < 8; b++) for (int c = 0; c < 9; c++)
            if (c != 3) check(byte_of(resp_rdata, b, c < 3 ? c : c - 1) == log_rd[0][c][8*b +: 8],
                              "wrap lanes skip chip 8-k");
        end
        default: begin
          check(log_acc.size() == 2, "parity read: two accesses");
          expect_acc(0, 0, ACC_LINE, 0, n);
          expect_acc(1, 0, ACC_PARITY, 0, n);
          exp = '0;
          for (int b = 0; b < 8; b++) for (int c = 0; c < 8; c++) exp[64*b + 8*c +: 8] = log_rd[0][c][8*b +: 8];
          for (int b = 0; b < 8; b++) p[b] = 1'($countones(exp[64*b +: 64]) % 2);
          check(resp_rdata == exp && resp_err == (log_rd[1][8][8*(42 % 8) +: 8] != p), "parity check of a read");
        end
      endcase
      // ---------- CREAM region write
      wd = rnd_line();
      request(1, n, wd);
      case (layout)
        LAYOUT_PACKED: begin
          check(log_acc.size() == 2, "packed write: read-modify-write");
          expect_acc(0, 0, ACC_LINE, 0, n);
          expect_acc(1, 1, ACC_LINE, 0, n);
          check(log_wr[1][8] == log_rd[0][8], "chip-8 word preserved");
          for (int b = 0; b < 8; b++) for (int c = 0; c < 8; c++)
            check(log_wr[1][c][8*b +: 8] == byte_of(wd, b, c), "write lanes");
        end
        LAYOUT_PACKED_RS, LAYOUT_INTER_WRAP: begin
          check(log_acc.size() == 1, "write: one access");
          expect_acc(0, 1, ACC_LINE, 0, n);
          if (layout == LAYOUT_INTER_WRAP)
            for (int b = 0; b < 8; b++) for (int c = 0; c < 9; c++)
              if (c != 3) check(log_wr[0][c][8*b +: 8] == byte_of(wd, b, c < 3 ? c : c - 1), "wrap write lanes");
        end
        default: begin
          check(log_acc.size() == 3, "parity write: data + parity read-modify-write");
          expect_acc(0, 1, ACC_LINE, 0, n);
          expect_acc(1, 0, ACC_PARITY, 0, n);
          expect_acc(2, 1, ACC_PARITY, 0, n);
          for (int b = 0; b < 8; b++) p[b] = 1'($countones(wd[64*b +: 64]) % 2);
          for (int b = 0; b < 8; b++)
            check(log_wr[2][8][8*b +: 8] == ((b == 42 % 8) ? p : log_rd[1][8][8*b +: 8]),
                  "parity byte replaced, others kept");
        end
      endcase
      // ---------- extra region read
      request(0, G + x, '0);
      case (layout)
        LAYOUT_PACKED, LAYOUT_PACKED_RS: begin
          check(log_acc.size() == 8, "extra read: eight accesses");
          for (int i = 0; i < 8; i++) begin
            if (layout == LAYOUT_PACKED) expect_acc(i, 0, ACC_LINE, 0, 8 * x + i);   // ACC = (REQ-8GB)<<3 + i
            else expect_acc(i, 0, ACC_PART, i, G + x);
            check(resp_rdata[64*i +: 64] == log_rd[i][8], "part i from chip 8");
          end
        end
        LAYOUT_INTER_WRAP: begin
          check(log_acc.size() == 1, "wrap extra read: one access");
          for (int b = 0; b < 8; b++) for (int c = 1; c < 9; c++)
            check(byte_of(resp_rdata, b, c - 1) == log_rd[0][c][8*b +: 8], "extra page on chips 1-8");
        end
        default: begin
          check(log_acc.size() == 9, "parity extra read: nine accesses");
          for (int i = 0; i < 8; i++) expect_acc(i, 0, ACC_PART, i, G + x);
          expect_acc(8, 0, ACC_PARITY, 0, G + x);
          for (int i = 0; i < 8; i++) exp[64*i +: 64] = log_rd[i][8];
          for (int b = 0; b < 8; b++) p[b] = 1'($countones(exp[64*b +: 64]) % 2);
          check(resp_rdata == exp && resp_err == (log_rd[8][8][8*(77 % 8) +: 8] != p), "extra line parity check");
        end
      endcase
      // ---------- extra region write
      wd = rnd_line();
      request(1, G + x, wd);
      case (layout)
        LAYOUT_PACKED: begin
          check(log_acc.size() == 16, "packed extra write: 8 read-modify-writes");
          for (int i = 0; i < 8; i++) begin
            expect_acc(2 * i, 0, ACC_LINE, 0, 8 * x + i);
            expect_acc(2 * i + 1, 1, ACC_LINE, 0, 8 * x + i);
            check(log_wr[2*i+1][8] == wd[64*i +: 64], "chip 8 gets part i");
            for (int c = 0; c < 8; c++) check(log_wr[2*i+1][c] == log_rd[2*i][c], "host line kept");
          end
        end
        LAYOUT_PACKED_RS: begin
          check(log_acc.size() == 8, "RS extra write: eight accesses");
          for (int i = 0; i < 8; i++) begin
            expect_acc(i, 1, ACC_PART, i, G + x);
            check(log_wr[i][8] == wd[64*i +: 64], "RS chip 8 gets part i");
          end
        end
        LAYOUT_INTER_WRAP: begin
          check(log_acc.size() == 1, "wrap extra write: one access");
          check(log_wr[0][0] == '0, "wrap extra page leaves chip 0 idle");
          for (int b = 0; b < 8; b++) for (int c = 1; c < 9; c++)
            check(log_wr[0][c][8*b +: 8] == byte_of(wd, b, c - 1), "wrap extra write lanes");
        end
        default: begin
          check(log_acc.size() == 10, "parity extra write: ten accesses");
          for (int i = 0; i < 8; i++) expect_acc(i, 1, ACC_PART, i, G + x);
          expect_acc(8, 0, ACC_PARITY, 0, G + x);
          expect_acc(9, 1, ACC_PARITY, 0, G + x);
          for (int b = 0; b < 8; b++) p[b] = 1'($countones(wd[64*b +: 64]) % 2);
          check(log_wr[9][8][8*(77 % 8) +: 8] == p, "extra line parity written");
        end
      endcase
      // ---------- ECC region: write, read back through SECDED, one flip corrected
      n = 1024 * 500 + 7;
      wd = rnd_line();
      request(1, n, wd);
      check(log_acc.size() == 1, "ECC write: one access");
      expect_acc(0, 1, ACC_LINE, 0, n);
      fixed_rd = log_wr[0];
      force_rd = 1;
      request(0, n, '0);
      check(resp_rdata == wd && !resp_err && !resp_corrected, "ECC clean read");
      fixed_rd[4][13] = ~fixed_rd[4][13];
      request(0, n, '0);
      check(resp_rdata == wd && !resp_err && resp_corrected, "ECC single error corrected");
      force_rd = 0;
      // ---------- beyond capacity
      request(0, G + (1024 * 100 / 8) * 4, '0);
      check(resp_err && log_acc.size() == 0, "out of range: error, no access");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
