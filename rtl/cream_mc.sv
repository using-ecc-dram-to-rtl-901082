// cream_mc: the CREAM extension of the memory controller.
//
// It holds the boundary register and turns each 64-byte cache-line request
// into the sequence of DRAM column accesses the selected layout needs,
// steers the data lanes, assembles and checks the returned data, and
// answers the request. The number of accesses per request is the paper's:
//
//   region / layout          read                write
//   ECC region (all)         1                   1  (SECDED per burst)
//   Packed, CREAM line       1                   2  (read-modify-write)
//   Packed, extra line       8 (chip 8 of lines  16 (8 x read-modify-write
//                            ACC=(REQ-8GB)<<3+i)     of those lines)
//   Packed+RS, CREAM line    1 (x64 subset)      1
//   Packed+RS, extra line    8 (x8 subset)       8
//   Inter-wrap, any          1                   1
//   Parity, CREAM line       2 (data + parity)   3 (data, parity RMW)
//   Parity, extra line       9                   10
//
// Only the packed layout without rank subsetting translates addresses here
// (the paper's Solution 1); for the others the request address and the part
// number go to the bridge chip, which translates them. Reads of an extra
// line shift the chip-8 word of each access into the 64-byte shift
// register; the same register stages the words kept across a
// read-modify-write. Inter-wrap data arrive on eight of the nine chips; the
// lane map (cream_pkg::wrap_lane) keeps each byte's lane order, which is
// this design's reading of the paper's wrap-around figure. A write of an
// extra line in the packed layout is done as a read-modify-write of each of
// its eight host lines, as the paper says every packed write must be.
//
// Design choices where the paper is silent: one request and one column
// access in flight at a time (scheduling is left to the host controller);
// the boundary register resets to 0 (everything SECDED) and can be written
// only while idle; requests beyond the capacity answer at once with
// resp_err and no access; in the correction-free layouts a read returns
// resp_err=0 and resp_corrected=0 since nothing is checked.
//
// Interface: req_valid/req_ready handshake with req_we, req_addr (physical
// line address), req_wdata; one resp_valid pulse per request with
// resp_rdata, resp_err (uncorrectable SECDED error, parity mismatch or bad
// address) and resp_corrected. To the bridge: acc_valid pulse with acc.
// From the DIMM: dimm_done pulses when the access has finished, with
// dimm_rdata for reads; dimm_wdata is held stable for the whole access.
module cream_mc
  import cream_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  layout_e    layout,
  // boundary register
  input  logic       cfg_we,
  input  line_addr_t cfg_boundary,
  output logic       cfg_ready,
  output line_addr_t boundary,
  output line_addr_t capacity,
  // cache-line requests
  input  logic       req_valid,
  output logic       req_ready,
  input  logic       req_we,
  input  line_addr_t req_addr,
  input  line_t      req_wdata,
  output logic       resp_valid,
  output line_t      resp_rdata,
  output logic       resp_err,
  output logic       resp_corrected,
  // column accesses to the bridge chip and data from/to the DIMM
  output logic       acc_valid,
  output access_t    acc,
  output dimm_data_t dimm_wdata,
  input  logic       dimm_done,
  input  dimm_data_t dimm_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_PLAN, S_ISSUE, S_WAIT, S_RESP} state_e;
  state_e state;

  logic       r_we;
  line_addr_t r_addr;
  line_t      r_wdata;
  logic [4:0] step;
  logic [4:0] nsteps;
  logic       r_err;
  logic       r_corr;
  line_t      r_rdata;

  region_e        region;
  logic [ROW_W:0] cream_rows, par_extra_pages, par_first_row;

  region_decoder u_region (
    .layout          (layout),
    .boundary        (boundary),
    .addr            (r_addr),
    .region          (region),
    .capacity        (capacity),
    .cream_rows      (cream_rows),
    .par_extra_pages (par_extra_pages),
    .par_first_row   (par_first_row)
  );

  // ---------------- shift register ----------------
  logic       sr_load, sr_shift;
  line_t      sr_load_data, sr_q;
  line_shift_reg u_sr (
    .clk(clk), .rst_n(rst_n),
    .load(sr_load), .load_data(sr_load_data),
    .shift(sr_shift), .shift_in(dimm_rdata[8]),
    .q(sr_q)
  );

  // ---------------- SECDED, one codec per burst ----------------
  line_t      dec_line;
  logic [7:0] dec_corr, dec_unc;
  logic [7:0][7:0] enc_check;
  for (genvar b = 0; b < BURSTS; b++) begin : g_ecc
    logic [63:0] burst_rd;
    logic [7:0]  check_rd;
    always_comb begin
      for (int c = 0; c < DATA_CHIPS; c++) burst_rd[8*c +: 8] = dimm_rdata[c][8*b +: 8];
      check_rd = dimm_rdata[8][8*b +: 8];
    end
    secded_decoder u_dec (
      .data(burst_rd), .check(check_rd),
      .data_out(dec_line[64*b +: 64]),
      .corrected(dec_corr[b]), .uncorrectable(dec_unc[b])
    );
    secded_encoder u_enc (.data(r_wdata[64*b +: 64]), .check(enc_check[b]));
  end

  // ---------------- parity ----------------
  logic [7:0] par_of_sr, par_of_wdata;
  line_parity_gen u_par_rd (.line(sr_q),    .parity(par_of_sr));
  line_parity_gen u_par_wr (.line(r_wdata), .parity(par_of_wdata));
  logic [2:0] par_burst;
  assign par_burst = r_addr[2:0];   // the line's byte within its parity word

  // ---------------- access plan ----------------
  logic    extra;
  logic    last_step;
  access_t cur;
  logic [2:0] cur_i;
  logic [3:0] wrap_k;

  assign extra  = (region == REGION_EXTRA);
  assign wrap_k = extra ? 4'd8 : {1'b0, r_addr[COL_W +: BANK_W]};

  always_comb begin
    nsteps = 5'd1;
    if (region == REGION_CREAM || region == REGION_EXTRA) begin
      unique case (layout)
        LAYOUT_PACKED:     nsteps = extra ? (r_we ? 5'd16 : 5'd8) : (r_we ? 5'd2 : 5'd1);
        LAYOUT_PACKED_RS:  nsteps = extra ? 5'd8 : 5'd1;
        LAYOUT_INTER_WRAP: nsteps = 5'd1;
        LAYOUT_PARITY:     nsteps = extra ? (r_we ? 5'd10 : 5'd9) : (r_we ? 5'd3 : 5'd2);
        default:           nsteps = 5'd1;
      endcase
    end
    last_step = (step == nsteps - 5'd1);
  end

  always_comb begin
    cur.we   = r_we;
    cur.kind = ACC_LINE;
    cur.part = '0;
    cur.addr = r_addr;
    cur_i    = step[2:0];
    if (region == REGION_CREAM || region == REGION_EXTRA) begin
      unique case (layout)
        LAYOUT_PACKED: begin
          if (extra) begin
            // Solution 1: ACC = (REQ - 8GB) << 3 + i
            cur_i    = r_we ? step[3:1] : step[2:0];
            cur.we   = r_we & step[0];
            cur.addr = {1'b0, r_addr[NLINE_W-4:0], cur_i};
          end else begin
            cur.we   = r_we & (step == 5'd1);
          end
        end
        LAYOUT_PACKED_RS: begin
          if (extra) begin
            cur.kind = ACC_PART;
            cur.part = step[2:0];
          end
        end
        LAYOUT_PARITY: begin
          if (extra && step < 5'd8) begin
            cur.kind = ACC_PART;
            cur.part = step[2:0];
          end else if (!extra && step == 5'd0) begin
            cur.kind = ACC_LINE;
          end else begin
            cur.kind = ACC_PARITY;
            // write plan ends with parity read then parity write
            cur.we   = r_we & last_step;
          end
        end
        default: ;
      endcase
    end
  end

  assign acc       = cur;
  assign acc_valid = (state == S_ISSUE);

  // ---------------- write data steering ----------------
  always_comb begin
    dimm_wdata = '0;
    // conventional lane placement of the request data, chips 0-7
    for (int b = 0; b < BURSTS; b++)
      for (int c = 0; c < DATA_CHIPS; c++)
        dimm_wdata[c][8*b +: 8] = r_wdata[64*b + 8*c +: 8];
    if (region == REGION_ECC) begin
      for (int b = 0; b < BURSTS; b++) dimm_wdata[8][8*b +: 8] = enc_check[b];
    end else begin
      unique case (layout)
        LAYOUT_PACKED: begin
          if (extra) begin
            // write back the host line read just before, chip 8 = part i
            for (int b = 0; b < BURSTS; b++)
              for (int c = 0; c < DATA_CHIPS; c++)
                dimm_wdata[c][8*b +: 8] = sr_q[64*b + 8*c +: 8];
            dimm_wdata[8] = r_wdata[64*cur_i +: 64];
          end else begin
            dimm_wdata[8] = sr_q[63:0];   // preserved chip-8 word
          end
        end
        LAYOUT_PACKED_RS: begin
          dimm_wdata[8] = r_wdata[64*cur_i +: 64];
        end
        LAYOUT_INTER_WRAP: begin
          for (int c = 0; c < CHIPS; c++) begin
            dimm_wdata[c] = '0;
            if (4'(c) != 4'd8 - wrap_k)
              for (int b = 0; b < BURSTS; b++)
                dimm_wdata[c][8*b +: 8] = r_wdata[64*b + 8*wrap_lane(4'(c), wrap_k) +: 8];
          end
        end
        LAYOUT_PARITY: begin
          if (cur.kind == ACC_PART) begin
            dimm_wdata[8] = r_wdata[64*cur_i +: 64];
          end else begin
            dimm_wdata[8] = sr_q[63:0];
            dimm_wdata[8][8*par_burst +: 8] = par_of_wdata;
          end
        end
        default: ;
      endcase
    end
  end

  // ---------------- read data steering ----------------
  line_t rd_line;      // chips 0-7 in conventional lanes
  line_t rd_wrap;      // eight wrap-around chips in lane order
  always_comb begin
    for (int b = 0; b < BURSTS; b++)
      for (int c = 0; c < DATA_CHIPS; c++)
        rd_line[64*b + 8*c +: 8] = dimm_rdata[c][8*b +: 8];
    rd_wrap = '0;
    for (int c = 0; c < CHIPS; c++)
      if (4'(c) != 4'd8 - wrap_k)
        for (int b = 0; b < BURSTS; b++)
          rd_wrap[64*b + 8*wrap_lane(4'(c), wrap_k) +: 8] = dimm_rdata[c][8*b +: 8];
  end

  // What to do with the shift register when an access completes.
  always_comb begin
    sr_load      = 1'b0;
    sr_shift     = 1'b0;
    sr_load_data = '0;
    if (state == S_WAIT && dimm_done && !cur.we && region != REGION_ECC) begin
      unique case (layout)
        LAYOUT_PACKED: begin
          if (extra && r_we) begin
            sr_load = 1'b1; sr_load_data = rd_line;            // host line
          end else if (extra) begin
            sr_shift = 1'b1;                                   // part i
          end else if (r_we) begin
            sr_load = 1'b1; sr_load_data = {448'b0, dimm_rdata[8]};
          end
        end
        LAYOUT_PACKED_RS: if (extra) sr_shift = 1'b1;
        LAYOUT_PARITY: begin
          if (cur.kind == ACC_PART)           sr_shift = 1'b1;
          else if (cur.kind == ACC_LINE)      begin sr_load = 1'b1; sr_load_data = rd_line; end
          else if (r_we)                      begin sr_load = 1'b1; sr_load_data = {448'b0, dimm_rdata[8]}; end
        end
        default: ;
      endcase
    end
  end

  // ---------------- control ----------------
  assign req_ready = (state == S_IDLE) && !cfg_we;
  assign cfg_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      boundary       <= '0;
      r_we           <= 1'b0;
      r_addr         <= '0;
      r_wdata        <= '0;
      step           <= '0;
      r_err          <= 1'b0;
      r_corr         <= 1'b0;
      r_rdata        <= '0;
      resp_valid     <= 1'b0;
      resp_rdata     <= '0;
      resp_err       <= 1'b0;
      resp_corrected <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (cfg_we) begin
            boundary <= cfg_boundary;
          end else if (req_valid) begin
            r_we    <= req_we;
            r_addr  <= req_addr;
            r_wdata <= req_wdata;
            step    <= '0;
            r_err   <= 1'b0;
            r_corr  <= 1'b0;
            r_rdata <= '0;
            state   <= S_PLAN;
          end
        end
        S_PLAN: begin
          if (region == REGION_NONE) begin
            r_err <= 1'b1;
            state <= S_RESP;
          end else begin
            state <= S_ISSUE;
          end
        end
        S_ISSUE: state <= S_WAIT;
        S_WAIT: begin
          if (dimm_done) begin
            if (!cur.we) begin
              if (region == REGION_ECC) begin
                r_rdata <= dec_line;
                r_err   <= |dec_unc;
                r_corr  <= |dec_corr;
              end else begin
                unique case (layout)
                  LAYOUT_PACKED, LAYOUT_PACKED_RS:
                    if (!extra) r_rdata <= rd_line;
                  LAYOUT_INTER_WRAP: r_rdata <= rd_wrap;
                  LAYOUT_PARITY:
                    if (cur.kind == ACC_PARITY && !r_we) begin
                      r_rdata <= sr_q;
                      r_err   <= (dimm_rdata[8][8*par_burst +: 8] != par_of_sr);
                    end
                  default: ;
                endcase
              end
            end
            if (last_step) state <= S_RESP;
            else begin
              step  <= step + 5'd1;
              state <= S_ISSUE;
            end
          end
        end
        S_RESP: begin
          resp_valid     <= 1'b1;
          // an extra line read with the packed layouts ends in the register
          resp_rdata     <= (extra && !r_we && layout != LAYOUT_INTER_WRAP
                             && layout != LAYOUT_PARITY) ? sr_q : r_rdata;
          resp_err       <= r_err;
          resp_corrected <= r_corr;
          state          <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The DIMM answers only accesses that were issued.
  assert property (@(posedge clk) disable iff (!rst_n) dimm_done |-> state == S_WAIT)
    else $error("dimm_done without an access in flight");
endmodule
