// cream_top: a CREAM memory system: the memory-controller extension
// (cream_mc) and the bridge-chip logic of the DIMM (cream_bridge), with the
// DIMM's chips outside.
//
// A cache-line request enters at req_*; cream_mc turns it into column
// accesses, which pass through cream_bridge (one clock) and leave as
// per-chip commands on dimm_cmd_*. The nine x8 chips answer with
// dimm_done/dimm_rdata; the data lanes go straight between the controller
// and the chips, as on a registered DIMM where only command and address
// pass through the register. The controller's boundary register is copied
// to the bridge, as the paper requires for its Solutions 2 and 3. 'layout'
// selects the reduced-protection layout (a static strap here; the paper
// evaluates each layout on its own) and must not change while requests are
// in flight. The DRAM command protocol (activate, precharge, timing) and
// request scheduling belong to the host controller and are not modelled:
// each column access carries its row and the chips are expected to open it.
//
// Interface: see cream_mc (requests, boundary) and cream_bridge
// (dimm_cmd_valid/dimm_cmd, dimm_cmd_group). Latency: request to first
// command 3 clocks, then per access the DIMM's latency plus 2 clocks.
module cream_top
  import cream_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  layout_e    layout,
  input  logic       cfg_we,
  input  line_addr_t cfg_boundary,
  output logic       cfg_ready,
  output line_addr_t capacity,
  input  logic       req_valid,
  output logic       req_ready,
  input  logic       req_we,
  input  line_addr_t req_addr,
  input  line_t      req_wdata,
  output logic       resp_valid,
  output line_t      resp_rdata,
  output logic       resp_err,
  output logic       resp_corrected,
  output logic       dimm_cmd_valid,
  output chip_cmd_t  dimm_cmd,
  output logic [3:0] dimm_cmd_group,
  output dimm_data_t dimm_wdata,
  input  logic       dimm_done,
  input  dimm_data_t dimm_rdata
);
  line_addr_t boundary;
  logic       acc_valid;
  access_t    acc;

  cream_mc u_mc (
    .clk, .rst_n, .layout,
    .cfg_we, .cfg_boundary, .cfg_ready, .boundary, .capacity,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata,
    .resp_valid, .resp_rdata, .resp_err, .resp_corrected,
    .acc_valid, .acc, .dimm_wdata, .dimm_done, .dimm_rdata
  );

  cream_bridge u_bridge (
    .clk, .rst_n, .layout, .boundary,
    .acc_valid, .acc,
    .cmd_valid (dimm_cmd_valid),
    .cmd       (dimm_cmd),
    .cmd_group (dimm_cmd_group)
  );
endmodule
