// deconet_top: the decoding network of the prototype: a two-level tree with one root and
// NLEAF leaves, the leaves also chained into a grid.
//
// Every connection between nodes is an Eos-style transceiver link (behavioural model,
// LINK_LAT cycles, one per direction): root <-> each leaf for instructions and results
// (the tree), and leaf l <-> leaf l+1 for boundary defects (the grid). Each leaf decodes NQ
// logical qubits of distance D; the default, 4 leaves of 25 qubits at d=5, is the
// published 100-qubit configuration. Qubit controllers and the user interface are outside
// the design and appear as ports: one measurement channel per logical qubit and one
// feedback stream per leaf, and the root's program-load, start and result ports.
module deconet_top
  import deconet_pkg::*;
#(
  parameter int D          = 5,
  parameter int NQ         = 25,
  parameter int NLEAF      = 4,
  parameter int LINK_LAT   = 10,
  parameter int PROG_DEPTH = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // user interface
  input  logic                          prog_we,
  input  logic [$clog2(PROG_DEPTH)-1:0] prog_addr,
  input  lp_instr_t                     prog_data,
  input  logic                          start,
  output logic                          running,
  output logic                          res_valid,
  output msg_t                          res_msg,
  output logic [15:0]                   n_cond_taken,
  output logic [15:0]                   n_cond_skipped,
  // qubit controllers
  input  logic [NQ-1:0]                 meas_valid [NLEAF],
  input  logic [D*D-1:0]                meas_data  [NLEAF][NQ],
  output logic [NQ-1:0]                 meas_ready [NLEAF],
  output logic                          fb_valid   [NLEAF],
  output logic [7:0]                    fb_qubit   [NLEAF],
  output logic                          fb_logical [NLEAF],
  output logic                          leaf_busy  [NLEAF]
);
  logic down_v [NLEAF], up_v [NLEAF], dl_v [NLEAF], ul_v [NLEAF];
  msg_t down_m [NLEAF], up_m [NLEAF], dl_m [NLEAF], ul_m [NLEAF];
  // grid: ge_tx of leaf l travels east to gw_rx of leaf l+1, gw_tx of leaf l+1 west to ge_rx of leaf l
  logic ge_tx_v [NLEAF], gw_tx_v [NLEAF], gw_rx_v [NLEAF], ge_rx_v [NLEAF];
  msg_t ge_tx_m [NLEAF], gw_tx_m [NLEAF], gw_rx_m [NLEAF], ge_rx_m [NLEAF];

  root_node #(.NLEAF(NLEAF), .PROG_DEPTH(PROG_DEPTH), .NQ_TOT(NLEAF*NQ)) u_root (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_data, .start, .running,
    .res_valid, .res_msg, .n_cond_taken, .n_cond_skipped,
    .down_valid(down_v), .down_msg(down_m), .up_valid(ul_v), .up_msg(ul_m));

  for (genvar l = 0; l < NLEAF; l++) begin : g_leaf
    eos_link #(.LAT(LINK_LAT)) u_down (.clk, .rst_n, .in_valid(down_v[l]), .in_msg(down_m[l]),
                                       .out_valid(dl_v[l]), .out_msg(dl_m[l]));
    eos_link #(.LAT(LINK_LAT)) u_up   (.clk, .rst_n, .in_valid(up_v[l]), .in_msg(up_m[l]),
                                       .out_valid(ul_v[l]), .out_msg(ul_m[l]));

    leaf_node #(.D(D), .NQ(NQ), .LEAF_ID(l + 1)) u_leaf (
      .clk, .rst_n,
      .tree_rx_valid(dl_v[l]), .tree_rx_msg(dl_m[l]),
      .tree_tx_valid(up_v[l]), .tree_tx_msg(up_m[l]), .tree_tx_ready(1'b1),
      .gw_rx_valid(gw_rx_v[l]), .gw_rx_msg(gw_rx_m[l]), .gw_tx_valid(gw_tx_v[l]), .gw_tx_msg(gw_tx_m[l]),
      .ge_rx_valid(ge_rx_v[l]), .ge_rx_msg(ge_rx_m[l]), .ge_tx_valid(ge_tx_v[l]), .ge_tx_msg(ge_tx_m[l]),
      .meas_valid(meas_valid[l]), .meas_data(meas_data[l]), .meas_ready(meas_ready[l]),
      .fb_valid(fb_valid[l]), .fb_qubit(fb_qubit[l]), .fb_logical(fb_logical[l]),
      .busy(leaf_busy[l]));

    if (l < NLEAF - 1) begin : g_grid
      eos_link #(.LAT(LINK_LAT)) u_east (.clk, .rst_n, .in_valid(ge_tx_v[l]), .in_msg(ge_tx_m[l]),
                                         .out_valid(gw_rx_v[l+1]), .out_msg(gw_rx_m[l+1]));
      eos_link #(.LAT(LINK_LAT)) u_west (.clk, .rst_n, .in_valid(gw_tx_v[l+1]), .in_msg(gw_tx_m[l+1]),
                                         .out_valid(ge_rx_v[l]), .out_msg(ge_rx_m[l]));
    end
  end

  // the two ends of the grid chain have no neighbour
  assign gw_rx_v[0]       = 1'b0;
  assign gw_rx_m[0]       = '0;
  assign ge_rx_v[NLEAF-1] = 1'b0;
  assign ge_rx_m[NLEAF-1] = '0;
endmodule
