// leaf_node: one leaf of the decoding network (one FPGA in the prototype).
//
// A leaf holds NQ decoder instances, one per logical qubit, side by side in a row: the
// right face of instance i is the left face of instance i+1, so merged qubits inside the
// leaf are fused directly through the face ports of the instances. The leftmost and the
// rightmost face of the row are the leaf's west and east grid faces towards the neighbouring
// leaves. Measurement rounds from the qubit controllers enter through the measurement
// router; instructions and results travel over the tree port; boundary defects over the
// two grid ports. The coordinator steps all instances in lock step.
//
// The composition (coordinator, router, decoder instances) is the one the paper draws for
// a leaf; placing the instances in one row, so that a leaf's qubits form a chain of merge
// faces, is this design's choice.
module leaf_node
  import deconet_pkg::*;
#(
  parameter int D       = 5,
  parameter int NQ      = 25,
  parameter int LEAF_ID = 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // tree port
  input  logic           tree_rx_valid,
  input  msg_t           tree_rx_msg,
  output logic           tree_tx_valid,
  output msg_t           tree_tx_msg,
  input  logic           tree_tx_ready,
  // grid ports
  input  logic           gw_rx_valid,
  input  msg_t           gw_rx_msg,
  output logic           gw_tx_valid,
  output msg_t           gw_tx_msg,
  input  logic           ge_rx_valid,
  input  msg_t           ge_rx_msg,
  output logic           ge_tx_valid,
  output msg_t           ge_tx_msg,
  // qubit controllers: one measurement channel per logical qubit, and feedback
  input  logic [NQ-1:0]  meas_valid,
  input  logic [D*D-1:0] meas_data [NQ],
  output logic [NQ-1:0]  meas_ready,
  output logic           fb_valid,
  output logic [7:0]     fb_qubit,
  output logic           fb_logical,
  output logic           busy
);
  localparam int NF = 2 * D * D;

  face_e          face_q  [NQ+1];
  logic [7:0]     route_q [NQ];
  uf_cmd_e        cmd;
  logic           fused;
  logic [NQ-1:0]  changed, any_odd, blk_ready, logical;
  logic [D*D-1:0] tx_tog_w_i [NQ], tx_tog_e_i [NQ];
  logic [D*D-1:0] rx_tog_w, rx_tog_e;

  logic [NQ-1:0]  rnd_valid, rnd_ready;
  logic [D*D-1:0] rnd_data [NQ];

  face_vtx_t lin  [NQ][NF];
  face_vtx_t rin  [NQ][NF];
  face_vtx_t lout [NQ][NF];
  face_vtx_t rout [NQ][NF];

  always_comb begin
    for (int i = 0; i < NQ; i++)
      for (int f = 0; f < NF; f++) begin
        lin[i][f] = (i > 0)      ? rout[(i > 0) ? i - 1 : 0][f]        : '0;
        rin[i][f] = (i < NQ - 1) ? lout[(i < NQ - 1) ? i + 1 : NQ-1][f] : '0;
      end
  end

  leaf_coordinator #(.D(D), .NQ(NQ), .LEAF_ID(LEAF_ID)) u_coord (
    .clk, .rst_n,
    .tree_rx_valid, .tree_rx_msg, .tree_tx_valid, .tree_tx_msg, .tree_tx_ready,
    .gw_rx_valid, .gw_rx_msg, .gw_tx_valid, .gw_tx_msg,
    .ge_rx_valid, .ge_rx_msg, .ge_tx_valid, .ge_tx_msg,
    .face_q, .route_q, .cmd, .fused, .changed, .any_odd, .blk_ready, .logical,
    .tx_tog_w(tx_tog_w_i[0]), .tx_tog_e(tx_tog_e_i[NQ-1]), .rx_tog_w, .rx_tog_e,
    .fb_valid, .fb_qubit, .fb_logical, .busy);

  meas_router #(.NCH(NQ), .NQ(NQ), .W(D*D)) u_router (
    .in_valid(meas_valid), .in_data(meas_data), .in_ready(meas_ready), .route(route_q),
    .out_valid(rnd_valid), .out_data(rnd_data), .out_ready(rnd_ready));

  for (genvar i = 0; i < NQ; i++) begin : g_inst
    uf_decoder #(.D(D), .INST(i)) u_dec (
      .clk, .rst_n,
      .rnd_valid(rnd_valid[i]), .rnd_ready(rnd_ready[i]), .rnd_data(rnd_data[i]),
      .blk_ready(blk_ready[i]),
      .lf(face_q[i]), .rf(face_q[i+1]), .fused, .cmd,
      .changed(changed[i]), .any_odd(any_odd[i]),
      .left_in(lin[i]), .left_out(lout[i]), .right_in(rin[i]), .right_out(rout[i]),
      .rx_tog_w((i == 0) ? rx_tog_w : '0), .rx_tog_e((i == NQ - 1) ? rx_tog_e : '0),
      .tx_tog_w(tx_tog_w_i[i]), .tx_tog_e(tx_tog_e_i[i]),
      .logical(logical[i]));
  end
endmodule
