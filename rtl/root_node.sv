// root_node: the root of the decoding network's tree.
//
// The root joins the logical-level processor, which runs the user's logical circuit and
// turns it into decoding instructions, to a message router whose children are the tree
// links towards the leaves (or intermediate nodes). Child k (1..NLEAF) serves destination
// k. The user interface (configuration, program load, monitoring) is left as ports.
// The router hop costs two cycles each way. The links cannot stall, so each input buffer
// (IN_DEPTH messages) must hold a burst of results: a leaf sends one result per logical
// qubit per block (25 at the default size) and all leaves share the processor's port; 128
// covers five blocks of one leaf. The composition follows the paper; the address plan and
// the buffer depth are this design's choices.
module root_node
  import deconet_pkg::*;
#(
  parameter int NLEAF      = 4,
  parameter int PROG_DEPTH = 256,
  parameter int IN_DEPTH   = 128,
  parameter int NQ_TOT     = 100
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          prog_we,
  input  logic [$clog2(PROG_DEPTH)-1:0] prog_addr,
  input  lp_instr_t                     prog_data,
  input  logic                          start,
  output logic                          running,
  output logic                          res_valid,
  output msg_t                          res_msg,
  output logic [15:0]                   n_cond_taken,
  output logic [15:0]                   n_cond_skipped,
  output logic                          down_valid [NLEAF],
  output msg_t                          down_msg   [NLEAF],
  input  logic                          up_valid   [NLEAF],
  input  msg_t                          up_msg     [NLEAF]
);
  localparam int NP = NLEAF + 2;

  logic in_valid [NP], in_room [NP], out_valid [NP], out_ready [NP];
  msg_t in_msg [NP], out_msg [NP];
  logic lp_tx_valid, lp_rx_ready;
  msg_t lp_tx_msg;

  always_comb begin
    in_valid[0]  = 1'b0;
    in_msg[0]    = '0;
    out_ready[0] = 1'b1;
    for (int k = 1; k <= NLEAF; k++) begin
      in_valid[k]      = up_valid[k-1];
      in_msg[k]        = up_msg[k-1];
      out_ready[k]     = 1'b1;
      down_valid[k-1]  = out_valid[k];
      down_msg[k-1]    = out_msg[k];
    end
    in_valid[NP-1]  = lp_tx_valid;
    in_msg[NP-1]    = lp_tx_msg;
    out_ready[NP-1] = lp_rx_ready;
  end

  msg_router #(.NC(NLEAF), .MY_ID(0), .CHILD_BASE(1), .SPAN(1), .IN_DEPTH(IN_DEPTH)) u_router (
    .clk, .rst_n, .in_valid, .in_msg, .in_room, .out_valid, .out_msg, .out_ready);

  logical_processor #(.PROG_DEPTH(PROG_DEPTH), .NQ_TOT(NQ_TOT)) u_lp (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_data, .start, .running,
    .res_valid, .res_msg, .n_cond_taken, .n_cond_skipped,
    .tx_valid(lp_tx_valid), .tx_msg(lp_tx_msg), .tx_room(in_room[NP-1]),
    .rx_valid(out_valid[NP-1]), .rx_msg(out_msg[NP-1]), .rx_ready(lp_rx_ready));
endmodule
