// tb_leaf_coordinator: unit test of the leaf coordinator against a scripted model of the
// decoder instances.
//
// Checks: boundary and routing registers written by instructions; a decode does not start
// before every instance has a block nor, with a closed west face, before that block's
// boundary defects arrive; the toggles handed to the instances are the ones received; the
// command sequence (shift, four flooding steps each repeated while `changed`, growth while
// an odd cluster is left, a second fused stage, commit); one result message per qubit
// carrying the committed block and the instance's logical bit, mirrored on the feedback
// port; and the open east face's corrections sent as a boundary-defect message.
module tb_leaf_coordinator;
  import deconet_pkg::*;

  localparam int D  = 5;
  localparam int NQ = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           tree_rx_valid = 1'b0, tree_tx_valid, gw_rx_valid = 1'b0, gw_tx_valid, ge_tx_valid;
  msg_t           tree_rx_msg = '0, tree_tx_msg, gw_rx_msg = '0, gw_tx_msg, ge_tx_msg;
  face_e          face_q [NQ+1];
  logic [7:0]     route_q [NQ];
  uf_cmd_e        cmd;
  logic           fused, fb_valid, fb_logical, busy;
  logic [7:0]     fb_qubit;
  logic [NQ-1:0]  changed, any_odd, blk_ready, logical;
  logic [D*D-1:0] tx_tog_w, tx_tog_e, rx_tog_w, rx_tog_e;

  leaf_coordinator #(.D(D), .NQ(NQ), .LEAF_ID(2)) dut (
    .clk, .rst_n, .tree_rx_valid, .tree_rx_msg, .tree_tx_valid, .tree_tx_msg, .tree_tx_ready(1'b1),
    .gw_rx_valid, .gw_rx_msg, .gw_tx_valid, .gw_tx_msg,
    .ge_rx_valid(1'b0), .ge_rx_msg('0), .ge_tx_valid, .ge_tx_msg,
    .face_q, .route_q, .cmd, .fused, .changed, .any_odd, .blk_ready, .logical,
    .tx_tog_w, .tx_tog_e, .rx_tog_w, .rx_tog_e, .fb_valid, .fb_qubit, .fb_logical, .busy);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // scripted decoder model: each flooding step changes for two cycles; odd clusters remain
  // for two growth steps before fusion and one after
  int chg_cnt = 0, n_grow = 0, n_grow_fused = 0, n_shift = 0, n_commit = 0, n_init = 0;
  logic [D*D-1:0] tog_at_shift;
  assign changed = {NQ{chg_cnt > 0}};
  assign any_odd = {NQ{(!fused && n_grow < 2) || (fused && n_grow < 3)}};
  always @(posedge clk) begin
    if (rst_n) case (cmd)
      C_MRG_INIT, C_TREE_INIT, C_PAR_INIT, C_BC_INIT: begin chg_cnt <= 2; n_init++; end
      C_MRG, C_TREE, C_PAR, C_BC: if (chg_cnt > 0) chg_cnt <= chg_cnt - 1;
      C_GROW: begin n_grow++; if (fused) n_grow_fused++; end
      C_SHIFT: begin n_shift++; n_grow <= 0; tog_at_shift <= rx_tog_w; end
      C_COMMIT: n_commit++;
      default: ;
    endcase
  end

  msg_t res [$];
  msg_t east [$];
  int   n_fb = 0;
  always @(posedge clk) begin
    if (rst_n && tree_tx_valid) res.push_back(tree_tx_msg);
    if (rst_n && ge_tx_valid) east.push_back(ge_tx_msg);
    if (rst_n && fb_valid) n_fb++;
  end

  task automatic send(input msg_t m);
    @(negedge clk);
    tree_rx_valid = 1'b1;
    tree_rx_msg   = m;
    @(negedge clk);
    tree_rx_valid = 1'b0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_ready = '0;
    logical   = 2'b10;
    tx_tog_w  = '0;
    tx_tog_e  = 25'h1234567;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    send('{dest: 8'd2, hdr: H_SET_BOUNDARY, payload: {38'd0, 2'(F_CLOSED), 8'd0}});
    send('{dest: 8'd2, hdr: H_SET_BOUNDARY, payload: {38'd0, 2'(F_MERGED), 8'd1}});
    send('{dest: 8'd2, hdr: H_SET_BOUNDARY, payload: {38'd0, 2'(F_OPEN),   8'd2}});
    send('{dest: 8'd2, hdr: H_SET_ROUTE,    payload: 48'h0100});
    repeat (3) @(posedge clk);
    check(face_q[0] == F_CLOSED && face_q[1] == F_MERGED && face_q[2] == F_OPEN, "face registers");
    check(route_q[0] == 8'd1 && route_q[1] == 8'd1, "routing table");
    // decode 0: must wait for blocks, then for the west boundary defects
    send('{dest: 8'd2, hdr: H_DECODE, payload: 48'd0});
    repeat (20) @(posedge clk);
    check(n_shift == 0, "no shift without buffered blocks");
    blk_ready = '1;
    repeat (20) @(posedge clk);
    check(n_shift == 0, "no shift without the closed face's boundary defects");
    @(negedge clk);
    gw_rx_valid = 1'b1;
    gw_rx_msg   = '{dest: 8'd2, hdr: H_BDRY_DEFECTS, payload: {12'd0, 4'd0, 32'h00abcdef}};
    @(negedge clk);
    gw_rx_valid = 1'b0;
    while (busy || n_shift == 0) @(posedge clk);
    repeat (2) @(posedge clk);
    check(n_shift == 1 && n_commit == 1, "one shift and one commit");
    check(tog_at_shift == 25'h0abcdef, "received toggles given to the instances");
    check(n_grow == 3 && n_grow_fused == 1, "growth before and after fusion");
    check(n_init == 4 * 5, "four flooding steps per growth round and per stage end");
    check(res.size() == 0, "block 0 commits nothing");
    // decode 1: commits block 0
    @(negedge clk);
    gw_rx_valid = 1'b1;
    gw_rx_msg   = '{dest: 8'd2, hdr: H_BDRY_DEFECTS, payload: {12'd1, 4'd0, 32'h0}};
    @(negedge clk);
    gw_rx_valid = 1'b0;
    send('{dest: 8'd2, hdr: H_DECODE, payload: 48'd1});
    repeat (5) @(posedge clk);
    while (busy) @(posedge clk);
    repeat (3) @(posedge clk);
    check(res.size() == NQ, "one result per qubit");
    for (int i = 0; i < res.size() && i < NQ; i++) begin
      check(res[i].dest == ROOT_ID && res[i].hdr == H_RESULT, "result header");
      check(res[i].payload[7:0] == 8'(NQ + i), "global qubit number");
      check(res[i].payload[23:8] == 16'd0, "committed block number");
      check(res[i].payload[24] == logical[i], "logical bit");
    end
    check(n_fb == NQ, "feedback to the qubit controllers");
    check(east.size() == 1, "one boundary-defect message to the east");
    if (east.size() > 0)
      check(east[0].dest == 8'd3 && east[0].hdr == H_BDRY_DEFECTS &&
            east[0].payload[24:0] == tx_tog_e && east[0].payload[47:36] == 12'd0,
            "east boundary-defect message content");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
