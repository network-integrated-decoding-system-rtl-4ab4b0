// leaf_coordinator: the control of one leaf node.
//
// It takes instruction messages from the tree (root) into a queue and executes them in
// order:
//   H_SET_BOUNDARY  writes one entry of the boundary register array. Face i lies between
//                   decoder instance i-1 and i; face 0 and face NQ are the leaf's west and
//                   east edges towards its grid neighbours. Every instance reads the two
//                   faces around it.
//   H_SET_ROUTE     writes the static measurement routing table (channel -> instance).
//   H_DECODE k      decodes block k of every instance: shift the new block in, run the
//                   Union-Find clustering with artificial boundaries on merged faces, run it
//                   again with those faces fused, and commit block k-1.
// A decode waits until every instance has a whole block buffered and, for a face marked
// F_CLOSED, until the boundary defects of block k have arrived from the grid neighbour.
// That wait is what staggers the leaves into the pipelined groups of parallel-window
// decoding. After the commit it sends one H_RESULT per logical qubit to the root (and the
// same bit to the qubit controllers as feedback) and, for each F_OPEN face, the corrections
// that cross it as H_BDRY_DEFECTS chunks to that neighbour.
//
// The instruction set, the queue depths, the chunking of boundary defects and the single
// control sequence shared by all instances are this design's choices; the roles
// (boundary registers written by the coordinator and read by the instances, starting
// decodes, exchanging boundary information with neighbour leaves) follow the paper.
//
// Timing: one instruction per cycle for register writes; a decode takes one cycle to shift,
// then one cycle per flooding step and growth step; results leave one message per cycle.
module leaf_coordinator
  import deconet_pkg::*;
#(
  parameter int D       = 5,
  parameter int NQ      = 25,
  parameter int LEAF_ID = 1,
  parameter int IQ      = 16,
  parameter int TQ      = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  // tree port
  input  logic            tree_rx_valid,
  input  msg_t            tree_rx_msg,
  output logic            tree_tx_valid,
  output msg_t            tree_tx_msg,
  input  logic            tree_tx_ready,
  // grid ports (west / east neighbour leaf)
  input  logic            gw_rx_valid,
  input  msg_t            gw_rx_msg,
  output logic            gw_tx_valid,
  output msg_t            gw_tx_msg,
  input  logic            ge_rx_valid,
  input  msg_t            ge_rx_msg,
  output logic            ge_tx_valid,
  output msg_t            ge_tx_msg,
  // boundary registers and routing table
  output face_e           face_q  [NQ+1],
  output logic [7:0]      route_q [NQ],
  // decoder instances
  output uf_cmd_e         cmd,
  output logic            fused,
  input  logic [NQ-1:0]   changed,
  input  logic [NQ-1:0]   any_odd,
  input  logic [NQ-1:0]   blk_ready,
  input  logic [NQ-1:0]   logical,
  input  logic [D*D-1:0]  tx_tog_w,
  input  logic [D*D-1:0]  tx_tog_e,
  output logic [D*D-1:0]  rx_tog_w,
  output logic [D*D-1:0]  rx_tog_e,
  // feedback to the qubit controllers
  output logic            fb_valid,
  output logic [7:0]      fb_qubit,
  output logic            fb_logical,
  output logic            busy
);

  localparam int TW    = D * D;
  localparam int NCH   = (TW + CHUNK_W - 1) / CHUNK_W;
  localparam int IAW   = $clog2(IQ);
  localparam int TAW   = $clog2(TQ);
  localparam int QW    = (NQ > 1) ? $clog2(NQ) : 1;
  localparam int CW    = (NCH > 1) ? $clog2(NCH) : 1;

  // ------------------------------------------------------------------ instruction queue
  msg_t           iq_mem [IQ];
  logic [IAW-1:0] iq_rd, iq_wr;
  logic [IAW:0]   iq_cnt;
  msg_t           iq_head;
  logic           iq_pop;
  assign iq_head = iq_mem[iq_rd];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iq_rd  <= '0;
      iq_wr  <= '0;
      iq_cnt <= '0;
    end else begin
      if (tree_rx_valid) begin
        iq_mem[iq_wr] <= tree_rx_msg;
        iq_wr <= iq_wr + 1'b1;
      end
      if (iq_pop) iq_rd <= iq_rd + 1'b1;
      iq_cnt <= iq_cnt + $bits(iq_cnt)'(tree_rx_valid) - $bits(iq_cnt)'(iq_pop);
    end
  end

  a_iq_room: assert property (@(posedge clk) disable iff (!rst_n)
    tree_rx_valid |-> (iq_cnt < (IAW+1)'(IQ)));

  // ------------------------------------------------------------------ boundary defect queues
  // Chunks from a neighbour are assembled into one toggle vector per block.
  typedef struct packed {
    logic [11:0]   blk;
    logic [TW-1:0] tog;
  } tog_t;

  tog_t           tw_mem [TQ], te_mem [TQ];
  logic [TAW-1:0] tw_rd, tw_wr, te_rd, te_wr;
  logic [TAW:0]   tw_cnt, te_cnt;
  logic [NCH*CHUNK_W-1:0] tw_asm, te_asm;
  logic           tw_pop, te_pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tw_rd <= '0; tw_wr <= '0; tw_cnt <= '0; tw_asm <= '0;
      te_rd <= '0; te_wr <= '0; te_cnt <= '0; te_asm <= '0;
    end else begin
      automatic logic tw_push = 1'b0, te_push = 1'b0;
      if (gw_rx_valid && gw_rx_msg.hdr == H_BDRY_DEFECTS) begin
        automatic int ci = int'(gw_rx_msg.payload[35:32]);
        automatic logic [NCH*CHUNK_W-1:0] a = tw_asm;
        a[ci*CHUNK_W +: CHUNK_W] = gw_rx_msg.payload[31:0];
        tw_asm <= a;
        if (ci == NCH - 1) begin
          tw_mem[tw_wr] <= '{blk: gw_rx_msg.payload[47:36], tog: a[TW-1:0]};
          tw_wr   <= tw_wr + 1'b1;
          tw_push = 1'b1;
        end
      end
      if (ge_rx_valid && ge_rx_msg.hdr == H_BDRY_DEFECTS) begin
        automatic int ci = int'(ge_rx_msg.payload[35:32]);
        automatic logic [NCH*CHUNK_W-1:0] a = te_asm;
        a[ci*CHUNK_W +: CHUNK_W] = ge_rx_msg.payload[31:0];
        te_asm <= a;
        if (ci == NCH - 1) begin
          te_mem[te_wr] <= '{blk: ge_rx_msg.payload[47:36], tog: a[TW-1:0]};
          te_wr   <= te_wr + 1'b1;
          te_push = 1'b1;
        end
      end
      if (tw_pop) tw_rd <= tw_rd + 1'b1;
      if (te_pop) te_rd <= te_rd + 1'b1;
      tw_cnt <= tw_cnt + $bits(tw_cnt)'(tw_push) - $bits(tw_cnt)'(tw_pop);
      te_cnt <= te_cnt + $bits(te_cnt)'(te_push) - $bits(te_cnt)'(te_pop);
    end
  end

  // ------------------------------------------------------------------ decode sequence
  typedef enum logic [2:0] {S_IDLE, S_SHIFT, S_INIT, S_FLOOD, S_GROW, S_COMMIT, S_SEND} state_e;
  state_e      st;
  logic [1:0]  ph;          // 0 merge, 1 tree, 2 parity gather, 3 parity broadcast
  logic [15:0] blk;
  logic        any_changed, odd_left, all_ready, can_start;

  // result and boundary-defect senders
  logic          res_pend, tgw_pend, tge_pend;
  logic [QW-1:0] res_idx;
  logic [CW-1:0] tgw_idx, tge_idx;
  logic [NQ-1:0] res_bits;
  logic [NCH*CHUNK_W-1:0] tgw_bits, tge_bits;
  logic [15:0]   res_blk;
  face_e         f0_cur, fn_cur, f0_prev, fn_prev;  // leaf edge faces of the window's blocks

  assign any_changed = |changed;
  assign odd_left    = |any_odd;
  assign all_ready   = &blk_ready;
  assign can_start   = (iq_cnt != 0) && (iq_head.hdr == H_DECODE) && all_ready &&
                       (face_q[0] != F_CLOSED || tw_cnt != 0) &&
                       (face_q[NQ] != F_CLOSED || te_cnt != 0) &&
                       !res_pend && !tgw_pend && !tge_pend;
  assign busy        = (st != S_IDLE) || res_pend || tgw_pend || tge_pend;

  assign rx_tog_w = tw_mem[tw_rd].tog;
  assign rx_tog_e = te_mem[te_rd].tog;

  always_comb begin
    cmd = C_NONE;
    case (st)
      S_SHIFT:  cmd = C_SHIFT;
      S_INIT:   cmd = (ph == 2'd0) ? C_MRG_INIT : (ph == 2'd1) ? C_TREE_INIT :
                      (ph == 2'd2) ? C_PAR_INIT : C_BC_INIT;
      S_FLOOD:  cmd = (ph == 2'd0) ? C_MRG : (ph == 2'd1) ? C_TREE :
                      (ph == 2'd2) ? C_PAR : C_BC;
      S_GROW:   cmd = C_GROW;
      S_COMMIT: cmd = C_COMMIT;
      default:  cmd = C_NONE;
    endcase
  end

  // Register writes and decode starts come off the head of the queue only when idle.
  always_comb begin
    iq_pop = 1'b0;
    tw_pop = 1'b0;
    te_pop = 1'b0;
    if (st == S_IDLE && iq_cnt != 0) begin
      if (iq_head.hdr == H_DECODE) iq_pop = can_start;
      else                         iq_pop = 1'b1;
    end
    if (st == S_SHIFT) begin
      tw_pop = (face_q[0] == F_CLOSED);
      te_pop = (face_q[NQ] == F_CLOSED);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= S_IDLE;
      ph    <= '0;
      f0_cur  <= F_SPLIT;
      fn_cur  <= F_SPLIT;
      f0_prev <= F_SPLIT;
      fn_prev <= F_SPLIT;
      fused <= 1'b0;
      blk   <= '0;
      for (int i = 0; i <= NQ; i++) face_q[i] <= F_SPLIT;
      for (int i = 0; i < NQ; i++) route_q[i] <= 8'(i);
    end else begin
      case (st)
        S_IDLE: if (iq_pop) begin
          case (iq_head.hdr)
            H_SET_BOUNDARY:
              if (int'(iq_head.payload[7:0]) <= NQ)
                face_q[iq_head.payload[7:0]] <= face_e'(iq_head.payload[9:8]);
            H_SET_ROUTE:
              if (int'(iq_head.payload[7:0]) < NQ)
                route_q[iq_head.payload[7:0]] <= iq_head.payload[15:8];
            H_DECODE: begin
              blk   <= iq_head.payload[15:0];
              fused <= 1'b0;
              st    <= S_SHIFT;
            end
            default: ;
          endcase
        end
        S_SHIFT: begin
          f0_prev <= f0_cur;
          fn_prev <= fn_cur;
          f0_cur  <= face_q[0];
          fn_cur  <= face_q[NQ];
          ph <= 2'd0;
          st <= S_INIT;
        end
        S_INIT: st <= S_FLOOD;
        S_FLOOD: if (!any_changed) begin
          if (ph != 2'd3) begin
            ph <= ph + 2'd1;
            st <= S_INIT;
          end else if (odd_left) begin
            st <= S_GROW;
          end else if (!fused) begin
            fused <= 1'b1;          // remove the artificial boundaries and go on growing
            ph    <= 2'd0;
            st    <= S_INIT;
          end else begin
            st <= S_COMMIT;
          end
        end
        S_GROW: begin
          ph <= 2'd0;
          st <= S_INIT;
        end
        S_COMMIT: st <= S_SEND;
        S_SEND:   st <= S_IDLE;
        default:  st <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------ senders
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_pend <= 1'b0; tgw_pend <= 1'b0; tge_pend <= 1'b0;
      res_idx  <= '0;   tgw_idx  <= '0;   tge_idx  <= '0;
      res_bits <= '0;   tgw_bits <= '0;   tge_bits <= '0;
      res_blk  <= '0;
    end else begin
      if (st == S_COMMIT && blk != 16'd0) begin
        res_pend <= 1'b1;
        res_idx  <= '0;
        res_bits <= logical;
        res_blk  <= blk - 16'd1;
        tgw_pend <= (f0_prev == F_OPEN);
        tge_pend <= (fn_prev == F_OPEN);
        tgw_idx  <= '0;
        tge_idx  <= '0;
        tgw_bits <= (NCH*CHUNK_W)'(tx_tog_w);
        tge_bits <= (NCH*CHUNK_W)'(tx_tog_e);
      end else begin
        if (res_pend && tree_tx_ready) begin
          if (int'(res_idx) == NQ - 1) res_pend <= 1'b0;
          else res_idx <= res_idx + 1'b1;
        end
        if (tgw_pend) begin
          if (int'(tgw_idx) == NCH - 1) tgw_pend <= 1'b0;
          else tgw_idx <= tgw_idx + 1'b1;
        end
        if (tge_pend) begin
          if (int'(tge_idx) == NCH - 1) tge_pend <= 1'b0;
          else tge_idx <= tge_idx + 1'b1;
        end
      end
    end
  end

  always_comb begin
    automatic logic [7:0] q = 8'((LEAF_ID - 1) * NQ) + 8'(res_idx);
    tree_tx_valid = res_pend;
    tree_tx_msg   = '{dest: ROOT_ID, hdr: H_RESULT,
                      payload: {23'd0, res_bits[res_idx], res_blk, q}};
    fb_valid      = res_pend && tree_tx_ready;
    fb_qubit      = q;
    fb_logical    = res_bits[res_idx];
    gw_tx_valid   = tgw_pend;
    gw_tx_msg     = '{dest: 8'(LEAF_ID - 1), hdr: H_BDRY_DEFECTS,
                      payload: {res_blk[11:0], 4'(tgw_idx), tgw_bits[int'(tgw_idx)*CHUNK_W +: CHUNK_W]}};
    ge_tx_valid   = tge_pend;
    ge_tx_msg     = '{dest: 8'(LEAF_ID + 1), hdr: H_BDRY_DEFECTS,
                      payload: {res_blk[11:0], 4'(tge_idx), tge_bits[int'(tge_idx)*CHUNK_W +: CHUNK_W]}};
  end

  // The boundary defects taken at a shift must belong to the block being shifted in.
  a_tog_w_block: assert property (@(posedge clk) disable iff (!rst_n)
    tw_pop |-> (tw_mem[tw_rd].blk == blk[11:0]));
  a_tog_e_block: assert property (@(posedge clk) disable iff (!rst_n)
    te_pop |-> (te_mem[te_rd].blk == blk[11:0]));

endmodule
