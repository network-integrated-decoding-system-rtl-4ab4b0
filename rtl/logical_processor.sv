// logical_processor: the logical-level processor of the root node.
//
// It runs the logical circuit as a program of decoding instructions held in a program
// memory that the user interface loads (prog_we). After `start` it steps through the
// program one instruction at a time:
//   OP_SEND    sends an instruction message to a leaf (boundary set-up for a merge or a
//              split, measurement routing, start of a decode);
//   OP_WAIT    stalls until the decoded result of a given logical qubit has reached a given
//              block (the table keeps only the latest block, so later blocks also release it);
//   OP_SENDIF  sends its message only if that latest result equals a given bit. This is how
//              the decoding graph is built at run time: whether two qubits get merged may
//              depend on the decoded measurement of a third.
// Every H_RESULT message from the leaves updates a table of the latest result per logical
// qubit and is passed on to the user interface (res_valid/res_msg).
//
// The program format and the three kinds of instruction are this design's choices; the
// paper gives the processor's role (run the logical circuit, generate decoding
// instructions, receive the leaves' results) and the need for conditional operations.
//
// Timing: one instruction per cycle when the router has room; results are taken every
// cycle.
module logical_processor
  import deconet_pkg::*;
#(
  parameter int PROG_DEPTH = 256,
  parameter int NQ_TOT     = 100
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
  // network (router local port)
  output logic                          tx_valid,
  output msg_t                          tx_msg,
  input  logic                          tx_room,
  input  logic                          rx_valid,
  input  msg_t                          rx_msg,
  output logic                          rx_ready
);
  localparam int AW = $clog2(PROG_DEPTH);

  lp_instr_t   prog [PROG_DEPTH];
  logic [AW-1:0] pc;
  lp_instr_t   ins;
  logic        r_seen [NQ_TOT];
  logic [15:0] r_blk  [NQ_TOT];
  logic        r_val  [NQ_TOT];
  logic        qok, advance;

  assign ins      = prog[pc];
  assign rx_ready = 1'b1;
  assign qok      = int'(ins.q) < NQ_TOT;

  always_ff @(posedge clk)
    if (prog_we) prog[prog_addr] <= prog_data;

  always_comb begin
    tx_valid = 1'b0;
    tx_msg   = ins.msg;
    advance  = 1'b0;
    if (running) begin
      case (ins.op)
        OP_SEND: begin
          tx_valid = tx_room;
          advance  = tx_room;
        end
        OP_WAIT:
          advance = qok && r_seen[qok ? ins.q : 8'd0] &&
                    (r_blk[qok ? ins.q : 8'd0] >= ins.msg.payload[15:0]);
        OP_SENDIF: begin
          if (qok && r_val[qok ? ins.q : 8'd0] == ins.val) begin
            tx_valid = tx_room;
            advance  = tx_room;
          end else begin
            advance = 1'b1;
          end
        end
        default: advance = 1'b0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc             <= '0;
      running        <= 1'b0;
      res_valid      <= 1'b0;
      res_msg        <= '0;
      n_cond_taken   <= '0;
      n_cond_skipped <= '0;
      for (int q = 0; q < NQ_TOT; q++) begin
        r_seen[q] <= 1'b0;
        r_blk[q]  <= '0;
        r_val[q]  <= 1'b0;
      end
    end else begin
      if (start && !running) begin
        running <= 1'b1;
        pc      <= '0;
      end else if (running) begin
        if (ins.op == OP_END) running <= 1'b0;
        if (advance) begin
          pc <= pc + 1'b1;
          if (ins.op == OP_SENDIF) begin
            if (tx_valid) n_cond_taken   <= n_cond_taken + 16'd1;
            else          n_cond_skipped <= n_cond_skipped + 16'd1;
          end
        end
      end
      res_valid <= rx_valid && (rx_msg.hdr == H_RESULT);
      res_msg   <= rx_msg;
      if (rx_valid && rx_msg.hdr == H_RESULT && int'(rx_msg.payload[7:0]) < NQ_TOT) begin
        r_seen[rx_msg.payload[7:0]] <= 1'b1;
        r_blk[rx_msg.payload[7:0]]  <= rx_msg.payload[23:8];
        r_val[rx_msg.payload[7:0]]  <= rx_msg.payload[24];
      end
    end
  end
endmodule
