// msg_router: message router of a tree node (an intermediate node, or the router inside
// the root).
//
// Ports: 0 is the parent, 1..NC the children, NC+1 the node's own (local) port. A message
// goes by its 8-bit destination alone: to the local port when it names this node, to
// child k when it falls in that child's range [CHILD_BASE + (k-1)*SPAN, +SPAN), and up to
// the parent otherwise. Each output has one register stage and a round-robin arbiter over
// the inputs that want it, so a hop costs one cycle and every input moves one message per
// cycle when there is no conflict. The links deliver without back-pressure, so each input
// has a FIFO of IN_DEPTH messages that always takes what arrives; `in_room` tells a sender
// that is not a link (the local port) whether there is space. Outputs use valid/ready.
//
// Routing on the destination byte follows the paper's message format, which is chosen for
// fast routing; the contiguous address ranges per child, the arbiter and the single
// register stage are this design's choices.
module msg_router
  import deconet_pkg::*;
#(
  parameter int NC         = 4,
  parameter int MY_ID      = 0,
  parameter int CHILD_BASE = 1,
  parameter int SPAN       = 1,
  parameter int IN_DEPTH   = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid  [NC+2],
  input  msg_t in_msg    [NC+2],
  output logic in_room   [NC+2],
  output logic out_valid [NC+2],
  output msg_t out_msg   [NC+2],
  input  logic out_ready [NC+2]
);
  localparam int NP = NC + 2;
  localparam int PW = $clog2(NP);

  function automatic int port_of(input logic [DEST_W-1:0] dest);
    if (int'(dest) == MY_ID) return NP - 1;
    for (int k = 1; k <= NC; k++)
      if (int'(dest) >= CHILD_BASE + (k - 1) * SPAN && int'(dest) < CHILD_BASE + k * SPAN)
        return k;
    return 0;
  endfunction

  localparam int FW = $clog2(IN_DEPTH);

  // input FIFOs
  msg_t          fq_mem [NP][IN_DEPTH];
  logic [FW-1:0] fq_rd  [NP], fq_wr [NP];
  logic [FW:0]   fq_cnt [NP];
  logic          fq_pop [NP];
  logic          hv     [NP];
  msg_t          hm     [NP];

  always_comb
    for (int i = 0; i < NP; i++) begin
      hv[i]      = (fq_cnt[i] != '0);
      hm[i]      = fq_mem[i][fq_rd[i]];
      in_room[i] = (fq_cnt[i] < (FW+1)'(IN_DEPTH));
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NP; i++) begin
        fq_rd[i]  <= '0;
        fq_wr[i]  <= '0;
        fq_cnt[i] <= '0;
      end
    end else begin
      for (int i = 0; i < NP; i++) begin
        automatic logic push = in_valid[i] && in_room[i];
        if (push) begin
          fq_mem[i][fq_wr[i]] <= in_msg[i];
          fq_wr[i] <= fq_wr[i] + 1'b1;
        end
        if (fq_pop[i]) fq_rd[i] <= fq_rd[i] + 1'b1;
        fq_cnt[i] <= fq_cnt[i] + (FW+1)'(push) - (FW+1)'(fq_pop[i]);
      end
    end
  end

  logic [PW-1:0] rr    [NP];
  logic          load  [NP];
  logic [PW-1:0] sel   [NP];
  logic          dest_is [NP][NP];   // [input][output]

  always_comb begin
    for (int i = 0; i < NP; i++)
      for (int o = 0; o < NP; o++)
        dest_is[i][o] = hv[i] && (port_of(hm[i].dest) == o);
    for (int i = 0; i < NP; i++) fq_pop[i] = 1'b0;
    for (int o = 0; o < NP; o++) begin
      automatic logic found = 1'b0;
      load[o] = 1'b0;
      sel[o]  = '0;
      if (!out_valid[o] || out_ready[o]) begin
        for (int k = 0; k < NP; k++) begin
          automatic int i = (int'(rr[o]) + k) % NP;
          if (!found && dest_is[i][o]) begin
            found   = 1'b1;
            sel[o]  = PW'(i);
          end
        end
        load[o] = found;
        if (found) fq_pop[sel[o]] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NP; o++) begin
        out_valid[o] <= 1'b0;
        out_msg[o]   <= '0;
        rr[o]        <= '0;
      end
    end else begin
      for (int o = 0; o < NP; o++) begin
        if (load[o]) begin
          out_valid[o] <= 1'b1;
          out_msg[o]   <= hm[sel[o]];
          rr[o]        <= PW'((int'(sel[o]) + 1) % NP);
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
    end
  end

  // Nothing that arrives may be lost.
  for (genvar i = 0; i < NP; i++) begin : g_room
    a_room: assert property (@(posedge clk) disable iff (!rst_n) in_valid[i] |-> in_room[i]);
  end
endmodule
