// tb_logical_processor: self-checking test of the root's logical-level processor.
//
// Loads a short program: three sends, a wait for the result of qubit 3 block 2, a
// conditional send taken on that result, one skipped, a wait for qubit 5 block 0, a final
// send and the end. The bench stalls the router (tx_room low) for a while, feeds results
// for other blocks and qubits first (which must not release the wait), and then the
// awaited ones. It checks the order and content of the messages sent, that nothing is
// sent while stalled or waiting, that every result is passed to the user one cycle later,
// the conditional counters, and that `running` drops at the end.
module tb_logical_processor;
  import deconet_pkg::*;

  localparam int PD = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            prog_we = 1'b0, start = 1'b0, running, res_valid, tx_valid, tx_room = 1'b1;
  logic            rx_valid = 1'b0, rx_ready;
  logic [3:0]      prog_addr = '0;
  lp_instr_t       prog_data = '0;
  msg_t            res_msg, tx_msg, rx_msg = '0;
  logic [15:0]     n_cond_taken, n_cond_skipped;

  logical_processor #(.PROG_DEPTH(PD), .NQ_TOT(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic msg_t mk(input int dest, input int hdr, input int pl);
    return '{dest: 8'(dest), hdr: 8'(hdr), payload: 48'(pl)};
  endfunction

  msg_t sent [$];
  int   n_res = 0;
  always @(posedge clk) begin
    if (rst_n && tx_valid) begin
      check(tx_room, "send only with room");
      sent.push_back(tx_msg);
    end
    if (rst_n && res_valid) n_res++;
  end

  task automatic load(input int a, input lp_instr_t ins);
    @(negedge clk);
    prog_we = 1'b1; prog_addr = 4'(a); prog_data = ins;
    @(negedge clk);
    prog_we = 1'b0;
  endtask

  task automatic result(input int q, input int blk, input logic v);
    @(negedge clk);
    rx_valid = 1'b1;
    rx_msg   = '{dest: 8'd0, hdr: H_RESULT, payload: {23'd0, v, 16'(blk), 8'(q)}};
    @(posedge clk);
    #1;
    check(res_valid && res_msg == rx_msg, "result passed to the user");
    @(negedge clk);
    rx_valid = 1'b0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    load(0, '{op: OP_SEND,   q: 8'd0, val: 1'b0, msg: mk(1, H_SET_BOUNDARY, 'h201)});
    load(1, '{op: OP_SEND,   q: 8'd0, val: 1'b0, msg: mk(2, H_SET_ROUTE, 'h0001)});
    load(2, '{op: OP_SEND,   q: 8'd0, val: 1'b0, msg: mk(1, H_DECODE, 2)});
    load(3, '{op: OP_WAIT,   q: 8'd3, val: 1'b0, msg: mk(0, H_NOP, 2)});
    load(4, '{op: OP_SENDIF, q: 8'd3, val: 1'b1, msg: mk(3, H_SET_BOUNDARY, 'h101)});
    load(5, '{op: OP_SENDIF, q: 8'd3, val: 1'b0, msg: mk(4, H_SET_BOUNDARY, 'h001)});
    load(6, '{op: OP_WAIT,   q: 8'd5, val: 1'b0, msg: mk(0, H_NOP, 0)});
    load(7, '{op: OP_SEND,   q: 8'd0, val: 1'b0, msg: mk(2, H_DECODE, 3)});
    load(8, '{op: OP_END,    q: 8'd0, val: 1'b0, msg: '0});
    @(negedge clk);
    tx_room = 1'b0;
    start   = 1'b1;
    @(negedge clk);
    start = 1'b0;
    repeat (10) @(negedge clk);
    check(running && sent.size() == 0, "stalled by the router");
    tx_room = 1'b1;
    repeat (10) @(negedge clk);
    check(sent.size() == 3, "three sends, then waiting");
    result(3, 1, 1'b1);                // older block: must not release the wait
    result(4, 2, 1'b1);                // other qubit
    repeat (5) @(negedge clk);
    check(sent.size() == 3, "wait not released by other results");
    result(3, 2, 1'b1);
    repeat (5) @(negedge clk);
    check(sent.size() == 4, "conditional send taken on the awaited result");
    check(n_cond_taken == 1 && n_cond_skipped == 1, "conditional counters");
    result(5, 0, 1'b0);
    repeat (5) @(negedge clk);
    check(!running, "program ended");
    check(sent.size() == 5, "five messages in all");
    if (sent.size() == 5) begin
      check(sent[0] == mk(1, H_SET_BOUNDARY, 'h201), "message 0");
      check(sent[1] == mk(2, H_SET_ROUTE, 'h0001), "message 1");
      check(sent[2] == mk(1, H_DECODE, 2), "message 2");
      check(sent[3] == mk(3, H_SET_BOUNDARY, 'h101), "message 3 (conditional)");
      check(sent[4] == mk(2, H_DECODE, 3), "message 4");
    end
    check(n_res == 4, "every result passed on");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
