// tb_root_node: self-checking test of the root node (logical processor behind its router).
//
// A program sends one instruction to each of the four leaves, waits for the result of
// qubit 2 block 7, then conditionally sends to leaf 4. The bench checks that each message
// leaves on the link of the leaf it names, two cycles after the processor issued it
// (router input buffer and output register), that results arriving on the upward links
// from several leaves in the same cycle all reach the processor and the user, that the
// wait holds until the awaited result arrives, and that the conditional send follows it.
module tb_root_node;
  import deconet_pkg::*;

  localparam int NLEAF = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        prog_we = 1'b0, start = 1'b0, running, res_valid;
  logic [7:0]  prog_addr = '0;
  lp_instr_t   prog_data = '0;
  msg_t        res_msg;
  logic [15:0] n_cond_taken, n_cond_skipped;
  logic        down_valid [NLEAF], up_valid [NLEAF];
  msg_t        down_msg [NLEAF], up_msg [NLEAF];

  root_node dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int cyc = 0, n_res = 0;
  int issued_at [$];
  msg_t down [NLEAF][$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dut.lp_tx_valid) issued_at.push_back(cyc);
    if (rst_n && res_valid) n_res++;
    for (int l = 0; l < NLEAF; l++)
      if (rst_n && down_valid[l]) begin
        down[l].push_back(down_msg[l]);
        check(issued_at.size() > 0 && cyc - issued_at.pop_front() == 2, "two-cycle router latency");
      end
  end

  task automatic load(input int a, input lp_instr_t ins);
    @(negedge clk);
    prog_we = 1'b1; prog_addr = 8'(a); prog_data = ins;
    @(negedge clk);
    prog_we = 1'b0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < NLEAF; l++) begin up_valid[l] = 1'b0; up_msg[l] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < NLEAF; l++)
      load(l, '{op: OP_SEND, q: 8'd0, val: 1'b0,
                msg: '{dest: 8'(l + 1), hdr: H_DECODE, payload: 48'(l + 100)}});
    load(4, '{op: OP_WAIT, q: 8'd2, val: 1'b0, msg: '{dest: 8'd0, hdr: H_NOP, payload: 48'd7}});
    load(5, '{op: OP_SENDIF, q: 8'd2, val: 1'b1,
              msg: '{dest: 8'd4, hdr: H_SET_BOUNDARY, payload: 48'h201}});
    load(6, '{op: OP_END, q: 8'd0, val: 1'b0, msg: '0});
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    repeat (20) @(negedge clk);
    for (int l = 0; l < NLEAF; l++)
      check(down[l].size() == 1 && down[l][0].dest == 8'(l + 1) && down[l][0].payload == 48'(l + 100),
            "one instruction on each leaf link");
    // results from all four leaves at once; the last one is the awaited result
    for (int l = 0; l < NLEAF; l++) begin
      up_valid[l] = 1'b1;
      up_msg[l]   = '{dest: 8'd0, hdr: H_RESULT,
                      payload: {23'd0, 1'b1, (l == 3) ? 16'd7 : 16'd6, 8'(l == 3 ? 2 : l + 10)}};
    end
    @(negedge clk);
    for (int l = 0; l < NLEAF; l++) up_valid[l] = 1'b0;
    repeat (20) @(negedge clk);
    check(n_res == NLEAF, "all simultaneous results delivered");
    check(down[3].size() == 2 && down[3][1].hdr == H_SET_BOUNDARY, "conditional send to leaf 4");
    check(n_cond_taken == 1 && !running, "program finished after the wait");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
