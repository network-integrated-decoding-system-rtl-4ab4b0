// tb_msg_router: self-checking test of a tree-node message router.
//
// The router is set up as an intermediate node (own address 10, four children serving
// addresses 20-22, 23-25, 26-28 and 29-31). Every port sends random messages (when it has
// room) to random addresses, each tagged with its source port and a serial number; every
// output is randomly stalled. The bench works out the port each address belongs to and
// keeps one expected queue per source/destination pair: each message must come out of
// the right port, once, in order with the others of its pair, and none may be left at the
// end. It also checks the best case of one cycle through the input buffer and one through
// the output register, and that back-pressure and contention both happened.
module tb_msg_router;
  import deconet_pkg::*;

  localparam int NC = 4;
  localparam int NP = NC + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid [NP], in_room [NP], out_valid [NP], out_ready [NP];
  msg_t in_msg [NP], out_msg [NP];

  msg_router #(.NC(NC), .MY_ID(10), .CHILD_BASE(20), .SPAN(3), .IN_DEPTH(8)) dut (.*);

  int checks = 0, failures = 0;

  function automatic int port_for(input int dest);
    if (dest == 10) return NP - 1;
    if (dest >= 20 && dest < 32) return 1 + (dest - 20) / 3;
    return 0;
  endfunction

  msg_t exp_q [NP][NP][$];
  int   cyc = 0, serial = 0, n_stall = 0, n_contend = 0, min_lat = 1000;
  int   sent_at [int];
  logic gen_on = 1'b0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int o = 0; o < NP; o++) begin
        if (out_valid[o] && !out_ready[o]) n_stall++;
        if (out_valid[o] && out_ready[o]) begin
          automatic int s = int'(out_msg[o].payload[39:32]);
          checks++;
          if (s >= NP || exp_q[s][o].size() == 0) begin
            failures++;
            $display("FAIL: unexpected message %h on port %0d", out_msg[o], o);
          end else begin
            automatic msg_t m = exp_q[s][o].pop_front();
            if (m != out_msg[o]) begin
              failures++;
              $display("FAIL: port %0d got %h expected %h", o, out_msg[o], m);
            end
            if (cyc - sent_at[int'(m.payload[31:0])] < min_lat)
              min_lat = cyc - sent_at[int'(m.payload[31:0])];
          end
        end
      end
      for (int i = 0; i < NP; i++)
        if (in_valid[i]) begin
          exp_q[i][port_for(int'(in_msg[i].dest))].push_back(in_msg[i]);
          sent_at[int'(in_msg[i].payload[31:0])] = cyc;
        end
      for (int a = 0; a < NP; a++)
        for (int b = a + 1; b < NP; b++)
          if (dut.hv[a] && dut.hv[b] && port_for(int'(dut.hm[a].dest)) == port_for(int'(dut.hm[b].dest)))
            n_contend++;
    end
  end

  // stimulus, changed at the falling edge
  always @(negedge clk) begin
    for (int i = 0; i < NP; i++) begin
      out_ready[i] = $urandom_range(0, 3) != 0;
      in_valid[i]  = 1'b0;
      in_msg[i]    = '0;
      if (gen_on && in_room[i] && $urandom_range(0, 2) == 0) begin
        in_valid[i] = 1'b1;
        in_msg[i].dest    = 8'($urandom_range(0, 40));
        in_msg[i].hdr     = 8'($urandom);
        in_msg[i].payload = {8'd0, 8'(i), 32'(serial)};
        serial++;
      end
    end
  end

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // random traffic on every port, then a drain
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    gen_on = 1'b1;
    repeat (3000) @(posedge clk);
    gen_on = 1'b0;
    repeat (200) @(posedge clk);
    for (int i = 0; i < NP; i++)
      for (int o = 0; o < NP; o++) begin
        checks++;
        if (exp_q[i][o].size() != 0) begin
          failures++;
          $display("FAIL: %0d messages from %0d to %0d never delivered", exp_q[i][o].size(), i, o);
        end
      end
    checks++; if (min_lat != 2) begin failures++; $display("FAIL: best latency %0d", min_lat); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL: no back-pressure"); end
    checks++; if (n_contend == 0) begin failures++; $display("FAIL: no contention"); end
    $display("messages %0d, stalls %0d, contention %0d, best latency %0d", serial, n_stall,
             n_contend, min_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
