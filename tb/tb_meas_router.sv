// tb_meas_router: self-checking test of the measurement router.
//
// Random channel valids, routing tables and instance readies are applied for many cycles.
// For every input the bench decides on its own whether that channel is the one an instance
// takes (the lowest-numbered valid channel that names it) and checks out_valid, out_data and
// in_ready against that. Also checks that a channel routed to no existing instance is
// never accepted. Purely combinational, so every check is in the same cycle.
module tb_meas_router;
  localparam int NCH = 6;
  localparam int NQ  = 4;
  localparam int W   = 25;

  logic [NCH-1:0] in_valid, in_ready;
  logic [W-1:0]   in_data [NCH];
  logic [7:0]     route   [NCH];
  logic [NQ-1:0]  out_valid, out_ready;
  logic [W-1:0]   out_data [NQ];

  meas_router #(.NCH(NCH), .NQ(NQ), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_conflict = 0;
    for (int it = 0; it < 3000; it++) begin
      for (int i = 0; i < NCH; i++) begin
        in_valid[i] = $urandom_range(0, 3) != 0;
        in_data[i]  = W'($urandom);
        route[i]    = 8'($urandom_range(0, NQ));     // NQ: an instance that does not exist
      end
      out_ready = NQ'($urandom);
      #1;
      for (int i = 0; i < NCH; i++) begin
        automatic logic wins = in_valid[i] && route[i] < NQ;
        for (int k = 0; k < i; k++)
          if (in_valid[k] && route[k] == route[i]) wins = 1'b0;
        if (in_valid[i] && route[i] < NQ && !wins) n_conflict++;
        if (wins) begin
          check(out_valid[route[i]] && out_data[route[i]] == in_data[i], "winning channel delivered");
          check(in_ready[i] == out_ready[route[i]], "ready follows the instance");
        end else begin
          check(!in_ready[i], "losing or unrouted channel not accepted");
        end
      end
      for (int j = 0; j < NQ; j++) begin
        automatic logic any = 1'b0;
        for (int i = 0; i < NCH; i++) if (in_valid[i] && route[i] == j) any = 1'b1;
        check(out_valid[j] == any, "instance valid when some channel names it");
      end
      #9;
    end
    check(n_conflict > 0, "conflicts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
