// tb_eos_link: self-checking test of the link model.
//
// Sends a random stream of messages (valid about half the cycles) into the default link and
// checks that each message appears at the far end exactly LAT cycles after it entered, in
// order, with its content unchanged, and that nothing appears that was not sent.
module tb_eos_link;
  import deconet_pkg::*;

  localparam int LAT = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, out_valid;
  msg_t in_msg = '0, out_msg;

  eos_link dut (.clk, .rst_n, .in_valid, .in_msg, .out_valid, .out_msg);

  int checks = 0, failures = 0;
  int cyc = 0;
  msg_t q_msg [$];
  int   q_cyc [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid) begin
      q_msg.push_back(in_msg);
      q_cyc.push_back(cyc);
    end
    if (rst_n && out_valid) begin
      checks++;
      if (q_msg.size() == 0) begin
        failures++;
        $display("FAIL: message out that was never sent");
      end else begin
        automatic msg_t m = q_msg.pop_front();
        automatic int   c = q_cyc.pop_front();
        if (m != out_msg || cyc - c != LAT) begin
          failures++;
          $display("FAIL: got %h after %0d cycles, expected %h after %0d", out_msg, cyc - c, m, LAT);
        end
      end
    end
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid = $urandom_range(0, 1);
      in_msg   = {$urandom, $urandom};
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (q_msg.size() != 0) begin
      failures++;
      $display("FAIL: %0d messages lost", q_msg.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
