// eos_link: behavioural model of one direction of the low-latency transceiver link between
// two FPGAs.
//
// The real link is a gigabit-transceiver core (serialiser, line coding and error
// correction over a 16 Gb/s lane) and is not synthesizable logic of this design, so this
// file only models what the network sees of it: a 64-bit message enters, and appears at
// the far end LAT clock cycles later, in order, one per cycle at most, without
// back-pressure. The default of 10 cycles stands for the published core-to-core latency of
// about 95 ns at the 100 MHz decoder clock; the cycle rounding is this model's choice.
module eos_link
  import deconet_pkg::*;
#(
  parameter int LAT = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  msg_t in_msg,
  output logic out_valid,
  output msg_t out_msg
);
  logic pv [LAT];
  msg_t pm [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        pv[i] <= 1'b0;
        pm[i] <= '0;
      end
    end else begin
      pv[0] <= in_valid;
      pm[0] <= in_msg;
      for (int i = 1; i < LAT; i++) begin
        pv[i] <= pv[i-1];
        pm[i] <= pm[i-1];
      end
    end
  end

  assign out_valid = pv[LAT-1];
  assign out_msg   = pm[LAT-1];
endmodule
