// meas_router: routes measurement rounds from the qubit-controller channels of a leaf to
// its decoder instances.
//
// Each channel carries one measurement round (the defects of one logical qubit's ancillas
// for one round) per valid/ready transfer. The routing table `route` names, for every
// channel, the decoder instance that decodes that qubit; the coordinator sets it up once
// (statically, as in the paper) and it does not change during decoding. When several
// channels name the same instance, the lowest-numbered valid channel wins the cycle and the
// others wait (ready low). The path is combinational: a round reaches the instance in the
// cycle it is offered. The fixed-priority arbitration and the handshake are this design's
// choices.
module meas_router #(
  parameter int NCH = 25,
  parameter int NQ  = 25,
  parameter int W   = 25
) (
  input  logic [NCH-1:0] in_valid,
  input  logic [W-1:0]   in_data [NCH],
  output logic [NCH-1:0] in_ready,
  input  logic [7:0]     route   [NCH],
  output logic [NQ-1:0]  out_valid,
  output logic [W-1:0]   out_data [NQ],
  input  logic [NQ-1:0]  out_ready
);
  always_comb begin
    in_ready = '0;
    for (int j = 0; j < NQ; j++) begin
      automatic logic taken = 1'b0;
      out_valid[j] = 1'b0;
      out_data[j]  = '0;
      for (int i = 0; i < NCH; i++)
        if (!taken && in_valid[i] && int'(route[i]) == j) begin
          taken        = 1'b1;
          out_valid[j] = 1'b1;
          out_data[j]  = in_data[i];
          in_ready[i]  = out_ready[j];
        end
    end
  end
endmodule
