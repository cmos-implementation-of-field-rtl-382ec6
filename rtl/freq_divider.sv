// freq_divider: divides a neuron's oscillation by 2^STAGES so it can be
// observed off chip at a lower rate.
//
// The chip has one frequency divider per neuron, fed by the neuron output,
// but the paper gives neither its ratio nor its circuit. This design uses
// the simplest divider: a ripple chain of STAGES toggle flip-flops, each
// clocked by the previous stage's output, with an asynchronous reset.
// out has a 50 % duty cycle and toggles on every 2^(STAGES-1)-th rising
// edge of in. STAGES = 4 (divide by 16) is this design's choice.
module freq_divider #(
  parameter int STAGES = 4
) (
  input  logic rst,
  input  logic in,
  output logic out
);
  timeunit 1ns; timeprecision 1ps;

  logic [STAGES:0] stage;
  assign stage[0] = in;

  for (genvar s = 0; s < STAGES; s++) begin : g_tff
    always_ff @(posedge stage[s] or posedge rst) begin
      if (rst) stage[s+1] <= 1'b0;
      else     stage[s+1] <= ~stage[s+1];
    end
  end

  assign out = stage[STAGES];
endmodule
