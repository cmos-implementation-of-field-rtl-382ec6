// route_mux: one configurable routing path of the reservoir fabric. It
// selects, by a static configuration code, which oscillation reaches a
// weight module: one of the N neuron positive-VCO outputs, or one of the
// two reservoir inputs F_EXC (code N) and F_INH (code N+1). Codes above
// N+1 select a constant 0 (path unused).
//
// The chip builds this connectivity with an island-style FPGA fabric of
// buffered multiplexers (channel tracks, connection and switch boxes,
// up to 100 tracks per direction) generated by an FPGA architecture tool.
// The paper does not give that fabric's structure, so this design uses the
// simplest circuit with the same function: a full N+2 input multiplexer per
// weight-module input, i.e. any source can reach any input, which is what
// the arbitrary connectivity matrix M(N, N+2) needs. Purely combinational.
module route_mux #(
  parameter int N     = 100,
  parameter int SRC_W = 7
) (
  input  logic [N-1:0]     neuron_f,
  input  logic             f_exc,
  input  logic             f_inh,
  input  logic [SRC_W-1:0] sel,
  output logic             out
);
  timeunit 1ns; timeprecision 1ps;

  logic [N+1:0] sources;
  assign sources = {f_inh, f_exc, neuron_f};

  always_comb begin
    if (int'(sel) < N + 2) out = sources[sel];
    else                   out = 1'b0;
  end
endmodule
