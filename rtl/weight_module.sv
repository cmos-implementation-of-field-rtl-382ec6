// weight_module: turns an incoming oscillation (another neuron's positive
// VCO, or one of the reservoir inputs F_EXC / F_INH) into a train of short
// pulses whose width encodes a 4-bit synaptic weight.
//
// How it works: the input runs through a line of 16 delay cells. The tap
// after cell w+1 is selected by a two-level multiplexer tree (four 4:1
// multiplexers steered by w[1:0], one 4:1 multiplexer steered by w[3:2]),
// inverted, and ANDed with the undelayed input. Every rising edge of the
// input therefore yields one positive pulse of width (w+1) * D_NS:
// w = 0000 uses one delay (narrowest pulse), w = 1111 all sixteen (widest).
// out_inh is that positive pulse for an inhibition input of a neuron;
// out_excb is its complement, the negative pulse an excitation input takes.
//
// Interface: in (oscillation), w[3:0] (static configuration, w[0] the least
// significant bit), out_inh, out_excb. No clock: the timing is set by the
// delay cells. The structure (delay line, 4:1 multiplexer tree, AND,
// inverted output) follows the design; the bit order of w and the cell
// delay D_NS are this design's choices.
module weight_module #(
  parameter int  W_BITS = 4,
  parameter real D_NS   = 5.0
) (
  input  logic              in,
  input  logic [W_BITS-1:0] w,
  output logic              out_inh,
  output logic              out_excb
);
  timeunit 1ns; timeprecision 1ps;

  localparam int N_TAPS = 1 << W_BITS;

  logic [N_TAPS-1:0] tap;      // tap[k]: input after k+1 delay cells
  logic              delayed;

  for (genvar k = 0; k < N_TAPS; k++) begin : g_line
    if (k == 0) begin : g_first
      delay_cell #(.D_NS(D_NS)) u_dly (.a(in), .y(tap[0]));
    end else begin : g_next
      delay_cell #(.D_NS(D_NS)) u_dly (.a(tap[k-1]), .y(tap[k]));
    end
  end

  // Multiplexer tree: first level on the low bits, second on the high bits.
  localparam int LO = W_BITS / 2;
  localparam int NG = N_TAPS >> LO;
  logic [NG-1:0] first_level;
  always_comb begin
    for (int g = 0; g < NG; g++)
      first_level[g] = tap[g * (1 << LO) + int'(w[LO-1:0])];
    delayed = first_level[w[W_BITS-1:LO]];
  end

  assign out_inh  = in & ~delayed;
  assign out_excb = ~out_inh;
endmodule
