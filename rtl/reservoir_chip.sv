// reservoir_chip: the field-programmable spiking reservoir, N tiles (one
// neuron per tile) with programmable routing and weights.
//
// Structure:
//   - Configuration: the tiles' configuration segments form one chain,
//     SI -> tile 0 -> tile 1 -> ... -> tile N-1 -> SO, clocked by PCk. The
//     first bit shifted in ends in the most significant bit of tile N-1,
//     so a host sends tile N-1's configuration first.
//   - Connectivity: every tile sees every neuron's positive VCO and the two
//     reservoir inputs F_EXC and F_INH, so any connectivity matrix
//     M(N, N+2) with at most N_IN non-zero entries per row can be programmed.
//   - Read-out: the tiles form N_CHAINS serial chains of N/N_CHAINS tiles
//     (chain c holds tiles c*N/N_CHAINS ... (c+1)*N/N_CHAINS-1, in order).
//     All chains share the serial input ex_si, the read-out clock ex_sclk and
//     the load strobe ex_load; each has its own output ex_so[c]. After a load
//     the first bit out of chain c is the MSB of c(f) of its last tile.
//   - Observation: each tile's divided positive VCO on div_out.
// The chip's pads, virtual IO tiles and power domains are not modelled.
//
// The 100 neurons, the five read-out channels, the chained shift registers
// and the SI/SO/PCk programming follow the design; the chain order and the
// shared serial input are read off its block diagrams; tile numbering along
// the chains is this design's choice.
//
// Reset: rst clears the ripple frequency divider asynchronously (its stages
// are clocked by the oscillation, not by clk) and the clk-domain counters
// synchronously; both are cleared by the same reset pulse, so the mix of
// the two reset styles on one net is intended.
module reservoir_chip
  import rc_pkg::*;
#(
  parameter int  N        = N_NEURONS,
  parameter int  NIN      = N_IN,
  parameter int  NCH      = N_CHAINS,
  parameter int  CW       = CNT_W,
  parameter int  DIV_STG  = 4,
  parameter real D_NS     = 5.0,
  parameter real TAU_ON   = 2000.0,
  parameter real TAU_LEAK = 500000.0
) (
  // programming
  input  logic          pck,
  input  logic          si,
  output logic          so,
  // reservoir inputs (oscillations)
  input  logic          f_exc,
  input  logic          f_inh,
  // 50 MHz counting clock and reset
  input  logic          clk,
  input  logic          rst,
  // serial read-out
  input  logic          ex_sclk,
  input  logic          ex_load,
  input  logic          ex_si,
  output logic [NCH-1:0] ex_so,
  // observation
  output logic [N-1:0]  div_out
);
  timeunit 1ns; timeprecision 1ps;

  localparam int NPC = N / NCH;

  logic [N-1:0] neuron_f;
  logic [N-1:0] neuron_g;   // negative VCOs: measured inside the tiles only
  logic [N:0]   cfg_chain;
  logic [N-1:0] ex_in, ex_out;

  assign cfg_chain[0] = si;
  assign so = cfg_chain[N];

  for (genvar t = 0; t < N; t++) begin : g_tile
    if (t % NPC == 0) begin : g_head
      assign ex_in[t] = ex_si;
    end else begin : g_body
      assign ex_in[t] = ex_out[t-1];
    end

    clb_tile #(
      .N(N), .NIN(NIN), .CW(CW), .DIV_STG(DIV_STG), .D_NS(D_NS),
      .TAU_ON(TAU_ON), .TAU_LEAK(TAU_LEAK)
    ) u_tile (
      .pck(pck), .cfg_si(cfg_chain[t]), .cfg_so(cfg_chain[t+1]),
      .neuron_f(neuron_f), .f_exc(f_exc), .f_inh(f_inh),
      .f_out(neuron_f[t]), .g_out(neuron_g[t]),
      .clk(clk), .rst(rst), .sclk(ex_sclk), .sload(ex_load),
      .si(ex_in[t]), .so(ex_out[t]), .cf(), .cg(),
      .div_out(div_out[t])
    );
  end

  for (genvar c = 0; c < NCH; c++) begin : g_chain_out
    assign ex_so[c] = ex_out[c*NPC + NPC - 1];
  end
endmodule
