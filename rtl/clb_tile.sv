// clb_tile: one tile of the reservoir chip, i.e. one configurable logic
// block (CLB) holding a single neuron and everything around it.
//
// Contents, in signal order:
//   - a configuration segment (part of the chip-wide SI -> SO chain) that
//     holds N_IN slot configurations {en, inh, w, src};
//   - per slot, a routing multiplexer choosing the slot's source among all
//     neuron positive-VCO outputs and the inputs F_EXC / F_INH, and a weight
//     module converting that oscillation into width-weighted pulses;
//   - the neuron: slot k drives excitation input excb[k] when its inh bit is
//     0 and inhibition input inh[k] when it is 1, and leaves the other input
//     idle (excb high, inh low); a disabled slot drives neither;
//   - the frequency counters and the read-out shift register (freq_extract),
//     chained to the neighbouring tiles through si / so;
//   - a frequency divider on the positive VCO for observation.
//
// The split into CLB, neuron, weight modules, counters and divider follows
// the design. The number of slots per neuron, the slot configuration format
// and the exclusive excitation/inhibition steering are this design's
// choices (the paper says only that each weight module output goes to either
// an excitation or an inhibition port). All timing is that of the parts:
// configuration on pck, counters on clk, read-out on sclk, analog pulses
// asynchronous.
//
// Reset: rst clears the ripple frequency divider asynchronously (its stages
// are clocked by the oscillation, not by clk) and the clk-domain counters
// synchronously; both are cleared by the same reset pulse, so the mix of
// the two reset styles on one net is intended.
module clb_tile
  import rc_pkg::*;
#(
  parameter int  N        = 100,
  parameter int  NIN      = 4,
  parameter int  CW       = 12,
  parameter int  DIV_STG  = 4,
  parameter real D_NS     = 5.0,
  parameter real TAU_ON   = 2000.0,
  parameter real TAU_LEAK = 500000.0,
  parameter real V_INIT   = 0.5
) (
  // configuration chain
  input  logic          pck,
  input  logic          cfg_si,
  output logic          cfg_so,
  // routing
  input  logic [N-1:0]  neuron_f,     // all neurons' positive VCOs
  input  logic          f_exc,
  input  logic          f_inh,
  output logic          f_out,        // this neuron's positive VCO
  output logic          g_out,        // this neuron's negative VCO
  // measurement and read-out
  input  logic          clk,
  input  logic          rst,
  input  logic          sclk,
  input  logic          sload,
  input  logic          si,
  output logic          so,
  output logic [CW-1:0] cf,
  output logic [CW-1:0] cg,
  // observation
  output logic          div_out
);
  timeunit 1ns; timeprecision 1ps;

  localparam int CFG_W = NIN * SLOT_CFG_W;

  logic [CFG_W-1:0] cfg_bits;
  slot_cfg_t        slot [NIN];
  logic [NIN-1:0]   route_out, p_inh, p_excb;
  logic [NIN-1:0]   n_excb, n_inh;

  config_segment #(.WIDTH(CFG_W)) u_cfg (
    .pck(pck), .si(cfg_si), .so(cfg_so), .q(cfg_bits)
  );

  for (genvar k = 0; k < NIN; k++) begin : g_slot
    assign slot[k] = slot_cfg_t'(cfg_bits[k*SLOT_CFG_W +: SLOT_CFG_W]);

    route_mux #(.N(N), .SRC_W(SRC_W)) u_route (
      .neuron_f(neuron_f), .f_exc(f_exc), .f_inh(f_inh),
      .sel(slot[k].src), .out(route_out[k])
    );

    weight_module #(.W_BITS(W_BITS), .D_NS(D_NS)) u_weight (
      .in(route_out[k]), .w(slot[k].w),
      .out_inh(p_inh[k]), .out_excb(p_excb[k])
    );

    assign n_inh[k]  = slot[k].en &  slot[k].inh & p_inh[k];
    assign n_excb[k] = ~(slot[k].en & ~slot[k].inh) | p_excb[k];
  end

  lif_neuron #(
    .N_IN(NIN), .TAU_ON(TAU_ON), .TAU_LEAK(TAU_LEAK), .V_INIT(V_INIT)
  ) u_neuron (
    .excb(n_excb), .inh(n_inh), .f_out(f_out), .g_out(g_out)
  );

  freq_extract #(.CNT_W(CW)) u_extract (
    .clk(clk), .rst(rst), .f_osc(f_out), .g_osc(g_out),
    .sclk(sclk), .sload(sload), .si(si), .so(so), .cf(cf), .cg(cg)
  );

  freq_divider #(.STAGES(DIV_STG)) u_div (
    .rst(rst), .in(f_out), .out(div_out)
  );
endmodule
