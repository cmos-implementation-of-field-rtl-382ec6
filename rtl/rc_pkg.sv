// rc_pkg: types and constants shared by the field-programmable spiking
// reservoir (the chip side) and its measurement/learning logic (the FPGA
// side).
//
// Numbers that come straight from the design description: 100 neurons,
// a 50 MHz counting/system clock, 4 weight bits per weight module, five
// serial extraction channels at 10 Mbit/s, a 50-neuron RLS datapath
// and the 0.35 V / 0.65 V validity thresholds of the two VCOs.
// Numbers chosen here: 4 weight-module inputs per neuron, 12-bit
// frequency counters (the largest width whose 100 x 2 counts still fit
// in 50 us over five 10 Mbit/s channels), and Q16.16 fixed point for
// every real-valued quantity on the FPGA side.
package rc_pkg;
  timeunit 1ns; timeprecision 1ps;

  // ---- chip ----
  localparam int unsigned N_NEURONS  = 100;  // 100 CLBs, one neuron each
  localparam int unsigned N_IN       = 4;    // weight modules per neuron (own choice)
  localparam int unsigned W_BITS     = 4;    // weight bits w[0:3]
  localparam int unsigned N_TAPS     = 1 << W_BITS; // 16 delay cells
  localparam int unsigned SRC_W      = 7;    // source select: 100 neurons + F_EXC + F_INH
  localparam int unsigned CNT_W      = 12;   // frequency counter width (own choice)
  localparam int unsigned N_CHAINS   = 5;    // serial extraction channels
  localparam int unsigned CLK_HZ     = 50_000_000; // f_base

  // Routing source numbering: 0..N-1 neuron positive VCOs, then inputs.
  localparam int unsigned SRC_FEXC   = N_NEURONS;
  localparam int unsigned SRC_FINH   = N_NEURONS + 1;

  // Configuration of one weight-module slot of a CLB.
  typedef struct packed {
    logic              en;   // slot drives the neuron
    logic              inh;  // 1: inhibition port, 0: excitation port
    logic [W_BITS-1:0] w;    // pulse-width code
    logic [SRC_W-1:0]  src;  // routing source
  } slot_cfg_t;
  localparam int unsigned SLOT_CFG_W = $bits(slot_cfg_t);   // 13
  localparam int unsigned TILE_CFG_W = N_IN * SLOT_CFG_W;   // 52

  // ---- FPGA side fixed point ----
  localparam int unsigned QW    = 32;        // Q16.16
  localparam int unsigned QFRAC = 16;
  typedef logic signed [QW-1:0] q_t;
  localparam q_t Q_ONE     = q_t'(1 << QFRAC);
  localparam q_t Q_NEG_ONE = -q_t'(1 << QFRAC);

  // Q16.16 multiply, truncating toward minus infinity.
  function automatic q_t qmul(q_t a, q_t b);
    logic signed [2*QW-1:0] p;
    p = 64'(a) * 64'(b);
    return q_t'(p >>> QFRAC);
  endfunction

  // Saturate to the reservoir input range [-1, 1].
  function automatic q_t qclamp1(q_t a);
    if (a > Q_ONE) return Q_ONE;
    if (a < Q_NEG_ONE) return Q_NEG_ONE;
    return a;
  endfunction
endpackage
