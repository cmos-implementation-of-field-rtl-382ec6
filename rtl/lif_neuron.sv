// lif_neuron: BEHAVIOURAL MODEL of the analog leaky integrate-and-fire
// neuron with its two voltage-controlled oscillators. It is not
// synthesizable; the silicon is a full-custom MOSCAP, switch transistors,
// current mirrors and two current-starved ring oscillators.
//
// What it models. The capacitor voltage v (0..VCC) is pulled toward VCC
// while any excitation input excb[i] is low, pulled toward ground while any
// inhibition input inh[i] is high, and always leaks toward VCC/2 through the
// non-ideal switches. Between input edges the voltage follows the exact
// solution of the linear ODE
//     dv/dt = (VCC/2 - v)/TAU_LEAK + n_exc (VCC - v)/TAU_ON - n_inh v/TAU_ON
// so the model is event driven and costs nothing while the inputs are idle.
// The positive VCO f_out oscillates at f(v), the negative VCO g_out at g(v):
// both are linear in v with a floor, f rising from the 0.35 V threshold to
// F_MAX at VCC, g falling from F_MAX at 0 V to the floor at 0.65 V, the
// shape of the characterisation curves of the design. The period is
// re-evaluated every half period.
//
// Interface: excb[N_IN] active-low excitation pulses, inh[N_IN] active-high
// inhibition pulses, f_out / g_out square waves. No clock, no reset.
// From the design: the port set, the leak toward mid-supply, the 0.35/0.65 V
// thresholds and the ~1 MHz maximum frequency. Own choices: TAU_ON,
// TAU_LEAK (the design only says the leak settles "in milliseconds") and
// the floor frequencies F_MIN_F / F_MIN_G.
module lif_neuron #(
  parameter int  N_IN     = 4,
  parameter real VCC      = 1.0,
  parameter real TAU_ON   = 2000.0,    // ns, switch RC time constant
  parameter real TAU_LEAK = 500000.0,  // ns, leakage time constant
  parameter real F_MAX    = 1.0e-3,    // GHz (1 MHz) at the rail
  parameter real F_MIN_F  = 2.0e-5,    // GHz (20 kHz) floor of f
  parameter real F_MIN_G  = 3.0e-5,    // GHz (30 kHz) floor of g
  parameter real V_TH_F   = 0.35,
  parameter real V_TH_G   = 0.65,
  parameter real V_INIT   = 0.5
) (
  input  logic [N_IN-1:0] excb,
  input  logic [N_IN-1:0] inh,
  output logic            f_out,
  output logic            g_out
);
  timeunit 1ns; timeprecision 1ps;

  real     v;        // capacitor voltage at time t_last
  realtime t_last;
  int      n_exc, n_inh;

  // Bring v up to the present time under the current drive.
  function automatic void advance();
    real dt, a, b, v_inf;
    dt = $realtime - t_last;
    if (dt > 0.0) begin
      b = 1.0 / TAU_LEAK + real'(n_exc + n_inh) / TAU_ON;
      a = (VCC / 2.0) / TAU_LEAK + real'(n_exc) * VCC / TAU_ON;
      v_inf = a / b;
      v = v_inf + (v - v_inf) * $exp(-b * dt);
      t_last = $realtime;
    end
  endfunction

  function automatic real freq_f(real vv);
    real f;
    f = F_MAX * (vv - V_TH_F) / (VCC - V_TH_F);
    return (f > F_MIN_F) ? f : F_MIN_F;
  endfunction

  function automatic real freq_g(real vv);
    real g;
    g = F_MAX * (V_TH_G - vv) / V_TH_G;
    return (g > F_MIN_G) ? g : F_MIN_G;
  endfunction

  initial begin
    v = V_INIT;
    t_last = 0.0;
    n_exc = 0;
    n_inh = 0;
  end

  always @(excb or inh) begin
    advance();
    n_exc = 0;
    n_inh = 0;
    for (int i = 0; i < N_IN; i++) begin
      if (!excb[i]) n_exc++;
      if (inh[i])   n_inh++;
    end
  end

  // Positive VCO
  initial begin
    f_out = 1'b0;
    forever begin
      advance();
      #(0.5 / freq_f(v));
      f_out = ~f_out;
    end
  end

  // Negative VCO
  initial begin
    g_out = 1'b0;
    forever begin
      advance();
      #(0.5 / freq_g(v));
      g_out = ~g_out;
    end
  end

  // Present capacitor voltage, for testbenches and monitors.
  function automatic real vcap();
    advance();
    return v;
  endfunction
endmodule
