// tb_lif_neuron: exercises the behavioural neuron model. Checks, against
// values computed here from the model's defining equations:
//   - at rest both VCOs run at F_MAX * 0.15 / 0.65 (V_cap = 0.5 V);
//   - holding an excitation input low raises V_cap as
//     v_inf + (v0 - v_inf) exp(-b t), speeding up f and slowing g;
//   - the leak brings V_cap back to mid-supply within milliseconds;
//   - an inhibition pulse lowers V_cap below 0.35 V, putting f at its floor
//     and speeding up g;
//   - a train of short excitation pulses raises V_cap step by step.
module tb_lif_neuron;
  timeunit 1ns; timeprecision 1ps;

  localparam real TAU_ON = 2000.0, TAU_LEAK = 500000.0, FMAX = 1.0e-3;
  logic [3:0] excb = 4'hF, inh = 4'h0;
  logic       f_out, g_out;
  function automatic real absr(real a); return (a < 0.0) ? -a : a; endfunction
  int         checks = 0, failures = 0;
  int         nf, ng;

  lif_neuron #(.N_IN(4), .TAU_ON(TAU_ON), .TAU_LEAK(TAU_LEAK)) dut (.*);

  always @(posedge f_out) nf++;
  always @(posedge g_out) ng++;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real f_of(real v);
    real f = FMAX * (v - 0.35) / 0.65;
    return (f > 2.0e-5) ? f : 2.0e-5;
  endfunction
  function automatic real g_of(real v);
    real g = FMAX * (0.65 - v) / 0.65;
    return (g > 3.0e-5) ? g : 3.0e-5;
  endfunction

  task automatic check_close(input string what, input real got, input real want, input real tol);
    checks++;
    if (absr(got - want) > tol) begin
      failures++;
      $display("FAIL %s: %f expected %f", what, got, want);
    end
  endtask

  // Count edges over a window; returns measured frequencies in GHz.
  task automatic rate(input real window, output real fm, output real gm);
    nf = 0; ng = 0;
    #(window);
    fm = real'(nf) / window;
    gm = real'(ng) / window;
  endtask

  initial begin
    real fm, gm, f0, g0, v_exp, b, a, vi, v_before;
    #10000;
    rate(100000.0, f0, g0);
    check_close("rest f", f0, f_of(0.5), 0.03 * f_of(0.5));
    check_close("rest g", g0, g_of(0.5), 0.03 * g_of(0.5));
    check_close("rest v", dut.vcap(), 0.5, 0.001);

    // excitation held for 1 us
    v_before = dut.vcap();
    excb[1] = 1'b0;
    #1000;
    excb[1] = 1'b1;
    b = 1.0 / TAU_LEAK + 1.0 / TAU_ON;
    a = 0.5 / TAU_LEAK + 1.0 / TAU_ON;
    vi = a / b;
    v_exp = vi + (v_before - vi) * $exp(-b * 1000.0);
    check_close("v after excitation", dut.vcap(), v_exp, 0.002);
    rate(10000.0, fm, gm);
    checks += 2;
    if (!(fm > 1.5 * f0)) begin failures++; $display("FAIL f did not rise: %g", fm); end
    if (!(gm < 0.7 * g0)) begin failures++; $display("FAIL g did not fall: %g", gm); end

    // leak back to mid-supply
    #3000000;
    check_close("v after leak", dut.vcap(), 0.5, 0.01);

    // inhibition held for 1 us
    inh[2] = 1'b1;
    #1000;
    inh[2] = 1'b0;
    check_close("v after inhibition", dut.vcap(), 0.303, 0.01);
    rate(20000.0, fm, gm);
    checks += 2;
    if (!(fm < 0.5 * f0)) begin failures++; $display("FAIL f did not drop: %g", fm); end
    if (!(gm > 1.3 * g0)) begin failures++; $display("FAIL g did not rise: %g", gm); end

    #3000000;
    // pulse train: 20 pulses of 40 ns, each must raise v
    for (int p = 0; p < 20; p++) begin
      v_before = dut.vcap();
      excb[0] = 1'b0;
      #40;
      excb[0] = 1'b1;
      #960;
      checks++;
      if (!(dut.vcap() > v_before)) begin
        failures++; $display("FAIL pulse %0d did not raise V_cap", p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
