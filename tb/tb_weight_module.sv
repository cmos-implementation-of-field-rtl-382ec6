// tb_weight_module: drives the weight module with a 1 MHz square wave for
// each of the 16 weight codes and measures the inhibition pulses: one pulse
// per rising input edge, width (w+1) * 5 ns, and the excitation output must
// be its exact complement (a negative pulse of the same width).
module tb_weight_module;
  timeunit 1ns; timeprecision 1ps;

  localparam real D = 5.0;
  logic       in = 1'b0;
  logic [3:0] w;
  logic       out_inh, out_excb;
  function automatic real absr(real a); return (a < 0.0) ? -a : a; endfunction
  int         checks = 0, failures = 0, n_pulses = 0;
  realtime    t_rise, width;

  weight_module #(.W_BITS(4), .D_NS(D)) dut (.*);

  always @(posedge out_inh) begin
    t_rise = $realtime;
    n_pulses++;
  end
  always @(negedge out_inh) width = $realtime - t_rise;

  always @(out_inh or out_excb) begin
    #0.001;
    checks++;
    if (out_excb != ~out_inh) begin
      failures++;
      $display("FAIL excb is not the complement of inh at %t", $realtime);
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w = '0;
    #200;
    for (int k = 0; k < 16; k++) begin
      w = 4'(k);
      #1000;
      n_pulses = 0;
      for (int c = 0; c < 3; c++) begin
        #500 in = 1'b1;
        #500 in = 1'b0;
        checks++;
        if (absr(width - D * real'(k + 1)) > 0.01) begin
          failures++;
          $display("FAIL w=%0d: pulse width %f ns, expected %f", k, width, D * real'(k + 1));
        end
      end
      checks++;
      if (n_pulses != 3) begin
        failures++;
        $display("FAIL w=%0d: %0d pulses for 3 input periods", k, n_pulses);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
