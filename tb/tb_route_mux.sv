// tb_route_mux: for every select code of a 100-neuron routing multiplexer,
// drives random source patterns and checks that the output follows exactly
// the selected neuron, F_EXC (code 100), F_INH (code 101), or is 0 for
// unused codes.
module tb_route_mux;
  timeunit 1ns; timeprecision 1ps;

  localparam int N = 100;
  logic [N-1:0] neuron_f;
  logic         f_exc, f_inh, out, expv;
  logic [6:0]   sel;
  int           checks = 0, failures = 0;

  route_mux #(.N(N), .SRC_W(7)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 128; s++) begin
      sel = 7'(s);
      for (int r = 0; r < 8; r++) begin
        neuron_f = {$urandom, $urandom, $urandom, $urandom};
        f_exc = 1'($urandom);
        f_inh = 1'($urandom);
        if (r == 0) begin
          // only the selected source high
          neuron_f = '0; f_exc = 1'b0; f_inh = 1'b0;
          if (s < N) neuron_f[s] = 1'b1;
          else if (s == N) f_exc = 1'b1;
          else if (s == N + 1) f_inh = 1'b1;
        end
        #1;
        expv = (s < N) ? neuron_f[s] : (s == N) ? f_exc : (s == N + 1) ? f_inh : 1'b0;
        checks++;
        if (out != expv) begin
          failures++;
          $display("FAIL sel=%0d: out %b expected %b", s, out, expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
