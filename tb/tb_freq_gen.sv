// tb_freq_gen: applies several inputs u in [-1, 1] to the input frequency
// generator and counts rising edges of F_EXC and F_INH over a 200 us window
// at 50 MHz. Expected: F_EXC = 1 MHz * u for u > 0 and silent otherwise;
// F_INH = 1 MHz * |u| for u < 0 and silent otherwise; inputs beyond +-1 are
// clamped. The edge count must be within one of the ideal count.
module tb_freq_gen;
  timeunit 1ns; timeprecision 1ps;
  import rc_pkg::*;

  logic       clk = 1'b0, rst = 1'b1;
  q_t         u;
  logic       f_exc, f_inh;
  logic [23:0] inc_exc, inc_inh;
  function automatic real absr(real a); return (a < 0.0) ? -a : a; endfunction
  int         checks = 0, failures = 0;
  int         n_exc, n_inh;
  logic       pe, pi;

  always #10 clk = ~clk;

  freq_gen dut (.*);

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    pe <= f_exc;
    pi <= f_inh;
    if (f_exc && !pe) n_exc++;
    if (f_inh && !pi) n_inh++;
  end

  task automatic measure(input real uv);
    real exp_e, exp_i, uc;
    u = q_t'($rtoi(uv * 65536.0));
    uc = (uv > 1.0) ? 1.0 : (uv < -1.0) ? -1.0 : uv;
    repeat (100) @(posedge clk);
    n_exc = 0;
    n_inh = 0;
    repeat (10000) @(posedge clk);     // 200 us
    exp_e = (uc > 0.0) ? 200.0 * uc : 0.0;
    exp_i = (uc < 0.0) ? -200.0 * uc : 0.0;
    checks += 2;
    if (absr(real'(n_exc) - exp_e) > 1.01) begin
      failures++;
      $display("FAIL u=%f: %0d F_EXC edges, expected %f", uv, n_exc, exp_e);
    end
    if (absr(real'(n_inh) - exp_i) > 1.01) begin
      failures++;
      $display("FAIL u=%f: %0d F_INH edges, expected %f", uv, n_inh, exp_i);
    end
  endtask

  initial begin
    u = '0;
    pe = 1'b0; pi = 1'b0;
    n_exc = 0; n_inh = 0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    measure(1.0);
    measure(0.5);
    measure(0.11);
    measure(0.0);
    measure(-0.25);
    measure(-1.0);
    measure(2.5);
    measure(-3.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
