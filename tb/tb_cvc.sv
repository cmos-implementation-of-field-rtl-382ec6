// tb_cvc: checks the counter-voltage conversion for 50 neurons.
// Part 1: counts synthesised from known voltages through the VCO
//   characteristic f = (V - 0.35) / 0.65 MHz, g = (0.65 - V) / 0.65 MHz
//   (count = 25 MHz / f) must convert back to V within 15 mV, using the
//   matching calibration k_f = 0.65, b_f = -0.5385, k_g = -0.65, b_g = 1.0.
// Part 2: random counts; every x[i] must equal a bit-exact Q16.16 reference
//   computed here, and all three regions (average, V(f) only, V(g) only)
//   must occur.
// The conversion of 50 neurons must finish within 50 * 24 + 4 cycles.
module tb_cvc;
  timeunit 1ns; timeprecision 1ps;
  import rc_pkg::*;

  localparam int N = 50, CW = 12;
  logic          clk = 1'b0, rst = 1'b1, start = 1'b0;
  logic          busy, done;
  logic [CW-1:0] cf [N];
  logic [CW-1:0] cg [N];
  q_t            k_f, b_f, k_g, b_g;
  q_t            x [N];
  logic [1:0]    region [N];
  real           v_true [N];
  int            checks = 0, failures = 0;
  int            seen [3];

  always #10 clk = ~clk;

  cvc #(.N(N), .CW(CW)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic q_t to_q(real r);
    return q_t'($rtoi(r * 65536.0 + ((r >= 0.0) ? 0.5 : -0.5)));
  endfunction

  function automatic logic [CW-1:0] count_of(real f_mhz);
    real c = 25.0 / f_mhz;
    if (c > 4095.0) return CW'(4095);
    return CW'($rtoi(c + 0.5));
  endfunction

  // Bit-exact reference of one conversion.
  function automatic q_t ref_x(logic [CW-1:0] c1, logic [CW-1:0] c2, output int reg_o);
    longint f, g, vf, vg, avg;
    longint d1 = (c1 == 0) ? 4095 : c1;
    longint d2 = (c2 == 0) ? 4095 : c2;
    f  = 1638400 / d1;
    g  = 1638400 / d2;
    vf = ((f - longint'(b_f)) * longint'(k_f)) >>> 16;
    vg = ((g - longint'(b_g)) * longint'(k_g)) >>> 16;
    vf = longint'(q_t'(vf));
    vg = longint'(q_t'(vg));
    avg = longint'(q_t'(vf + vg)) >>> 1;
    if (avg > 42598) begin reg_o = 1; return q_t'(vf); end
    if (avg < 22938) begin reg_o = 2; return q_t'(vg); end
    reg_o = 0;
    return q_t'(avg);
  endfunction

  task automatic convert();
    int cyc;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc > N * 24 + 4) begin
      failures++;
      $display("FAIL conversion took %0d cycles", cyc);
    end
  endtask

  initial begin
    int r;
    k_f = to_q(0.65);  b_f = to_q(-0.35 / 0.65);
    k_g = to_q(-0.65); b_g = to_q(1.0);
    seen = '{0, 0, 0};
    for (int i = 0; i < N; i++) begin cf[i] = '0; cg[i] = '0; end
    repeat (3) @(negedge clk);
    rst = 1'b0;

    // Part 1: known voltages 0.05 .. 0.95 V
    for (int i = 0; i < N; i++) begin
      real v, f, g;
      v = 0.05 + 0.9 * real'(i) / real'(N - 1);
      v_true[i] = v;
      f = (v - 0.35) / 0.65;  if (f < 0.02) f = 0.02;
      g = (0.65 - v) / 0.65;  if (g < 0.03) g = 0.03;
      cf[i] = count_of(f);
      cg[i] = count_of(g);
    end
    convert();
    for (int i = 0; i < N; i++) begin
      real got;
      got = real'(x[i]) / 65536.0;
      checks++;
      if (got - v_true[i] > 0.015 || v_true[i] - got > 0.015) begin
        failures++;
        $display("FAIL V=%f converted to %f (region %0d)", v_true[i], got, region[i]);
      end
    end

    // Part 2: random counts, bit-exact
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 0; i < N; i++) begin
        cf[i] = CW'(($urandom % 1300) + ((i % 7 == 0) ? 0 : 20));
        cg[i] = CW'(($urandom % 1300) + 20);
      end
      convert();
      for (int i = 0; i < N; i++) begin
        q_t e;
        e = ref_x(cf[i], cg[i], r);
        checks += 2;
        if (x[i] != e) begin
          failures++;
          $display("FAIL neuron %0d counts %0d/%0d: x %0d expected %0d", i, cf[i], cg[i], x[i], e);
        end
        if (int'(region[i]) != r) begin
          failures++;
          $display("FAIL neuron %0d region %0d expected %0d", i, region[i], r);
        end
        seen[r]++;
      end
    end
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (seen[k] == 0) begin
        failures++;
        $display("FAIL region %0d never exercised", k);
      end
    end
    $display("regions: average %0d, f-only %0d, g-only %0d", seen[0], seen[1], seen[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
