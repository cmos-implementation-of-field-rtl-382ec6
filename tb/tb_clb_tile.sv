// tb_clb_tile: one CLB tile (neuron, four weight-module slots with their
// routing multiplexers, configuration segment, counters, divider).
// Checks:
//   - configuration: a word shifted in on pck comes back out of cfg_so,
//     MSB first, when the next word is shifted in;
//   - all slots disabled: V_cap stays at mid-supply even with F_EXC running,
//     and c(f), c(g) equal the resting VCO half-period in 20 ns cycles;
//   - a slot routed from F_EXC to the excitation port raises V_cap, a
//     larger weight raising it faster; c(f) falls below the resting count;
//   - a slot routed from F_INH to the inhibition port lowers V_cap below
//     0.35 V; c(g) falls below the resting count;
//   - a slot routed from another neuron's positive VCO (neuron_f[37])
//     excites the neuron;
//   - c(f) agrees with the half-period of f_out timed here (within 2);
//   - div_out toggles at f_out / 16.
module tb_clb_tile;
  timeunit 1ns; timeprecision 1ps;
  import rc_pkg::*;

  localparam int N = 100, NIN = 4, CW = 12;
  localparam int CFG_W = NIN * SLOT_CFG_W;

  logic          pck = 1'b0, cfg_si = 1'b0, cfg_so;
  logic [N-1:0]  neuron_f = '0;
  logic          f_exc = 1'b0, f_inh = 1'b0, f_out, g_out;
  logic          clk = 1'b0, rst = 1'b1, sclk = 1'b0, sload = 1'b0, si = 1'b0, so;
  logic [CW-1:0] cf, cg;
  logic          div_out;
  int            checks = 0, failures = 0;
  int            n_f = 0, n_div = 0;
  realtime       t_f_last, f_half;

  always #10 clk = ~clk;
  always #500 f_exc = ~f_exc;              // 1 MHz
  always #500 f_inh = ~f_inh;
  always #700 neuron_f[37] = ~neuron_f[37];
  always @(f_out) begin
    f_half   = $realtime - t_f_last;
    t_f_last = $realtime;
  end
  always @(posedge f_out) n_f++;
  always @(posedge div_out) n_div++;

  clb_tile #(.N(N), .NIN(NIN), .CW(CW)) dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic slot_cfg_t slot(bit en, bit inh, int w, int src);
    slot_cfg_t s;
    s.en = en; s.inh = inh; s.w = W_BITS'(w); s.src = SRC_W'(src);
    return s;
  endfunction

  // Shift a configuration word in; return what came out of cfg_so.
  task automatic load(input slot_cfg_t s [NIN], output logic [CFG_W-1:0] out);
    logic [CFG_W-1:0] word;
    for (int k = 0; k < NIN; k++) word[k*SLOT_CFG_W +: SLOT_CFG_W] = s[k];
    for (int b = CFG_W - 1; b >= 0; b--) begin
      cfg_si = word[b];
      #5;
      out[b] = cfg_so;
      #5 pck = 1'b1;
      #10 pck = 1'b0;
    end
  endtask

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (v = %f, cf = %0d, cg = %0d)", what, dut.u_neuron.vcap(), cf, cg);
    end
  endtask

  initial begin
    slot_cfg_t        s [NIN];
    logic [CFG_W-1:0] prev, got, want;
    real              v0, v1, dv_small, dv_big, rest_half;
    int               rest_cnt;
    rest_half = 0.5 / (1.0e-3 * 0.15 / 0.65) / 20.0;   // cycles
    rest_cnt  = $rtoi(rest_half);

    // 1. disabled slots, readback
    for (int k = 0; k < NIN; k++) s[k] = slot(0, 0, 15, SRC_FEXC);
    load(s, prev);
    want = '0;
    for (int k = 0; k < NIN; k++) want[k*SLOT_CFG_W +: SLOT_CFG_W] = s[k];
    repeat (3) begin
      for (int k = 0; k < NIN; k++)
        s[k] = slot($urandom % 2, $urandom % 2, $urandom % 16, $urandom % 128);
      load(s, got);
      check("configuration read back through cfg_so", got == want);
      for (int k = 0; k < NIN; k++) want[k*SLOT_CFG_W +: SLOT_CFG_W] = s[k];
    end
    for (int k = 0; k < NIN; k++) s[k] = slot(0, k % 2, 15, (k % 2) ? SRC_FINH : SRC_FEXC);
    load(s, got);
    rst = 1'b0;
    #20000;
    check("disabled slots leave V_cap at rest", dut.u_neuron.vcap() > 0.499 && dut.u_neuron.vcap() < 0.501);
    check("resting c(f)", int'(cf) >= rest_cnt - 1 && int'(cf) <= rest_cnt + 2);
    check("resting c(g)", int'(cg) >= rest_cnt - 1 && int'(cg) <= rest_cnt + 2);
    check("c(f) matches timed half period", int'(cf) - $rtoi(f_half / 20.0) <= 2 && $rtoi(f_half / 20.0) - int'(cf) <= 2);

    // 2. excitation from F_EXC, weight 3 then weight 15
    s[0] = slot(1, 0, 3, SRC_FEXC);
    v0 = dut.u_neuron.vcap();
    load(s, got);
    #5000;
    s[0] = slot(0, 0, 3, SRC_FEXC);
    load(s, got);
    v1 = dut.u_neuron.vcap();
    dv_small = v1 - v0;
    s[0] = slot(1, 0, 15, SRC_FEXC);
    load(s, got);
    #5000;
    s[0] = slot(0, 0, 15, SRC_FEXC);
    load(s, got);
    dv_big = dut.u_neuron.vcap() - v1;
    $display("excitation: dV %f (w=3), %f (w=15)", dv_small, dv_big);
    check("F_EXC excitation raises V_cap", dv_small > 0.005);
    check("larger weight raises V_cap faster", dv_big > 2.0 * dv_small);
    s[0] = slot(1, 0, 15, SRC_FEXC);
    load(s, got);
    #20000;
    check("excited neuron: V_cap above 0.65 V", dut.u_neuron.vcap() > 0.65);
    check("excited neuron: c(f) below rest", int'(cf) < rest_cnt - 10);
    check("c(f) matches timed half period", int'(cf) - $rtoi(f_half / 20.0) <= 2 && $rtoi(f_half / 20.0) - int'(cf) <= 2);
    n_f = 0; n_div = 0;
    #200000;
    check("divider output at f_out / 16", n_div >= n_f / 16 - 1 && n_div <= n_f / 16 + 1);

    // 3. inhibition from F_INH
    s[0] = slot(0, 0, 15, SRC_FEXC);
    s[1] = slot(1, 1, 15, SRC_FINH);
    load(s, got);
    #30000;
    check("F_INH inhibition pulls V_cap below 0.35 V", dut.u_neuron.vcap() < 0.35);
    check("inhibited neuron: c(g) below rest", int'(cg) < rest_cnt - 10);

    // 4. excitation from another neuron
    s[1] = slot(0, 1, 15, SRC_FINH);
    s[2] = slot(1, 0, 15, 37);
    v0 = dut.u_neuron.vcap();
    load(s, got);
    #10000;
    check("neuron_f[37] excitation raises V_cap", dut.u_neuron.vcap() > v0 + 0.1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
