// tb_rc_system: end-to-end run of the reservoir computer at a reduced size
// (10 neurons in five chains of two, all 10 read out by the RLS unit; the
// analog time constants, clock, serial rate and time step are the
// defaults). The chip is programmed with a small recurrent network (each
// neuron: excitation from F_EXC, inhibition from F_INH, excitation from
// its right-hand neighbour, inhibition from the neuron three places on).
// Phases and what each checks:
//   A  configuration shifted in twice: the first word returns on cfg_so;
//   B  rls_init: init_done, w = 1;
//   C  open loop, output only, random u in [-1.5, 1.5]: u_applied is the
//      clamped u_ext; every x_state equals a bit-exact reference of the
//      counter-voltage conversion of cf_all / cg_all; zp = sum w x with the
//      weights unchanged;
//   D  open loop, RLS learning toward z = x^T w_true: the error falls;
//   E  FORCE mode: after every step u_applied equals clamp(z_P);
//   F  a time step shorter than the read-out: ticks are skipped and
//      counted as overruns.
// Each mechanism is counted; one that never happened is a failure:
// configuration read-back, init, output-only step, RLS step, open-loop
// input, FORCE feedback, input clamp, F_EXC and F_INH activity, the three
// conversion regions, overrun.
module tb_rc_system;
  timeunit 1ns; timeprecision 1ps;
  import rc_pkg::*;

  localparam int N = 10, NCH = 5, N_RLS = 10, CW = CNT_W;
  localparam int CFG_W = N_IN * SLOT_CFG_W;

  logic          clk = 1'b0, rst = 1'b1;
  logic          pck = 1'b0, cfg_si = 1'b0, cfg_so;
  logic          run = 1'b0, force_mode = 1'b0, learn = 1'b0, rls_init = 1'b0;
  logic [15:0]   ts_cycles = 16'd2500;
  q_t            alpha, u_ext, z_teach, k_f, b_f, k_g, b_g;
  q_t            zp, u_applied;
  logic          step_done, init_done, f_exc, f_inh;
  logic [31:0]   step_count, overruns;
  logic [CW-1:0] cf_all [N];
  logic [CW-1:0] cg_all [N];
  q_t            x_state [N_RLS];
  q_t            w_state [N_RLS];
  q_t            w_true  [N_RLS];
  logic [N-1:0]  div_out;
  int            checks = 0, failures = 0;

  typedef enum int {
    M_CFG, M_INIT, M_OUTONLY, M_RLS, M_OPENLOOP, M_FORCE, M_CLAMP,
    M_FEXC, M_FINH, M_REG_AVG, M_REG_F, M_REG_G, M_OVERRUN, M_NUM
  } mech_t;
  int    mech [M_NUM];
  string mech_name [M_NUM] = '{"config read-back", "RLS init", "output-only step",
    "RLS step", "open-loop input", "FORCE feedback", "input clamp", "F_EXC pulses",
    "F_INH pulses", "region average", "region V(f)", "region V(g)", "overrun"};

  always #10 clk = ~clk;

  rc_system #(.N(N), .NCH(NCH), .N_RLS(N_RLS)) dut (.*);

  initial begin
    #30000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // teacher for the learning phase: a fixed linear read-out of the state
  always_comb begin
    q_t s;
    s = '0;
    for (int j = 0; j < N_RLS; j++) s = s + qmul(w_true[j], x_state[j]);
    z_teach = s;
  end

  always @(posedge f_exc) mech[M_FEXC]++;
  always @(posedge f_inh) mech[M_FINH]++;
  always @(posedge clk) if (dut.u_cvc.done)
    for (int i = 0; i < N_RLS; i++) mech[M_REG_AVG + int'(dut.region[i])]++;

  function automatic q_t to_q(real r);
    return q_t'($rtoi(r * 65536.0 + ((r >= 0.0) ? 0.5 : -0.5)));
  endfunction

  function automatic q_t ref_x(logic [CW-1:0] c1, logic [CW-1:0] c2);
    longint f, g, vf, vg, avg;
    longint d1 = (c1 == 0) ? 4095 : c1;
    longint d2 = (c2 == 0) ? 4095 : c2;
    f  = 1638400 / d1;
    g  = 1638400 / d2;
    vf = longint'(q_t'(((f - longint'(b_f)) * longint'(k_f)) >>> 16));
    vg = longint'(q_t'(((g - longint'(b_g)) * longint'(k_g)) >>> 16));
    avg = longint'(q_t'(vf + vg)) >>> 1;
    if (avg > 42598) return q_t'(vf);
    if (avg < 22938) return q_t'(vg);
    return q_t'(avg);
  endfunction

  function automatic q_t clamp(q_t a);
    return (a > Q_ONE) ? Q_ONE : (a < Q_NEG_ONE) ? Q_NEG_ONE : a;
  endfunction

  function automatic logic [CFG_W-1:0] tile_word(int t, bit rnd);
    slot_cfg_t s [N_IN];
    logic [CFG_W-1:0] wd;
    if (rnd) begin
      for (int k = 0; k < N_IN; k++) s[k] = slot_cfg_t'($urandom);
    end else begin
      s[0] = '{en: 1'b1, inh: 1'b0, w: 4'd9,  src: SRC_W'(N)};
      s[1] = '{en: 1'b1, inh: 1'b1, w: 4'd9,  src: SRC_W'(N + 1)};
      s[2] = '{en: 1'b1, inh: 1'b0, w: 4'd2,  src: SRC_W'((t + 1) % N)};
      s[3] = '{en: 1'b1, inh: 1'b1, w: 4'd1,  src: SRC_W'((t + 3) % N)};
    end
    for (int k = 0; k < N_IN; k++) wd[k*SLOT_CFG_W +: SLOT_CFG_W] = s[k];
    return wd;
  endfunction

  task automatic program_chip(input bit rnd, input logic [CFG_W-1:0] prev [N],
                              output logic [CFG_W-1:0] cur [N], output int mism);
    mism = 0;
    for (int t = N - 1; t >= 0; t--) begin
      cur[t] = tile_word(t, rnd);
      for (int b = CFG_W - 1; b >= 0; b--) begin
        cfg_si = cur[t][b];
        #1;
        if (cfg_so != prev[t][b]) mism++;
        #1 pck = 1'b1;
        #2 pck = 1'b0;
      end
    end
  endtask

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  // Wait for the end of a time step and check it.
  task automatic wait_step(input string phase, output q_t z, output real abs_err);
    q_t w_before [N_RLS];
    q_t zexp, u_exp_open;
    w_before   = w_state;
    u_exp_open = clamp(u_ext);
    @(posedge clk iff step_done);
    #1;
    z = zp;
    abs_err = (z_teach > zp) ? real'(z_teach - zp) / 65536.0 : real'(zp - z_teach) / 65536.0;
    // conversion of the read-out neurons
    begin
      int bad = 0;
      for (int i = 0; i < N_RLS; i++) if (x_state[i] != ref_x(cf_all[i], cg_all[i])) bad++;
      check({phase, ": x_state = conversion of cf_all / cg_all"}, bad == 0);
    end
    zexp = '0;
    for (int j = 0; j < N_RLS; j++) zexp = zexp + qmul(w_before[j], x_state[j]);
    check({phase, ": zp = x^T w"}, zp == zexp);
    if (!learn) begin
      check({phase, ": weights frozen in output-only mode"}, w_state == w_before);
      mech[M_OUTONLY]++;
    end else begin
      mech[M_RLS]++;
    end
    if (force_mode) begin
      check({phase, ": FORCE feeds clamp(zp) back"}, u_applied == clamp(zp));
      mech[M_FORCE]++;
    end else begin
      check({phase, ": open-loop input applied"}, u_applied == u_exp_open);
      mech[M_OPENLOOP]++;
      if (u_ext != u_applied) mech[M_CLAMP]++;
    end
  endtask

  initial begin
    logic [CFG_W-1:0] c_a [N];
    logic [CFG_W-1:0] c_b [N];
    logic [CFG_W-1:0] zero [N];
    int  mism;
    q_t  z;
    real e, e_first, e_last;
    int  ov0;

    for (int m = 0; m < M_NUM; m++) mech[m] = 0;
    alpha = Q_ONE;
    u_ext = '0;
    k_f = to_q(0.65);  b_f = to_q(-0.35 / 0.65);
    k_g = to_q(-0.65); b_g = to_q(1.0);
    for (int j = 0; j < N_RLS; j++) w_true[j] = q_t'(int'($urandom % 65536) - 32768);

    // A: configuration
    for (int t = 0; t < N; t++) zero[t] = '0;
    program_chip(1'b1, zero, c_a, mism);
    program_chip(1'b0, c_a, c_b, mism);
    check("configuration read back", mism == 0);
    if (mism == 0) mech[M_CFG]++;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;

    // B: init
    @(negedge clk) rls_init = 1'b1;
    @(negedge clk) rls_init = 1'b0;
    @(posedge clk iff init_done);
    mech[M_INIT]++;
    #1;
    begin
      int bad = 0;
      for (int j = 0; j < N_RLS; j++) if (w_state[j] != Q_ONE) bad++;
      check("init sets w = 1", bad == 0);
    end

    // C: open loop, output only
    @(negedge clk);
    run = 1'b1;
    for (int n = 0; n < 8; n++) begin
      u_ext = q_t'(int'($urandom % 196608) - 98304);   // -1.5 .. 1.5
      wait_step("open loop, output only", z, e);
    end

    // D: open loop, learning
    learn = 1'b1;
    e_first = 0.0; e_last = 0.0;
    for (int n = 0; n < 40; n++) begin
      u_ext = q_t'(int'($urandom % 131072) - 65536);
      wait_step("open loop, RLS", z, e);
      if (n >= 2 && n < 7) e_first += e;
      if (n >= 35) e_last += e;
    end
    $display("RLS: mean |err| steps 2-6 %f, steps 35-39 %f", e_first / 5.0, e_last / 5.0);
    check("RLS error falls", e_last < 0.3 * e_first);

    // E: FORCE
    force_mode = 1'b1;
    for (int n = 0; n < 8; n++) wait_step("FORCE", z, e);

    // F: overrun with a too-short step
    force_mode = 1'b0;
    learn      = 1'b0;
    ov0        = int'(overruns);
    ts_cycles  = 16'd200;     // shorter than the 240-cycle read-out of 2 x 24 bits
    repeat (12000) @(posedge clk);
    check("short time steps are counted as overruns", int'(overruns) > ov0);
    mech[M_OVERRUN] = int'(overruns) - ov0;
    run = 1'b0;
    check("step counter", int'(step_count) >= 56);

    for (int m = 0; m < M_NUM; m++) begin
      $display("mechanism %-18s %0d", mech_name[m], mech[m]);
      check({"mechanism exercised: ", mech_name[m]}, mech[m] > 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
