// tb_rc_system_full: the reservoir computer at its full default size (100
// neurons, five read-out chains of 20, a 50-neuron RLS read-out, 50 us time
// step) through two complete FORCE-learning time steps (the first and the
// third; the second overlaps them and is not checked).
// The whole 5200-bit chip configuration is shifted in (a recurrent network:
// each neuron excited from F_EXC, inhibited from F_INH, excited by its
// right-hand neighbour and inhibited by the neuron seven places on), the
// RLS unit is initialised, and the system runs in FORCE mode with learning
// on and a constant teacher of 0.25. Checks per step:
//   - the step completes, tick to step_done within 2400 (read-out of
//     5 x 20 x 24 bits at 10 Mbit/s) + 50 x 24 (conversion) + 145 (RLS)
//     + 20 cycles, and the read-out alone within 2410 cycles;
//   - every read-out state x equals a bit-exact reference conversion of
//     its counts;
//   - z_P = x^T w with the weights held before the step;
//   - the RLS update moved the weights and reduced the error on the same
//     state (a posteriori error smaller than a priori);
//   - FORCE feeds clamp(z_P) back to the input.
module tb_rc_system_full;
  timeunit 1ns; timeprecision 1ps;
  import rc_pkg::*;

  localparam int N = N_NEURONS, N_RLS = 50, CW = CNT_W;
  localparam int CFG_W = N_IN * SLOT_CFG_W;

  logic          clk = 1'b0, rst = 1'b1;
  logic          pck = 1'b0, cfg_si = 1'b0, cfg_so;
  logic          run = 1'b0, force_mode = 1'b1, learn = 1'b1, rls_init = 1'b0;
  logic [15:0]   ts_cycles = 16'd2500;
  q_t            alpha, u_ext, z_teach, k_f, b_f, k_g, b_g;
  q_t            zp, u_applied;
  logic          step_done, init_done, f_exc, f_inh;
  logic [31:0]   step_count, overruns;
  logic [CW-1:0] cf_all [N];
  logic [CW-1:0] cg_all [N];
  q_t            x_state [N_RLS];
  q_t            w_state [N_RLS];
  logic [N-1:0]  div_out;
  int            checks = 0, failures = 0;
  longint        cyc = 0;

  always #10 clk = ~clk;
  always @(posedge clk) cyc++;

  rc_system dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  function automatic real qabs(q_t a);
    return (a < 0) ? -real'(a) / 65536.0 : real'(a) / 65536.0;
  endfunction

  function automatic logic [CFG_W-1:0] tile_word(int t);
    slot_cfg_t s [N_IN];
    logic [CFG_W-1:0] wd;
    s[0] = '{en: 1'b1, inh: 1'b0, w: 4'd9, src: SRC_W'(SRC_FEXC)};
    s[1] = '{en: 1'b1, inh: 1'b1, w: 4'd9, src: SRC_W'(SRC_FINH)};
    s[2] = '{en: 1'b1, inh: 1'b0, w: 4'd2, src: SRC_W'((t + 1) % N)};
    s[3] = '{en: 1'b1, inh: 1'b1, w: 4'd1, src: SRC_W'((t + 7) % N)};
    for (int k = 0; k < N_IN; k++) wd[k*SLOT_CFG_W +: SLOT_CFG_W] = s[k];
    return wd;
  endfunction

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  initial begin
    q_t     w_before [N_RLS];
    q_t     zexp, z_post;
    longint t_tick, t_spi, t_done;
    int     bad;

    alpha   = Q_ONE;
    u_ext   = '0;
    z_teach = to_q(0.25);
    k_f = to_q(0.65);  b_f = to_q(-0.35 / 0.65);
    k_g = to_q(-0.65); b_g = to_q(1.0);

    for (int t = N - 1; t >= 0; t--) begin
      logic [CFG_W-1:0] wd;
      wd = tile_word(t);
      for (int b = CFG_W - 1; b >= 0; b--) begin
        cfg_si = wd[b];
        #2 pck = 1'b1;
        #2 pck = 1'b0;
      end
    end
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(negedge clk) rls_init = 1'b1;
    @(negedge clk) rls_init = 1'b0;
    @(posedge clk iff init_done);
    #1;

    @(negedge clk) run = 1'b1;
    for (int n = 0; n < 2; n++) begin
      // Steps overlap: wait for the next tick, then take the weights when its
      // read-out ends (the previous step's update is finished by then).
      @(posedge clk iff dut.tick);
      t_tick = cyc;
      @(posedge clk iff dut.spi_done);
      t_spi = cyc;
      w_before = w_state;
      @(posedge clk iff step_done);
      t_done = cyc;
      #1;
      $display("step %0d: read-out %0d cycles, step %0d cycles, zp %f, u %f", n,
               t_spi - t_tick, t_done - t_tick, real'(zp) / 65536.0, real'(u_applied) / 65536.0);
      check("read-out time", t_spi - t_tick <= 2410);
      check("step time", t_done - t_tick <= 2400 + N_RLS * 24 + 145 + 20);
      bad = 0;
      for (int i = 0; i < N_RLS; i++) if (x_state[i] != ref_x(cf_all[i], cg_all[i])) bad++;
      check("x_state = conversion of cf_all / cg_all", bad == 0);
      zexp = '0;
      for (int j = 0; j < N_RLS; j++) zexp = zexp + qmul(w_before[j], x_state[j]);
      check("zp = x^T w", zp == zexp);
      check("weights updated", w_state != w_before);
      z_post = '0;
      for (int j = 0; j < N_RLS; j++) z_post = z_post + qmul(w_state[j], x_state[j]);
      check("a posteriori error below a priori error",
            qabs(z_teach - z_post) < qabs(z_teach - zexp));
      check("FORCE feedback", u_applied == clamp(zp));
    end
    check("no overrun", overruns == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
