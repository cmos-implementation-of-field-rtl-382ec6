// tb_rls_accel: runs the 50-input RLS accelerator against a bit-exact
// fixed-point reference of the RLS equations kept in this testbench, and
// against the learning goal itself.
//   - init: w = 1, P = alpha I, done after N cycles.
//   - RLS mode, 120 time steps with random states x in [0, 1) and a teacher
//     z = x^T w_true: zp, all w and all P entries must match the reference
//     bit for bit; the error must fall well below its starting value; one
//     update must take at most 2N + 45 cycles (the design budgets a
//     fraction of the 50 us time step, 2500 cycles at 50 MHz).
//   - output mode: zp matches, w stays unchanged, done within 4 cycles.
module tb_rls_accel;
  timeunit 1ns; timeprecision 1ps;
  import rc_pkg::*;

  localparam int N = 50;
  logic clk = 1'b0, rst = 1'b1, init = 1'b0, start = 1'b0, mode = 1'b0;
  q_t   alpha, err, zp;
  q_t   x [N];
  q_t   w_out [N];
  logic busy, done, zp_valid;
  int   checks = 0, failures = 0;

  // reference state
  q_t   rp [N][N];
  q_t   rw [N];
  q_t   w_true [N];

  always #10 clk = ~clk;

  rls_accel #(.N(N)) dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic q_t ref_zp();
    q_t s = '0;
    for (int j = 0; j < N; j++) s = s + qmul(rw[j], x[j]);
    return s;
  endfunction

  task automatic ref_update(input q_t e);
    q_t px [N];
    q_t gv [N];
    q_t s, sden, inv;
    logic [33:0] q;
    for (int i = 0; i < N; i++) begin
      px[i] = '0;
      for (int j = 0; j < N; j++) px[i] = px[i] + qmul(rp[i][j], x[j]);
    end
    s = '0;
    for (int j = 0; j < N; j++) s = s + qmul(px[j], x[j]);
    sden = (s > 0) ? Q_ONE + s : Q_ONE;
    q = 34'((64'd1 << 32) / 64'(unsigned'(sden)));
    inv = q_t'(q);
    for (int j = 0; j < N; j++) gv[j] = qmul(px[j], inv);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) rp[i][j] = rp[i][j] - qmul(gv[i], px[j]);
    for (int j = 0; j < N; j++) rw[j] = rw[j] + qmul(gv[j], e);
  endtask

  function automatic q_t teacher();
    q_t s = '0;
    for (int j = 0; j < N; j++) s = s + qmul(w_true[j], x[j]);
    return s;
  endfunction

  function automatic real qabs(q_t a);
    return (a < 0) ? -real'(a) / 65536.0 : real'(a) / 65536.0;
  endfunction

  // One time step; returns |err| in volts.
  task automatic step(input logic m, output real abs_err);
    int   cyc;
    q_t   z, e;
    @(negedge clk);
    start = 1'b1;
    mode  = m;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!zp_valid) begin @(negedge clk); cyc++; end
    z = ref_zp();
    checks++;
    if (zp != z) begin
      failures++;
      $display("FAIL zp %0d expected %0d", zp, z);
    end
    e = teacher() - zp;
    err = e;
    abs_err = qabs(e);
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (m && cyc > 2 * N + 45) begin
      failures++;
      $display("FAIL RLS update took %0d cycles", cyc);
    end
    if (!m && cyc > 4) begin
      failures++;
      $display("FAIL output-only step took %0d cycles", cyc);
    end
    if (m) ref_update(e);
  endtask

  task automatic compare_state(input string when);
    int bad = 0;
    for (int j = 0; j < N; j++) if (w_out[j] != rw[j]) bad++;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) if (dut.p[i][j] != rp[i][j]) bad++;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %s: %0d of %0d weights/P entries differ from the reference", when, bad, N + N * N);
    end
  endtask

  initial begin
    real e_first, e_last, e;
    int  cyc;
    alpha = Q_ONE;
    err   = '0;
    for (int j = 0; j < N; j++) begin
      x[j]      = '0;
      w_true[j] = q_t'(int'($urandom % 65536) - 32768);   // -0.5 .. 0.5
    end
    repeat (3) @(negedge clk);
    rst = 1'b0;

    // init
    @(negedge clk);
    init = 1'b1;
    @(negedge clk);
    init = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc > N + 2) begin failures++; $display("FAIL init took %0d cycles", cyc); end
    for (int i = 0; i < N; i++) begin
      rw[i] = Q_ONE;
      for (int j = 0; j < N; j++) rp[i][j] = (i == j) ? alpha : '0;
    end
    compare_state("after init");

    // RLS learning
    e_first = 0.0; e_last = 0.0;
    for (int n = 0; n < 120; n++) begin
      for (int j = 0; j < N; j++) x[j] = q_t'($urandom % 65536);
      step(1'b1, e);
      if (n < 10) e_first += e;
      if (n >= 110) e_last += e;
      if (n % 20 == 19) compare_state($sformatf("after step %0d", n));
    end
    $display("mean |err| first 10 steps %f, last 10 steps %f", e_first / 10.0, e_last / 10.0);
    checks++;
    if (!(e_last < 0.1 * e_first) || !(e_last / 10.0 < 0.15)) begin
      failures++;
      $display("FAIL RLS did not converge");
    end

    // output-only mode: weights frozen
    for (int k = 0; k < 5; k++) begin
      for (int j = 0; j < N; j++) x[j] = q_t'($urandom % 65536);
      step(1'b0, e);
    end
    compare_state("after output-only steps");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
