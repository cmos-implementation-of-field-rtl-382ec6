// rc_system: a complete hardware reservoir computer. A field-programmable
// spiking reservoir chip (reservoir_chip) is driven and read by the logic
// of a measurement FPGA: an input frequency generator (freq_gen), a
// multi-channel serial sample extractor (spi_extractor), a counter-voltage
// conversion (cvc) and an RLS / linear read-out accelerator (rls_accel).
//
// One time step of TS cycles (ts_cycles, 2500 = 50 us at 50 MHz, or 6000 =
// 120 us for the open-loop benchmarks):
//   tick   the input u(n) is applied (open loop: u_ext; FORCE: the last z_P,
//          already applied when it was computed) and a read-out starts;
//   +48 us every neuron's counts c(f), c(g) are in cf_all / cg_all;
//   +24 us the first N_RLS neurons' states x are converted;
//   +3 us  z_P = x^T w is computed and, with learn = 1, the RLS update runs;
//          err = z_teach - z_P is formed here, as FORCE needs.
// The conversion and the read-out of the next step overlap, so the
// pipeline keeps a 50 us step; in FORCE mode z_P(n) reaches the reservoir
// input about 1.5 steps after its sample was taken. A tick that finds the
// read-out still busy is skipped and counted in overruns.
//
// Modes: force_mode selects the direct feedback of z_P into the reservoir
// input (FORCE) or the external input u_ext (open loop); learn selects RLS
// learning or output-only read-out; rls_init resets w = 1 and P = alpha I.
// The chip is programmed through pck / cfg_si / cfg_so before run is set.
// The host (a processor in the original system) supplies u_ext, z_teach
// and the calibration constants, records cf_all / cg_all for open-loop
// learning and solves the least-squares problem itself.
// From the design: the parts, their connection and the 50 us step. Own
// choices: the step sequencing, the overlap and the overrun rule.
//
// Reset: rst clears the ripple frequency divider asynchronously (its stages
// are clocked by the oscillation, not by clk) and the clk-domain counters
// synchronously; both are cleared by the same reset pulse, so the mix of
// the two reset styles on one net is intended.
module rc_system
  import rc_pkg::*;
#(
  parameter int  N        = N_NEURONS,
  parameter int  NCH      = N_CHAINS,
  parameter int  N_RLS    = 50,
  parameter real D_NS     = 5.0,
  parameter real TAU_ON   = 2000.0,
  parameter real TAU_LEAK = 500000.0
) (
  input  logic          clk,
  input  logic          rst,
  // chip programming
  input  logic          pck,
  input  logic          cfg_si,
  output logic          cfg_so,
  // run control
  input  logic          run,
  input  logic [15:0]   ts_cycles,
  input  logic          force_mode,
  input  logic          learn,
  input  logic          rls_init,
  input  q_t            alpha,
  input  q_t            u_ext,
  input  q_t            z_teach,
  // counter-voltage calibration
  input  q_t            k_f,
  input  q_t            b_f,
  input  q_t            k_g,
  input  q_t            b_g,
  // results
  output q_t            zp,
  output logic          step_done,
  output logic [31:0]   step_count,
  output logic [31:0]   overruns,
  output logic          init_done,
  output logic [CNT_W-1:0] cf_all [N],
  output logic [CNT_W-1:0] cg_all [N],
  output q_t            x_state [N_RLS],
  output q_t            w_state [N_RLS],
  output q_t            u_applied,
  output logic          f_exc,
  output logic          f_inh,
  output logic [N-1:0]  div_out
);
  timeunit 1ns; timeprecision 1ps;

  // ---- chip ----
  logic           ex_sclk, ex_load, ex_si;
  logic [NCH-1:0] ex_so;

  reservoir_chip #(
    .N(N), .NCH(NCH), .D_NS(D_NS), .TAU_ON(TAU_ON), .TAU_LEAK(TAU_LEAK)
  ) u_chip (
    .pck(pck), .si(cfg_si), .so(cfg_so),
    .f_exc(f_exc), .f_inh(f_inh),
    .clk(clk), .rst(rst),
    .ex_sclk(ex_sclk), .ex_load(ex_load), .ex_si(ex_si), .ex_so(ex_so),
    .div_out(div_out)
  );

  // ---- input frequency generation ----
  q_t u_reg;
  assign u_applied = u_reg;

  freq_gen u_fgen (
    .clk(clk), .rst(rst), .u(u_reg), .f_exc(f_exc), .f_inh(f_inh),
    .inc_exc(), .inc_inh()
  );

  // ---- sample extraction ----
  logic tick, spi_busy, spi_done;

  spi_extractor #(.NCH(NCH), .NPC(N / NCH)) u_spi (
    .clk(clk), .rst(rst), .start(tick && !spi_busy), .busy(spi_busy),
    .done(spi_done), .sclk(ex_sclk), .sload(ex_load), .sdo(ex_si),
    .sdi(ex_so), .cf(cf_all), .cg(cg_all)
  );

  // ---- counter-voltage conversion of the read-out neurons ----
  logic [CNT_W-1:0] cf_rls [N_RLS];
  logic [CNT_W-1:0] cg_rls [N_RLS];
  logic             cvc_busy, cvc_done;
  logic [1:0]       region [N_RLS];

  always_comb begin
    for (int i = 0; i < N_RLS; i++) begin
      cf_rls[i] = cf_all[i];
      cg_rls[i] = cg_all[i];
    end
  end

  cvc #(.N(N_RLS)) u_cvc (
    .clk(clk), .rst(rst), .start(spi_done), .busy(cvc_busy), .done(cvc_done),
    .cf(cf_rls), .cg(cg_rls), .k_f(k_f), .b_f(b_f), .k_g(k_g), .b_g(b_g),
    .x(x_state), .region(region)
  );

  // ---- RLS / read-out ----
  logic rls_busy, rls_done, zp_valid;
  q_t   err;

  assign err = z_teach - zp;

  rls_accel #(.N(N_RLS)) u_rls (
    .clk(clk), .rst(rst), .init(rls_init && !rls_busy), .alpha(alpha),
    .start(cvc_done), .mode(learn), .x(x_state), .err(err),
    .busy(rls_busy), .done(rls_done), .zp(zp), .zp_valid(zp_valid),
    .w_out(w_state)
  );

  // ---- time-step sequencing ----
  logic [15:0] tcnt;
  logic        init_pending;

  assign tick = run && (tcnt == 16'd0);

  always_ff @(posedge clk) begin
    if (rst) begin
      tcnt         <= '0;
      u_reg        <= '0;
      step_done    <= 1'b0;
      step_count   <= '0;
      overruns     <= '0;
      init_done    <= 1'b0;
      init_pending <= 1'b0;
    end else begin
      step_done <= 1'b0;
      init_done <= 1'b0;
      if (run) tcnt <= (tcnt >= ts_cycles - 16'd1) ? '0 : tcnt + 16'd1;
      else     tcnt <= '0;
      if (tick) begin
        if (!force_mode) u_reg <= qclamp1(u_ext);
        if (spi_busy)    overruns <= overruns + 32'd1;
      end
      if (rls_init && !rls_busy) init_pending <= 1'b1;
      if (rls_done) begin
        if (init_pending) begin
          init_pending <= 1'b0;
          init_done    <= 1'b1;
        end else begin
          step_done  <= 1'b1;
          step_count <= step_count + 32'd1;
          if (force_mode) u_reg <= qclamp1(zp);
        end
      end
    end
  end
endmodule
