// freq_gen: converts the reservoir input u(n) into the two input
// oscillations of the chip, F_EXC and F_INH.
//
//   F_EXC = F * u    if u > 0, else 0
//   F_INH = F * |u|  if u < 0, else 0
//
// How it works: u (Q16.16, clamped to [-1, 1]) is split into its positive
// part and the magnitude of its negative part. Each part is multiplied by
// the constant STEP = F / f_clk * 2^ACC_W to form the increment of an
// ACC_W-bit accumulating counter clocked at f_clk = 50 MHz. The comparator
// "acc > 2^(ACC_W-1)" turns the sawtooth into a square wave of frequency
// inc * f_clk / 2^ACC_W, i.e. F * |part|. A zero part stops its counter and
// holds its output low.
//
// Interface: clk, rst (synchronous), u (sampled every cycle; the caller holds
// it for a time step), f_exc, f_inh (registered square waves), inc_exc /
// inc_inh (present increments, for observation). Resolution of the output
// frequency: f_clk / 2^ACC_W = 3 Hz.
// From the design: the sign split, the multiplication by F (about 1 MHz),
// the two counters at 50 MHz and the ">" comparator producing the outputs.
// Own choices: ACC_W, the comparison against half scale and Q16.16 input.
module freq_gen
  import rc_pkg::*;
#(
  parameter int          ACC_W  = 24,
  parameter longint      F_HZ   = 1_000_000,
  parameter longint      CLK_F  = 50_000_000
) (
  input  logic             clk,
  input  logic             rst,
  input  q_t               u,
  output logic             f_exc,
  output logic             f_inh,
  output logic [ACC_W-1:0] inc_exc,
  output logic [ACC_W-1:0] inc_inh
);
  timeunit 1ns; timeprecision 1ps;

  localparam longint STEP = (F_HZ * (64'd1 << ACC_W) + CLK_F / 2) / CLK_F;
  localparam logic [ACC_W-1:0] HALF = ACC_W'(1) << (ACC_W - 1);

  q_t               uc;
  logic [QFRAC:0]   mag_pos, mag_neg;   // 0 .. 1.0 in Q0.16
  logic [ACC_W-1:0] acc_exc, acc_inh;

  always_comb begin
    uc = qclamp1(u);
    mag_pos = '0;
    mag_neg = '0;
    if (uc > 0)      mag_pos = (QFRAC+1)'(uc);
    else if (uc < 0) mag_neg = (QFRAC+1)'(-uc);
    inc_exc = ACC_W'((64'(mag_pos) * 64'(STEP)) >> QFRAC);
    inc_inh = ACC_W'((64'(mag_neg) * 64'(STEP)) >> QFRAC);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_exc <= '0;
      acc_inh <= '0;
      f_exc   <= 1'b0;
      f_inh   <= 1'b0;
    end else begin
      acc_exc <= acc_exc + inc_exc;
      acc_inh <= acc_inh + inc_inh;
      f_exc   <= (inc_exc != 0) && (acc_exc > HALF);
      f_inh   <= (inc_inh != 0) && (acc_inh > HALF);
    end
  end
endmodule
