// rls_accel: linear read-out and recursive-least-squares (RLS) accelerator
// for FORCE learning. It computes the network output z_P = x^T w and, in
// RLS mode, updates the output weights once per time step:
//
//   eps(n)  = z(n) - x^T(n) w(n-1)                  (eps is the input err)
//   Px      = P(n-1) x(n)
//   gain(n) = Px / (1 + x^T Px)
//   P(n)    = P(n-1) - gain(n) (P(n-1) x(n))^T
//   w(n)    = w(n-1) + eps(n) gain(n)
// with w(0) = [1 .. 1] and P(0) = alpha I set by init.
//
// Datapath: N parallel Q16.16 multipliers whose operands are chosen per
// step from the P memory (one row per cycle), the output weights, the
// state x, the Px / gain storage, the reciprocal or the broadcast error;
// an adder tree sums the N products; one unsigned divider (udiv) forms
// 1 / (1 + x^T Px). Sequence and cycle counts (N = 50):
//   ZP    1 cycle   z_P = sum w_j x_j               (zp, zp_valid)
//   PX    N cycles  Px_i = sum_j P_ij x_j, one row per cycle
//   DEN   1 cycle   s = 1 + sum_j Px_j x_j
//   DIV   35 cycles inv = 2^32 / s
//   GAIN  1 cycle   g_j = Px_j * inv
//   PUPD  N cycles  P_ij -= g_i Px_j, one row per cycle
//   WUPD  1 cycle   w_j += g_j * err
// about 2N + 42 = 142 cycles (2.9 us at 50 MHz) in RLS mode, 3 cycles in
// output mode; the design's budget is a 50 us time step (about 30 us for
// its own accelerator). The P update uses x^T P = (P x)^T, exact because P
// stays symmetric in exact arithmetic; rounding differences are ignored.
//
// Interface: pulse init (alpha valid) to reset w and P, N+1 cycles; pulse
// start with x valid and mode = 1 (RLS) or 0 (output only); zp_valid pulses
// when zp is ready; err must be valid from zp_valid + 1 cycles until done;
// done pulses at the end; x must be held until done.
// From the design: the equations, the N = 50 multipliers, the adder, the
// unsigned divider, the P / Px / gain / w storage, the two modes and fixed
// point. Own choices: Q16.16, the step schedule and the handshake.
module rls_accel
  import rc_pkg::*;
#(
  parameter int N = 50
) (
  input  logic clk,
  input  logic rst,
  input  logic init,
  input  q_t   alpha,
  input  logic start,
  input  logic mode,        // 1: RLS learning, 0: output only
  input  q_t   x [N],
  input  q_t   err,
  output logic busy,
  output logic done,
  output q_t   zp,
  output logic zp_valid,
  output q_t   w_out [N]
);
  timeunit 1ns; timeprecision 1ps;

  localparam int DIV_W = 34;
  localparam int RW    = $clog2(N + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_ZP, S_PX, S_DEN, S_DIV, S_DIVW, S_GAIN, S_PUPD, S_WUPD
  } state_t;

  state_t        state;
  logic [RW-1:0] row;
  q_t            p    [N][N];
  q_t            w    [N];
  q_t            px   [N];
  q_t            g    [N];
  q_t            inv, s_den;
  q_t            opa  [N];
  q_t            opb  [N];
  q_t            prod [N];
  q_t            sum;
  logic          div_start, div_done;
  logic [DIV_W-1:0] div_quo;

  // Operand multiplexer, multipliers and adder tree.
  always_comb begin
    for (int j = 0; j < N; j++) begin
      unique case (state)
        S_ZP:    begin opa[j] = w[j];       opb[j] = x[j];   end
        S_PX:    begin opa[j] = p[row][j];  opb[j] = x[j];   end
        S_DEN:   begin opa[j] = px[j];      opb[j] = x[j];   end
        S_GAIN:  begin opa[j] = px[j];      opb[j] = inv;    end
        S_PUPD:  begin opa[j] = g[row];     opb[j] = px[j];  end
        S_WUPD:  begin opa[j] = g[j];       opb[j] = err;    end
        default: begin opa[j] = '0;         opb[j] = '0;     end
      endcase
      prod[j] = qmul(opa[j], opb[j]);
    end
    sum = '0;
    for (int j = 0; j < N; j++) sum = sum + prod[j];
  end

  udiv #(.WIDTH(DIV_W)) u_div (
    .clk(clk), .rst(rst), .start(div_start),
    .num(DIV_W'(64'd1 << (2 * QFRAC))), .den(DIV_W'(s_den)),
    .busy(), .done(div_done), .quo(div_quo), .rem()
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      row       <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      zp        <= '0;
      zp_valid  <= 1'b0;
      div_start <= 1'b0;
      inv       <= '0;
      s_den     <= Q_ONE;
      for (int i = 0; i < N; i++) begin
        w[i]  <= Q_ONE;
        px[i] <= '0;
        g[i]  <= '0;
      end
    end else begin
      done      <= 1'b0;
      zp_valid  <= 1'b0;
      div_start <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (init) begin
            state <= S_INIT;
            busy  <= 1'b1;
            row   <= '0;
          end else if (start) begin
            state <= S_ZP;
            busy  <= 1'b1;
          end
        end
        S_INIT: begin
          for (int j = 0; j < N; j++) p[row][j] <= (j == int'(row)) ? alpha : '0;
          w[row] <= Q_ONE;
          if (int'(row) == N - 1) begin
            state <= S_IDLE;
            busy  <= 1'b0;
            done  <= 1'b1;
          end else begin
            row <= row + 1'b1;
          end
        end
        S_ZP: begin
          zp       <= sum;
          zp_valid <= 1'b1;
          row      <= '0;
          if (mode) begin
            state <= S_PX;
          end else begin
            state <= S_IDLE;
            busy  <= 1'b0;
            done  <= 1'b1;
          end
        end
        S_PX: begin
          px[row] <= sum;
          if (int'(row) == N - 1) state <= S_DEN;
          else                    row   <= row + 1'b1;
        end
        S_DEN: begin
          // P is positive definite, so 1 + x^T P x >= 1; clamp against rounding.
          s_den     <= (sum > 0) ? Q_ONE + sum : Q_ONE;
          div_start <= 1'b1;
          state     <= S_DIV;
        end
        S_DIV:  state <= S_DIVW;
        S_DIVW: begin
          if (div_done) begin
            inv   <= q_t'(div_quo);
            state <= S_GAIN;
          end
        end
        S_GAIN: begin
          for (int j = 0; j < N; j++) g[j] <= prod[j];
          row   <= '0;
          state <= S_PUPD;
        end
        S_PUPD: begin
          for (int j = 0; j < N; j++) p[row][j] <= p[row][j] - prod[j];
          if (int'(row) == N - 1) state <= S_WUPD;
          else                    row   <= row + 1'b1;
        end
        S_WUPD: begin
          for (int j = 0; j < N; j++) w[j] <= w[j] + prod[j];
          state <= S_IDLE;
          busy  <= 1'b0;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign w_out = w;
endmodule
