// cvc: counter-voltage conversion. Turns the two half-period counts of each
// neuron, c(f) from the positive VCO and c(g) from the negative VCO, into an
// estimate of the neuron's capacitor voltage V_cap, the reservoir state x_i.
//
// Per neuron:
//   f = f_base / (2 c(f)),  g = f_base / (2 c(g))          (MHz, Q16.16)
//   V(f) = (f - b_f) * k_f,  V(g) = (g - b_g) * k_g           (V, Q16.16)
//   avg  = (V(f) + V(g)) / 2
//   x    = V(f) if avg > V_HI;  V(g) if avg < V_LO;  avg otherwise
// k_f = 1/F and k_g = 1/G are the inverted slopes and b_f, b_g the offsets
// of the linear VCO characterisation f = F V + b_F, g = G V + b_G; they are
// inputs because they come from a per-chip calibration. A zero count (no
// transition seen since reset) is read as the largest count, the lowest
// frequency, as the counters report for a stopped VCO.
//
// How it works: two udiv dividers compute f and g of one neuron at a time,
// in parallel; the linear map, the average and the threshold choice follow
// in the cycle the quotients arrive. Pulse start with the counts valid and
// hold them until done; a conversion of N neurons takes N * (DIV_W + 2)
// cycles (1200 cycles = 24 us for 50 neurons). x[i] and region[i] (0: average,
// 1: V(f) only, 2: V(g) only) are registered and stay valid until the next
// conversion.
// From the design: the formulas, including the factor 2 of the half-period
// count, and the 0.35 V / 0.65 V thresholds. Own choices: Q16.16, the
// sequential dividers and one neuron at a time.
module cvc
  import rc_pkg::*;
#(
  parameter int     N         = 50,
  parameter int     CW        = CNT_W,
  parameter longint F_BASE_HZ = 50_000_000,
  parameter q_t     V_LO      = q_t'(22938),   // 0.35 V in Q16.16
  parameter q_t     V_HI      = q_t'(42598)    // 0.65 V in Q16.16
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  output logic          busy,
  output logic          done,
  input  logic [CW-1:0] cf [N],
  input  logic [CW-1:0] cg [N],
  input  q_t            k_f,
  input  q_t            b_f,
  input  q_t            k_g,
  input  q_t            b_g,
  output q_t            x [N],
  output logic [1:0]    region [N]
);
  timeunit 1ns; timeprecision 1ps;

  // f in MHz, Q16.16: (f_base / 2 / 1e6) * 2^16 / c
  localparam longint NUM   = ((F_BASE_HZ / 2) * 65536) / 1_000_000;
  localparam int     DIV_W = $clog2(NUM + 1) + 1;
  localparam int     IW    = $clog2(N + 1);

  logic [IW-1:0]    idx;
  logic             div_start;
  logic             done_f, done_g;
  logic [DIV_W-1:0] quo_f, quo_g;
  logic [CW-1:0]    den_f, den_g;
  q_t               f_q, g_q, v_f, v_g, avg, x_new;
  logic [1:0]       reg_new;

  assign den_f = (cf[idx] == '0) ? '1 : cf[idx];
  assign den_g = (cg[idx] == '0) ? '1 : cg[idx];

  udiv #(.WIDTH(DIV_W)) u_div_f (
    .clk(clk), .rst(rst), .start(div_start), .num(DIV_W'(NUM)),
    .den(DIV_W'(den_f)), .busy(), .done(done_f), .quo(quo_f), .rem()
  );
  udiv #(.WIDTH(DIV_W)) u_div_g (
    .clk(clk), .rst(rst), .start(div_start), .num(DIV_W'(NUM)),
    .den(DIV_W'(den_g)), .busy(), .done(done_g), .quo(quo_g), .rem()
  );

  always_comb begin
    f_q = q_t'(quo_f);
    g_q = q_t'(quo_g);
    v_f = qmul(f_q - b_f, k_f);
    v_g = qmul(g_q - b_g, k_g);
    avg = (v_f + v_g) >>> 1;
    if (avg > V_HI) begin
      x_new = v_f;  reg_new = 2'd1;
    end else if (avg < V_LO) begin
      x_new = v_g;  reg_new = 2'd2;
    end else begin
      x_new = avg;  reg_new = 2'd0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      div_start <= 1'b0;
      idx       <= '0;
      for (int i = 0; i < N; i++) begin
        x[i]      <= '0;
        region[i] <= '0;
      end
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy      <= 1'b1;
          idx       <= '0;
          div_start <= 1'b1;
        end
      end else if (done_f && done_g) begin
        x[idx]      <= x_new;
        region[idx] <= reg_new;
        if (int'(idx) == N - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          idx       <= idx + 1'b1;
          div_start <= 1'b1;
        end
      end
    end
  end
endmodule
