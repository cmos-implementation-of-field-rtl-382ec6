// udiv: sequential unsigned divider, one quotient bit per clock cycle
// (restoring division). Used twice in the system: by the counter-voltage
// conversion to turn counts into frequencies (f = f_base / (2 c)), and as
// the unsigned divider of the RLS accelerator that forms the reciprocal
// 1 / (1 + x^T P x).
//
// Interface: pulse start with num and den valid; busy is high while the
// division runs; done pulses WIDTH + 1 cycles after start with
// quo = num / den and rem = num % den. Division by zero returns all ones in
// quo (rem is then meaningless). The paper names an unsigned divider; the algorithm
// is this design's choice.
module udiv #(
  parameter int WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  input  logic [WIDTH-1:0] num,
  input  logic [WIDTH-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [WIDTH-1:0] quo,
  output logic [WIDTH-1:0] rem
);
  timeunit 1ns; timeprecision 1ps;

  localparam int CW = $clog2(WIDTH + 1);

  logic [WIDTH-1:0] d;
  logic [WIDTH-1:0] n;        // dividend bits still to bring down
  logic [WIDTH-1:0] r;        // partial remainder, always below d
  logic [WIDTH+1:0] r_try;    // shifted remainder minus d; MSB = borrow
  logic [CW-1:0]    steps;

  assign r_try = {1'b0, r, n[WIDTH-1]} - {2'b00, d};

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      steps <= '0;
      quo   <= '0;
      rem   <= '0;
      r     <= '0;
      n     <= '0;
      d     <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          d     <= den;
          n     <= num;
          r     <= '0;
          quo   <= '0;
          steps <= CW'(WIDTH);
        end
      end else begin
        n <= n << 1;
        if (!r_try[WIDTH+1]) begin
          r   <= r_try[WIDTH-1:0];
          quo <= {quo[WIDTH-2:0], 1'b1};
        end else begin
          r   <= {r[WIDTH-2:0], n[WIDTH-1]};
          quo <= {quo[WIDTH-2:0], 1'b0};
        end
        steps <= steps - 1'b1;
        if (steps == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          rem  <= !r_try[WIDTH+1] ? r_try[WIDTH-1:0] : {r[WIDTH-2:0], n[WIDTH-1]};
        end
      end
    end
  end
endmodule
