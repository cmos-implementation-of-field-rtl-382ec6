// freq_measure: measures the frequency of one VCO as a count of 50 MHz
// clock cycles per half period.
//
// How it works: the oscillation is brought into the clock domain by a
// two-flop synchroniser, then registered once more; the XOR of the
// synchronised signal and its registered copy is high for one cycle on
// every transition (rising or falling). That pulse resets the counter (R)
// and enables the capture register (E), which takes the incremented count.
// A steady oscillation of frequency f therefore leaves
//     count = f_clk / (2 f)
// in the capture register, updated on every VCO transition. The counter
// saturates at all ones, so a VCO slower than f_clk / 2^(CNT_W+1) reads as
// the full-scale count.
//
// Interface: clk (f_base = 50 MHz), rst (synchronous, active high), osc (the
// asynchronous VCO output), count (captured half-period), stb (one-cycle
// pulse when count was updated). Latency: a transition appears in count
// 3 clock cycles after it reaches osc.
// From the design: register + XOR edge detector, counter with reset R and
// capture enable E, 50 MHz count clock. Own choices: the synchroniser
// stages, saturation and the counter width.
module freq_measure #(
  parameter int CNT_W = 12
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             osc,
  output logic [CNT_W-1:0] count,
  output logic             stb
);
  timeunit 1ns; timeprecision 1ps;

  logic [1:0]       sync;
  logic             prev;
  logic             edge_det;
  logic [CNT_W-1:0] cnt;
  logic [CNT_W-1:0] cnt_inc;

  assign edge_det = sync[1] ^ prev;
  assign cnt_inc  = (&cnt) ? cnt : cnt + 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync  <= '0;
      prev  <= 1'b0;
      cnt   <= '0;
      count <= '0;
      stb   <= 1'b0;
    end else begin
      sync <= {sync[0], osc};
      prev <= sync[1];
      stb  <= edge_det;
      if (edge_det) begin
        count <= cnt_inc;
        cnt   <= '0;
      end else begin
        cnt   <= cnt_inc;
      end
    end
  end
endmodule
