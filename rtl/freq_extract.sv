// freq_extract: the measurement and read-out unit attached to one neuron.
//
// It holds two freq_measure counters, one on the positive VCO (giving c(f))
// and one on the negative VCO (giving c(g)), and a 2*CNT_W-bit shift
// register that takes both counts in parallel and shifts them out serially.
// Units of neighbouring neurons are chained serial-out to serial-in, so a
// whole row of neurons is read through one serial line.
//
// Shift register timing (clocked by the read-out clock sclk that the
// external serial controller supplies): on a rising sclk edge with
// sload high, sr <= {c(f), c(g)}; otherwise sr <= {sr[2*CNT_W-2:0], si}.
// so = sr[MSB], so the data leave most significant bit first, c(f) before
// c(g). The count registers live in the 50 MHz domain; sclk is derived
// from the same clock by the controller, so the parallel load sees settled
// counts except when a capture happens in the very cycle of the load, in
// which case it takes either the old or the new count.
// From the design: two frequency measures, two chained shift registers with
// serial input, clock and serial output. Own choice: the load strobe sload
// (the paper does not say how the counts enter the shift registers).
module freq_extract #(
  parameter int CNT_W = 12
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             f_osc,
  input  logic             g_osc,
  input  logic             sclk,
  input  logic             sload,
  input  logic             si,
  output logic             so,
  output logic [CNT_W-1:0] cf,
  output logic [CNT_W-1:0] cg
);
  timeunit 1ns; timeprecision 1ps;

  logic [2*CNT_W-1:0] sr;

  freq_measure #(.CNT_W(CNT_W)) u_meas_f (
    .clk(clk), .rst(rst), .osc(f_osc), .count(cf), .stb()
  );
  freq_measure #(.CNT_W(CNT_W)) u_meas_g (
    .clk(clk), .rst(rst), .osc(g_osc), .count(cg), .stb()
  );

  always_ff @(posedge sclk) begin
    if (sload) sr <= {cf, cg};
    else       sr <= {sr[2*CNT_W-2:0], si};
  end

  assign so = sr[2*CNT_W-1];
endmodule
