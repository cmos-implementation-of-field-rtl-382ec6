// spi_extractor: multi-channel serial read-out controller (the "sample
// extractor" of the measurement system). It fetches every neuron's counts
// c(f) and c(g) from the chip and stores them in registers.
//
// One read-out, started by a one-cycle pulse on start:
//   1. sload is raised and the first rising edge of sclk copies the counts
//      of every tile into its shift register;
//   2. the controller keeps clocking sclk, sampling all NCH serial inputs
//      sdi[c] just before each rising edge, for BITS = NPC*2*CW bits per
//      channel (one load edge plus BITS-1 shift edges);
//   3. the deserialised words are unpacked into cf[] / cg[] and done pulses.
// sclk runs at f_clk / CLK_DIV (10 Mbit/s per channel at 50 MHz and
// CLK_DIV = 5), high for CLK_DIV/2 cycles. A read-out of 100 neurons on
// five channels takes 480 bits, 2400 cycles = 48 us, inside the 50 us time
// step. sdo is the controller's serial output toward the chains' shared
// serial input; it sends zeros.
//
// Neuron numbering: channel c carries neurons c*NPC .. c*NPC+NPC-1; the last
// neuron of a channel arrives first, each as c(f) then c(g), MSB first.
// From the design: five channels, 10 Mbit/s, deserialisation into
// registers, the chip-side chains. Own choices: the load strobe, the clock
// phase at which data are sampled and the register layout.
module spi_extractor
  import rc_pkg::*;
#(
  parameter int NCH     = N_CHAINS,
  parameter int NPC     = N_NEURONS / N_CHAINS,
  parameter int CW      = CNT_W,
  parameter int CLK_DIV = 5
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           start,
  output logic           busy,
  output logic           done,
  // serial lines to the chip
  output logic           sclk,
  output logic           sload,
  output logic           sdo,
  input  logic [NCH-1:0] sdi,
  // deserialised counts, neuron-indexed
  output logic [CW-1:0]  cf [NCH*NPC],
  output logic [CW-1:0]  cg [NCH*NPC]
);
  timeunit 1ns; timeprecision 1ps;

  localparam int BITS = NPC * 2 * CW;
  localparam int HI   = CLK_DIV / 2;
  localparam int PH_W = $clog2(CLK_DIV + 1);
  localparam int B_W  = $clog2(BITS + 1);

  logic [PH_W-1:0] ph;
  logic [B_W-1:0]  nbit;
  logic [BITS-1:0] sh [NCH];
  logic            fin;      // last bit sampled

  assign sdo = 1'b0;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      fin   <= 1'b0;
      sclk  <= 1'b0;
      sload <= 1'b0;
      ph    <= '0;
      nbit  <= '0;
    end else begin
      fin <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          sload <= 1'b1;
          ph    <= '0;
          nbit  <= '0;
        end
      end else begin
        ph <= (int'(ph) == CLK_DIV - 1) ? '0 : ph + 1'b1;
        if (int'(ph) == 0)  sclk <= 1'b1;
        if (int'(ph) == HI) begin
          sclk  <= 1'b0;
          sload <= 1'b0;
        end
        if (int'(ph) == CLK_DIV - 1) begin
          for (int c = 0; c < NCH; c++) sh[c] <= {sh[c][BITS-2:0], sdi[c]};
          nbit <= nbit + 1'b1;
          if (int'(nbit) == BITS - 1) begin
            busy <= 1'b0;
            fin  <= 1'b1;
          end
        end
      end
    end
  end

  // Unpack once the last bit is in; done follows with the registers valid.
  always_ff @(posedge clk) begin
    if (rst) begin
      done <= 1'b0;
      for (int n = 0; n < NCH*NPC; n++) begin
        cf[n] <= '0;
        cg[n] <= '0;
      end
    end else begin
      done <= fin;
      if (fin) begin
        for (int c = 0; c < NCH; c++)
          for (int k = 0; k < NPC; k++) begin
            cf[c*NPC + k] <= sh[c][k*2*CW + CW +: CW];
            cg[c*NPC + k] <= sh[c][k*2*CW      +: CW];
          end
      end
    end
  end
endmodule
