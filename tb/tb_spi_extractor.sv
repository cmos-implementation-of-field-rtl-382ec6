// tb_spi_extractor: checks the multi-channel serial read-out at its full
// size (5 channels x 20 neurons x 2 counts x 12 bits). A model of the
// chip's shift-register chains, loaded with random counts, is read twice;
// every count must land in the register of its neuron, and one read-out
// must take 480 bit periods of 5 cycles (48 us at 50 MHz, inside the 50 us
// time step).
module tb_spi_extractor;
  timeunit 1ns; timeprecision 1ps;
  import rc_pkg::*;

  localparam int NCH = 5, NPC = 20, CW = 12, N = NCH * NPC;
  localparam int BITS = NPC * 2 * CW;

  logic           clk = 1'b0, rst = 1'b1, start = 1'b0;
  logic           busy, done, sclk, sload, sdo;
  logic [NCH-1:0] sdi;
  logic [CW-1:0]  cf [N];
  logic [CW-1:0]  cg [N];
  int             checks = 0, failures = 0;

  // chip-side model: per channel, NPC shift registers of 2*CW bits
  logic [CW-1:0]     ref_f [N];
  logic [CW-1:0]     ref_g [N];
  logic [BITS-1:0]   chain [NCH];

  always #10 clk = ~clk;

  spi_extractor #(.NCH(NCH), .NPC(NPC), .CW(CW), .CLK_DIV(5)) dut (.*);

  always @(posedge sclk) begin
    for (int c = 0; c < NCH; c++) begin
      if (sload) begin
        // tile k of chain c sits at bits [k*2CW +: 2CW]; the last tile is
        // nearest to the output
        for (int k = 0; k < NPC; k++)
          chain[c][k*2*CW +: 2*CW] <= {ref_f[c*NPC+k], ref_g[c*NPC+k]};
      end else begin
        chain[c] <= {chain[c][BITS-2:0], sdo};
      end
    end
  end
  always_comb for (int c = 0; c < NCH; c++) sdi[c] = chain[c][BITS-1];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic readout();
    int cyc;
    for (int n = 0; n < N; n++) begin
      ref_f[n] = CW'($urandom);
      ref_g[n] = CW'($urandom);
    end
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    for (int n = 0; n < N; n++) begin
      checks++;
      if (cf[n] != ref_f[n] || cg[n] != ref_g[n]) begin
        failures++;
        if (failures < 10)
          $display("FAIL neuron %0d: got %0d/%0d expected %0d/%0d",
                   n, cf[n], cg[n], ref_f[n], ref_g[n]);
      end
    end
    checks++;
    if (cyc < BITS * 5 || cyc > BITS * 5 + 4) begin
      failures++;
      $display("FAIL read-out took %0d cycles, expected %0d", cyc, BITS * 5);
    end
    $display("read-out of %0d neurons: %0d cycles", N, cyc);
  endtask

  initial begin
    for (int c = 0; c < NCH; c++) chain[c] = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    readout();
    readout();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
