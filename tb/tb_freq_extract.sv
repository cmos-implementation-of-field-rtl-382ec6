// tb_freq_extract: three chained frequency-extraction units, each fed with
// two square waves of random half-periods (whole numbers of 20 ns clock
// cycles, plus a fraction to make the phase to the clock drift). After the
// counters settle, the counts are loaded into the shift registers and
// shifted out through the last unit's so at a 10 MHz serial clock. The 72
// received bits must give, for each unit in chain order (last unit first),
// c(f) and c(g) equal to the half-period in cycles (within one count for
// the fractional part), MSB first.
module tb_freq_extract;
  timeunit 1ns; timeprecision 1ps;

  localparam int CW = 12, U = 3;
  logic          clk = 1'b0, rst = 1'b1, sclk = 1'b0, sload = 1'b0;
  logic [U-1:0]  f_osc = '0, g_osc = '0;
  logic [U:0]    chain;
  logic [CW-1:0] cf [U];
  logic [CW-1:0] cg [U];
  real           hf [U];
  real           hg [U];
  int            checks = 0, failures = 0;

  always #10 clk = ~clk;

  assign chain[0] = 1'b0;
  for (genvar u = 0; u < U; u++) begin : g_u
    freq_extract #(.CNT_W(CW)) dut (
      .clk(clk), .rst(rst), .f_osc(f_osc[u]), .g_osc(g_osc[u]),
      .sclk(sclk), .sload(sload), .si(chain[u]), .so(chain[u+1]),
      .cf(cf[u]), .cg(cg[u])
    );
    initial begin
      hf[u] = 20.0 * (real'($urandom % 300 + 3) + 0.37);
      hg[u] = 20.0 * (real'($urandom % 3000 + 3) + 0.61);
      #(hf[u] / 3.0);
      forever #(hf[u]) f_osc[u] = ~f_osc[u];
    end
    initial begin
      #1;
      #(hg[u] / 5.0);
      forever #(hg[u]) g_osc[u] = ~g_osc[u];
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sclk_cycle();
    #50 sclk = 1'b1;
    #50 sclk = 1'b0;
  endtask

  function automatic int within1(int got, real half_ns);
    real c = half_ns / 20.0;
    return (real'(got) >= c - 1.0 && real'(got) <= c + 1.0) ? 1 : 0;
  endfunction

  initial begin
    logic [2*CW*U-1:0] rx;
    logic [CW-1:0]     rf, rg;
    repeat (4) @(posedge clk);
    rst = 1'b0;
    #200000;                           // > two periods of the slowest wave
    sload = 1'b1;
    sclk_cycle();
    sload = 1'b0;
    rx = '0;
    for (int b = 0; b < 2 * CW * U; b++) begin
      rx = {rx[2*CW*U-2:0], chain[U]};
      sclk_cycle();
    end
    for (int u = 0; u < U; u++) begin
      // the last unit's register comes out first
      {rf, rg} = rx[(2*CW*U - 1) - (U - 1 - u) * 2 * CW -: 2 * CW];
      checks += 2;
      if (!within1(int'(rf), hf[u])) begin
        failures++;
        $display("FAIL unit %0d c(f) %0d, half period %f cycles", u, rf, hf[u] / 20.0);
      end
      if (!within1(int'(rg), hg[u])) begin
        failures++;
        $display("FAIL unit %0d c(g) %0d, half period %f cycles", u, rg, hg[u] / 20.0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
