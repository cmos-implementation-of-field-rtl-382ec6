// tb_reservoir_chip: the full 100-neuron chip at its default size.
// It programs the whole 5200-bit configuration chain with a small network:
//   neuron t, t % 3 == 0: excited from F_EXC (weight 15)
//   neuron t, t % 3 == 1: inhibited from F_INH (weight 15)
//   neuron t, t % 3 == 2: excited by neuron t - 2's positive VCO (weight 15)
// drives F_EXC / F_INH at 1 MHz, and after 40 us reads all counts through
// the five serial extraction chains (load, then 480 shifts; the serial
// clock runs at 20 MHz here to shorten the run, the registers do not
// depend on its rate). The configuration clock runs at 250 MHz. Checks:
//   - every count received over the chains equals the count held in that
//     tile at the load edge (chain c carries tiles 20c .. 20c+19, the last
//     tile first, c(f) before c(g));
//   - the excited neurons have c(f) and the inhibited ones c(g) well below
//     the resting count, and the neuron-driven ones are excited too;
//   - the configuration shifted in comes back out of SO when a second one
//     is shifted in.
module tb_reservoir_chip;
  timeunit 1ns; timeprecision 1ps;
  import rc_pkg::*;

  localparam int N = 100, NCH = 5, NPC = N / NCH, CW = 12;
  localparam int CFG_W = N_IN * SLOT_CFG_W;

  logic           pck = 1'b0, si = 1'b0, so;
  logic           f_exc = 1'b0, f_inh = 1'b0;
  logic           clk = 1'b0, rst = 1'b1;
  logic           ex_sclk = 1'b0, ex_load = 1'b0, ex_si = 1'b0;
  logic [NCH-1:0] ex_so;
  logic [N-1:0]   div_out;
  logic [CW-1:0]  cfh [N];
  logic [CW-1:0]  cgh [N];
  int             checks = 0, failures = 0;

  always #10 clk = ~clk;
  always #500 f_exc = ~f_exc;
  always #500 f_inh = ~f_inh;

  reservoir_chip dut (.*);

  for (genvar t = 0; t < N; t++) begin : g_peek
    assign cfh[t] = dut.g_tile[t].u_tile.cf;
    assign cgh[t] = dut.g_tile[t].u_tile.cg;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [CFG_W-1:0] tile_word(int t, bit rnd);
    slot_cfg_t s [N_IN];
    logic [CFG_W-1:0] wd;
    for (int k = 0; k < N_IN; k++) begin
      s[k] = '0;
      if (rnd) s[k] = slot_cfg_t'($urandom);
    end
    if (!rnd) begin
      s[0].en = 1'b1; s[0].w = 4'd15;
      case (t % 3)
        0: begin s[0].inh = 1'b0; s[0].src = SRC_W'(SRC_FEXC); end
        1: begin s[0].inh = 1'b1; s[0].src = SRC_W'(SRC_FINH); end
        default: begin s[0].inh = 1'b0; s[0].src = SRC_W'(t - 2); end
      endcase
    end
    for (int k = 0; k < N_IN; k++) wd[k*SLOT_CFG_W +: SLOT_CFG_W] = s[k];
    return wd;
  endfunction

  // Shift a whole chip configuration (tile N-1 first, MSB first) and
  // compare what leaves SO with the previous configuration.
  task automatic program_chip(input bit rnd, input logic [CFG_W-1:0] prev [N],
                         output logic [CFG_W-1:0] cur [N], output int mism);
    mism = 0;
    for (int t = N - 1; t >= 0; t--) begin
      cur[t] = tile_word(t, rnd);
      for (int b = CFG_W - 1; b >= 0; b--) begin
        si = cur[t][b];
        #1;
        if (so != prev[t][b]) mism++;
        #1 pck = 1'b1;
        #2 pck = 1'b0;
      end
    end
  endtask

  initial begin
    logic [CFG_W-1:0] c_a [N];
    logic [CFG_W-1:0] c_b [N];
    logic [CFG_W-1:0] dummy [N];
    logic [2*CW-1:0]  rx [NCH][NPC];
    logic [CW-1:0]    snap_f [N];
    logic [CW-1:0]    snap_g [N];
    int               mism, bad, rest, exc_ok, inh_ok, nd_ok;
    rest = $rtoi(0.5 / (1.0e-3 * 0.15 / 0.65) / 20.0);

    for (int t = 0; t < N; t++) dummy[t] = '0;
    program_chip(1'b1, dummy, c_a, mism);     // random word first
    program_chip(1'b0, c_a, c_b, mism);       // the network; a comes back out
    checks++;
    if (mism != 0) begin
      failures++;
      $display("FAIL %0d configuration bits read back wrong", mism);
    end
    rst = 1'b0;
    #40000;

    // load: rising serial clock edge with ex_load high, placed between two
    // clk edges so that no counter captures at the same instant
    @(posedge clk);
    #4 ex_load = 1'b1;
    #2;
    for (int t = 0; t < N; t++) begin snap_f[t] = cfh[t]; snap_g[t] = cgh[t]; end
    #2 ex_sclk = 1'b1;
    #25 ex_sclk = 1'b0;
    ex_load = 1'b0;
    for (int b = 0; b < 2 * CW * NPC; b++) begin
      for (int c = 0; c < NCH; c++) rx[c][b / (2 * CW)][2*CW - 1 - b % (2 * CW)] = ex_so[c];
      #25 ex_sclk = 1'b1;
      #25 ex_sclk = 1'b0;
    end
    bad = 0;
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < NPC; k++) begin
        int t;
        t = c * NPC + NPC - 1 - k;
        checks += 2;
        if (rx[c][k][2*CW-1:CW] != snap_f[t]) bad++;
        if (rx[c][k][CW-1:0]    != snap_g[t]) bad++;
      end
    failures += bad;
    if (bad != 0) $display("FAIL %0d counts read over the chains differ", bad);

    exc_ok = 0; inh_ok = 0; nd_ok = 0;
    for (int t = 0; t < N; t++) begin
      case (t % 3)
        0: if (int'(snap_f[t]) < rest - 20) exc_ok++;
        1: if (int'(snap_g[t]) < rest - 20) inh_ok++;
        default: begin
          if (int'(snap_f[t]) < rest - 10) nd_ok++;
          else $display("neuron %0d (driven by %0d, c(f) %0d): c(f) %0d c(g) %0d", t, t - 2,
                        snap_f[t - 2], snap_f[t], snap_g[t]);
        end
      endcase
    end
    $display("rest count %0d; excited %0d/34, inhibited %0d/33, neuron-driven %0d/33",
             rest, exc_ok, inh_ok, nd_ok);
    checks += 3;
    if (exc_ok != 34) failures++;
    if (inh_ok != 33) failures++;
    if (nd_ok != 33) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
