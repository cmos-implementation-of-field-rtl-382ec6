// tb_freq_measure: drives the frequency measure with square waves of known
// half period H (in 50 MHz cycles, edges placed between clock edges) and
// checks that the captured count equals H for both edges, that the strobe
// fires once per transition, and that a very slow wave saturates the count.
module tb_freq_measure;
  timeunit 1ns; timeprecision 1ps;

  localparam int CW = 12;
  logic          clk = 1'b0, rst = 1'b1, osc = 1'b0;
  logic [CW-1:0] count;
  logic          stb;
  int            checks = 0, failures = 0, strobes = 0;

  always #10 clk = ~clk;      // 50 MHz

  freq_measure #(.CNT_W(CW)) dut (.*);

  always @(posedge clk) if (stb) strobes++;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_wave(input int h, input int n_edges);
    int s0;
    s0 = strobes;
    for (int e = 0; e < n_edges; e++) begin
      #(20.0 * h) osc = ~osc;
      if (e >= 2) begin
        // the capture of edge e-1 is visible by now
        checks++;
        if (int'(count) != h) begin
          failures++;
          $display("FAIL h=%0d edge %0d: count %0d", h, e, count);
        end
      end
    end
    #200;
    checks++;
    if (strobes - s0 != n_edges) begin
      failures++;
      $display("FAIL h=%0d: %0d strobes for %0d edges", h, strobes - s0, n_edges);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #3 rst = 1'b0;
    run_wave(25, 8);      // 1 MHz
    run_wave(227, 6);     // about 110 kHz
    run_wave(1250, 4);    // 20 kHz
    run_wave(7, 10);
    // slower than the counter range: saturates at all ones
    #(20.0 * 5000) osc = ~osc;
    #(20.0 * 5000) osc = ~osc;
    #100;
    checks++;
    if (count != '1) begin
      failures++;
      $display("FAIL saturation: count %0d", count);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
