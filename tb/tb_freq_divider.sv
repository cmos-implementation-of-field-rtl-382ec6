// tb_freq_divider: counts output edges of the default divide-by-16 ripple
// divider over a long input burst, checks the ratio, the 50 % duty cycle
// (after the first change, the output changes only every 8 input rising
// edges) and the reset.
module tb_freq_divider;
  timeunit 1ns; timeprecision 1ps;

  logic rst = 1'b1, in = 1'b0, out;
  int   checks = 0, failures = 0, n_out = 0, n_in = 0, since = 0;

  freq_divider #(.STAGES(4)) dut (.*);

  always @(posedge out) n_out++;
  always @(posedge in) begin
    n_in++;
    since++;
  end
  bit seen_first = 1'b0;
  always @(out) begin
    // the first change after reset only sets the phase; check the rest
    if (!rst && !seen_first) begin
      seen_first = 1'b1;
      since = 0;
    end else if (!rst) begin
      checks++;
      if (since != 8) begin
        failures++;
        $display("FAIL output changed after %0d input edges at %t", since, $realtime);
      end
      since = 0;
    end
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100 rst = 1'b0;
    #100;
    since = 0;
    repeat (16 * 20) begin
      #500 in = 1'b1;
      #500 in = 1'b0;
    end
    checks++;
    if (n_out != 20) begin
      failures++;
      $display("FAIL %0d output periods for 320 input periods", n_out);
    end
    rst = 1'b1;
    #10;
    checks++;
    if (out != 1'b0) begin
      failures++;
      $display("FAIL reset did not clear the divider");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
