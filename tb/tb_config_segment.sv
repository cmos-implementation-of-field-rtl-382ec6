// tb_config_segment: shifts random streams through two chained
// configuration segments with the programming clock and checks the
// parallel contents, the serial output (read-back) and that the contents
// hold while the programming clock is stopped.
module tb_config_segment;
  timeunit 1ns; timeprecision 1ps;

  localparam int W = 52;
  logic         pck = 1'b0, si = 1'b0;
  logic         so0, so1;
  logic [W-1:0] q0, q1;
  logic [2*W-1:0] stream;
  int           checks = 0, failures = 0;

  config_segment #(.WIDTH(W)) u0 (.pck(pck), .si(si),  .so(so0), .q(q0));
  config_segment #(.WIDTH(W)) u1 (.pck(pck), .si(so0), .so(so1), .q(q1));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse();
    #5 pck = 1'b1;
    #5 pck = 1'b0;
  endtask

  initial begin
    for (int r = 0; r < 4; r++) begin
      for (int i = 0; i < 2*W; i++) stream[i] = 1'($urandom);
      // bit 2W-1 is sent first, so it ends in the far end of segment 1
      for (int i = 2*W-1; i >= 0; i--) begin
        si = stream[i];
        pulse();
      end
      checks += 2;
      if (q1 != stream[2*W-1:W]) begin
        failures++; $display("FAIL segment 1 %h vs %h", q1, stream[2*W-1:W]);
      end
      if (q0 != stream[W-1:0]) begin
        failures++; $display("FAIL segment 0 %h vs %h", q0, stream[W-1:0]);
      end
      #100;
      checks++;
      if (q0 != stream[W-1:0] || q1 != stream[2*W-1:W]) begin
        failures++; $display("FAIL configuration did not hold");
      end
      // read back: the serial output gives the stream again, first bit first
      for (int i = 2*W-1; i >= 0; i--) begin
        checks++;
        if (so1 != stream[i]) begin
          failures++; $display("FAIL read-back bit %0d", i);
        end
        si = 1'b0;
        pulse();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
