// tb_udiv: self-checking test of the sequential unsigned divider. Random
// and corner-case operands are divided and compared with the simulator's
// own / and %; the latency (done WIDTH+1 cycles after start) is checked too.
module tb_udiv;
  timeunit 1ns; timeprecision 1ps;

  localparam int W = 34;
  logic         clk = 1'b0, rst = 1'b1, start = 1'b0;
  logic [W-1:0] num, den, quo, rem;
  logic         busy, done;
  int           checks = 0, failures = 0;

  always #10 clk = ~clk;

  udiv #(.WIDTH(W)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic divide(input logic [W-1:0] a, input logic [W-1:0] b);
    int cyc;
    @(negedge clk);
    num = a; den = b; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (b != 0 && (quo != a / b || rem != a % b)) begin
      failures++;
      $display("FAIL %0d / %0d -> %0d r %0d", a, b, quo, rem);
    end
    if (b == 0 && quo != '1) begin
      failures++;
      $display("FAIL divide by zero -> %0d", quo);
    end
    checks++;
    if (cyc != W + 1) begin
      failures++;
      $display("FAIL latency %0d cycles, expected %0d", cyc, W + 1);
    end
  endtask

  initial begin
    num = '0; den = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    divide(34'd1 << 32, 34'd65536);
    divide(34'd1 << 32, 34'd65537);
    divide(34'd1638400, 34'd25);
    divide(34'd1638400, 34'd4095);
    divide('1, 34'd1);
    divide('1, '1);
    divide(34'd5, 34'd7);
    divide(34'd77, 34'd0);
    for (int i = 0; i < 200; i++)
      divide({$urandom, $urandom} & '1, 34'($urandom) >> ($urandom % 30));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
