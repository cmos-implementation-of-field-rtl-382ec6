// delay_cell: BEHAVIOURAL MODEL of one "Delay" box of the weight module's
// delay line. In silicon it is a chain of slow standard-cell buffers; here it
// is a transport delay of D_NS nanoseconds. Synthesis keeps only the buffer
// (the delay value is ignored), so a real flow must map it to a dont-touch
// delay cell. D_NS is this design's choice; the paper gives no value.
module delay_cell #(
  parameter real D_NS = 5.0
) (
  input  logic a,
  output logic y
);
  timeunit 1ns; timeprecision 1ps;
  assign #(D_NS) y = a;
endmodule
