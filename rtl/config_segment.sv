// config_segment: one segment of the chip's serial configuration chain.
// The chip is programmed by shifting a bit stream into SI with the
// programming clock PCk; the last segment drives SO, so a host can read the
// stream back. Each CLB holds one segment, whose parallel outputs are the
// static configuration of that tile (routing selects and weight codes);
// the programming block at the head of the chain is the first segment.
//
// Timing: on every rising edge of pck the content moves one place toward
// the output: q <= {q[WIDTH-2:0], si}; so = q[WIDTH-1]. The host stops pck
// once the stream is in, and the configuration then holds. The serial
// scheme follows the design (SI, SO, PCk); the shift direction is this
// design's choice. The configuration has no reset: it is defined by
// programming, as in an FPGA.
module config_segment #(
  parameter int WIDTH = 52
) (
  input  logic             pck,
  input  logic             si,
  output logic             so,
  output logic [WIDTH-1:0] q
);
  timeunit 1ns; timeprecision 1ps;

  always_ff @(posedge pck) begin
    q <= {q[WIDTH-2:0], si};
  end

  assign so = q[WIDTH-1];
endmodule
