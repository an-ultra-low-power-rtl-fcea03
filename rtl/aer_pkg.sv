// aer_pkg: shared defaults of the asynchronous AER encoder.
//
// The encoder has no clock. Its timing is set by matched delay lines made of
// buffers in the REQ and ACK wires. These constants give the default number of
// buffers per delay line and the delay of one buffer used in simulation. The
// 8-event size is the fabricated prototype's; the delay values are this
// design's own choice (the closure flow that sizes them in silicon gives no
// numbers), picked so that every REQ delay covers a register clock-to-output
// plus one 2:1 multiplexer with a wide margin.
`timescale 1ns/1ps
package aer_pkg;
  localparam int unsigned DEF_N        = 8;    // events of the prototype
  localparam int unsigned DEF_REQ_BUFS = 8;    // buffers in each REQ delay
  localparam int unsigned DEF_ACK_BUFS = 4;    // buffers in each ACK delay
  localparam int unsigned DEF_OUT_BUFS = 8;    // buffers in the output REQ delay
  localparam int unsigned DEF_BUF_PS   = 100;  // simulated delay of one buffer, ps
endpackage
