// c_element: two-input Muller C-element built as an Earle latch.
//
// The output rises when both inputs are 1, falls when both are 0 and holds its
// value while they differ. Following the Earle-latch form it is three AND
// gates (x1&x2, x1&y, x2&y) into one OR gate whose output y is fed back, so no
// storage cell is needed and the element maps onto ordinary standard cells.
// The active-low reset, ANDed into the output, is this design's addition: it
// puts the state loop at 0 before the first handshake.
//
// Interface: rst_n, x1, x2 in; y out. Purely combinational with feedback: y
// settles one AND-OR delay after the inputs agree.
//
// The combinational loop through y is the state of the element and is
// intentional; tools report it as a loop.
`timescale 1ns/1ps
module c_element (
  input  logic rst_n,
  input  logic x1,
  input  logic x2,
  output logic y
);
  logic a12, a1y, a2y;

  assign a12 = x1 & x2;
  assign a1y = x1 & y;
  assign a2y = x2 & y;
  assign y   = rst_n & (a12 | a1y | a2y);
endmodule
