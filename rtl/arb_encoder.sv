// arb_encoder: arbitered encoder of one tree node (multiplexed arbitration).
//
// Two 4-phase requests compete for one output channel. A cross-coupled NAND
// pair is the mutual-exclusion element: the first request to arrive pulls its
// NAND low and holds the other NAND high. Each NAND output goes into a NOR
// with the opposite side's acknowledge, so a side is granted (g1 or g2) only
// when it won the NAND pair and the other side's handshake has fully returned
// to zero. The OR of the grants is the output request, grant 2 is the one-bit
// address (0 = req1, 1 = req2), and each side's acknowledge is a C-element of
// its grant and ack_next. A loser stays pending until the winner's handshake
// with the parent has completed. Gate structure and wiring follow the
// published arbiter schematic; the reset on the two C-elements is this
// design's own addition.
//
// When both requests rise at the same instant the NAND pair in silicon goes
// metastable and thermal noise picks a winner at random. A zero-delay
// simulation of these gates picks a fixed winner instead, chosen by the
// simulator's evaluation order; the gates themselves are unchanged.
//
// Interface: req1/ack1, req2/ack2 from the children; req_next/ack_next/addr
// to the parent. Timing: req_next and addr change together, one NAND + NOR
// (+ OR) delay after the winning request.
//
// The NAND pair and the C-elements are intentional combinational loops.
`timescale 1ns/1ps
module arb_encoder (
  input  logic rst_n,
  input  logic req1,
  output logic ack1,
  input  logic req2,
  output logic ack2,
  output logic req_next,
  input  logic ack_next,
  output logic addr
);
  logic n1, n2;  // cross-coupled NAND outputs (low = this side holds the lock)
  logic g1, g2;  // grants

  assign n1 = !(req1 & n2);
  assign n2 = !(req2 & n1);

  assign g1 = !(n1 | ack2);
  assign g2 = !(n2 | ack1);

  c_element u_c1 (.rst_n, .x1(g1), .x2(ack_next), .y(ack1));
  c_element u_c2 (.rst_n, .x1(g2), .x2(ack_next), .y(ack2));

  assign req_next = g1 | g2;
  assign addr     = g2;
endmodule
