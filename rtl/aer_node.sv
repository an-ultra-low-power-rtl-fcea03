// aer_node: inner node of the AER tree (arbitered encoder plus address merge).
//
// The node's arbitered encoder picks one of its two children. Its one-bit
// address drives the select of a 2:1 multiplexer over the two children's
// registered addresses, and is prepended as the new most significant bit:
// addr = {bit, bit ? addr2 : addr1}. Repeating this at every level builds
// the full source address, most significant bit last, as in the published
// tree diagram.
//
// Interface: req1/ack1/addr1 and req2/ack2/addr2 from the two children's
// micropipeline stages (CW bits each); req_next/ack_next/addr (CW+1 bits) to
// the parent. Timing: addr is valid one multiplexer delay after req_next
// rises, provided the selected child's register has settled; the parent's
// REQ delay covers both.
//
// The combinational loops that tools report inside the C-elements and the
// arbiter's NAND latch are the state of this asynchronous circuit and are
// intentional.
`timescale 1ns/1ps
module aer_node #(
  parameter int unsigned CW = 1
) (
  input  logic          rst_n,
  input  logic          req1,
  output logic          ack1,
  input  logic [CW-1:0] addr1,
  input  logic          req2,
  output logic          ack2,
  input  logic [CW-1:0] addr2,
  output logic          req_next,
  input  logic          ack_next,
  output logic [CW:0]   addr
);
  logic sel;

  arb_encoder u_arb (
    .rst_n, .req1, .ack1, .req2, .ack2, .req_next, .ack_next, .addr(sel)
  );

  assign addr = {sel, sel ? addr2 : addr1};
endmodule
