// aer_encoder: asynchronous tree-based AER encoder, top level.
//
// N neuron or sensor outputs each signal an event with a 4-phase request and
// receive an acknowledge. The encoder serialises the events onto one
// bundled-data output channel carrying the log2(N)-bit source address. There
// is no clock: every storage element is clocked by a locally generated
// acknowledge and the throughput adapts to the event traffic.
//
// Structure: aer_tree (arbitered encoders at every node, semi-decoupled
// micropipeline stages between the levels) followed by a matched delay on
// the output request. The delay keeps out_req behind out_addr, whose lower
// bits come from the last micropipeline register; the published tree drawing
// shows no such delay, so it is this design's own addition.
//
// Output protocol (4-phase bundled data): out_addr is stable while out_req is
// high; the receiver raises out_ack after it has taken the address, the
// encoder then lowers out_req, and the receiver lowers out_ack.
// Timing on an idle encoder: out_req rises (log2(N)-1)*REQ_BUFS + OUT_BUFS
// buffer delays after an event request.
//
// The combinational loops that tools report inside the C-elements and the
// arbiter's NAND latch are the state of this asynchronous circuit and are
// intentional.
`timescale 1ns/1ps
module aer_encoder #(
  parameter int unsigned N        = aer_pkg::DEF_N,
  parameter int unsigned REQ_BUFS = aer_pkg::DEF_REQ_BUFS,
  parameter int unsigned ACK_BUFS = aer_pkg::DEF_ACK_BUFS,
  parameter int unsigned OUT_BUFS = aer_pkg::DEF_OUT_BUFS,
  parameter int unsigned BUF_PS   = aer_pkg::DEF_BUF_PS,
  localparam int unsigned AW      = $clog2(N)
) (
  input  logic          rst_n,
  input  logic [N-1:0]  ev_req,
  output logic [N-1:0]  ev_ack,
  output logic          out_req,
  input  logic          out_ack,
  output logic [AW-1:0] out_addr
);
  logic root_req;

  aer_tree #(.N(N), .REQ_BUFS(REQ_BUFS), .ACK_BUFS(ACK_BUFS), .BUF_PS(BUF_PS)) u_tree (
    .rst_n, .ev_req, .ev_ack, .req(root_req), .ack(out_ack), .addr(out_addr)
  );

  delay_line #(.BUFS(OUT_BUFS), .BUF_PS(BUF_PS)) u_out_dly (.a(root_req), .y(out_req));
endmodule
