// mp_stage: one stage of the 4-phase semi-decoupled micropipeline.
//
// Control: two C-elements. The input one computes the local acknowledge,
// ack = C(req_pre delayed, !req_next); the output one forms
// req_next = C(ack, !ack_next). A stage therefore accepts a new input as soon
// as its own output request has returned to zero, without waiting for the
// next stage's acknowledge to fall (semi-decoupled). The inversions come from
// the semi-decoupled controller this stage is modelled on; the connections,
// the two C-elements and the places of the two delays follow the published
// stage diagram.
//
// Data: an edge-triggered register, not a transparent latch, captures data_in
// on the rising edge of the delayed acknowledge (ack_pre), the same signal
// that acknowledges the previous stage. Data therefore has the REQ delay plus
// the ACK delay to settle, and the multiplexer of the next tree level works
// during the return-to-zero half of the handshake.
//
// Interface, all 4-phase bundled data:
//   req_pre / ack_pre / data_in   from the previous stage
//   req_next / ack_next / data_out to the next stage
// Timing: req_next rises REQ_BUFS buffers after req_pre; data_out is valid
// ACK_BUFS buffers after req_next rises. The downstream REQ delay must cover
// that plus the multiplexer delay.
//
// Reset (rst_n low) clears both C-elements and the register; this is the
// design's own choice. The loops through the C-elements are intentional.
`timescale 1ns/1ps
module mp_stage #(
  parameter int unsigned W        = 1,
  parameter int unsigned REQ_BUFS = aer_pkg::DEF_REQ_BUFS,
  parameter int unsigned ACK_BUFS = aer_pkg::DEF_ACK_BUFS,
  parameter int unsigned BUF_PS   = aer_pkg::DEF_BUF_PS
) (
  input  logic         rst_n,
  input  logic         req_pre,
  output logic         ack_pre,
  input  logic [W-1:0] data_in,
  output logic         req_next,
  input  logic         ack_next,
  output logic [W-1:0] data_out
);
  logic req_dly;   // req_pre after the REQ delay
  logic ack_loc;   // locally generated acknowledge, before the ACK delay

  delay_line #(.BUFS(REQ_BUFS), .BUF_PS(BUF_PS)) u_req_dly (.a(req_pre), .y(req_dly));

  c_element u_c_in  (.rst_n, .x1(req_dly), .x2(!req_next), .y(ack_loc));
  c_element u_c_out (.rst_n, .x1(ack_loc), .x2(!ack_next), .y(req_next));

  delay_line #(.BUFS(ACK_BUFS), .BUF_PS(BUF_PS)) u_ack_dly (.a(ack_loc), .y(ack_pre));

  // The delayed acknowledge is the local clock of the data register.
  always_ff @(posedge ack_pre or negedge rst_n) begin
    if (!rst_n) data_out <= '0;
    else        data_out <= data_in;
  end
endmodule
