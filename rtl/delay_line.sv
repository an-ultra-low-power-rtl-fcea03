// delay_line: matched delay element for a handshake wire (behavioural model).
//
// Behavioural model: the delay exists only in simulation. The line is a
// chain of BUFS buffers; each stage carries a transport delay of BUF_PS
// picoseconds, so every edge of the input reappears at the output
// BUFS*BUF_PS ps later. The output is defined BUFS*BUF_PS ps after time 0
// even if the input never changes. The
// number of buffers is the knob the timing-closure flow turns: more buffers
// stretch the handshake so that the datapath has time to settle. Synthesis
// drops the delays and reduces the chain to a wire, so an implementation flow
// must map every stage onto a buffer cell marked dont-touch.
//
// Interface: a in, y out. BUFS = 0 gives a plain wire.
`timescale 1ns/1ps
module delay_line #(
  parameter int unsigned BUFS   = aer_pkg::DEF_REQ_BUFS,
  parameter int unsigned BUF_PS = aer_pkg::DEF_BUF_PS
) (
  input  logic a,
  output logic y
);
  logic tap [BUFS+1];  // tap[i] is the output of buffer i (tap[0] = input)

  assign tap[0] = a;
  // Each buffer copies its input to its output BUF_PS later (transport
  // delay). The copy made when the process starts gives every tap a defined
  // value from time 0 on, before the input first changes.
  for (genvar i = 0; i < BUFS; i++) begin : g_buf
    always begin
      tap[i+1] <= #(BUF_PS * 1ps) tap[i];
      @(tap[i]);
    end
  end
  assign y = tap[BUFS];
endmodule
