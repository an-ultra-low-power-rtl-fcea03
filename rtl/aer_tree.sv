// aer_tree: hierarchical binary AER tree over N event sources.
//
// The tree is built level by level. Level 0 has N/2 arbitered encoders,
// each taking two neighbouring events and producing a one-bit address.
// Level l (1 <= l < log2(N)) has N/2^(l+1) aer_nodes; each joins two
// outputs of level l-1, multiplexes their l-bit addresses and adds one bit.
// Every encoder output below the root passes through one micropipeline
// stage before the next level, so there are log2(N) encoder levels and
// log2(N)-1 micropipeline columns; the root encoder's output is the tree's
// output.
// Event i receives address i: at every level the lower-numbered half is
// input 1 (bit 0) and the upper half input 2 (bit 1).
//
// Each micropipeline stage decouples its level from the next, so up to one
// event per stage is in flight. Collisions are resolved at each node by the
// node's arbiter; a losing request waits in place, holding its data.
//
// Interface: ev_req/ev_ack, one 4-phase pair per event; req/ack/addr of the
// root encoder. Timing: the root req rises one REQ delay per micropipeline
// column after an event request on an idle tree. The root addr becomes
// valid one ACK delay after the root req rises (the last stage's register
// is clocked by its delayed acknowledge), so a receiver must delay req; the
// top level does so.
//
// N must be a power of two, at least 2. The tree structure follows the
// published architecture; the bit order of event inputs is this design's
// own choice.
//
// The combinational loops that tools report inside the C-elements and the
// arbiter's NAND latch are the state of this asynchronous circuit and are
// intentional.
`timescale 1ns/1ps
module aer_tree #(
  parameter int unsigned N        = aer_pkg::DEF_N,
  parameter int unsigned REQ_BUFS = aer_pkg::DEF_REQ_BUFS,
  parameter int unsigned ACK_BUFS = aer_pkg::DEF_ACK_BUFS,
  parameter int unsigned BUF_PS   = aer_pkg::DEF_BUF_PS,
  localparam int unsigned AW      = $clog2(N)
) (
  input  logic          rst_n,
  input  logic [N-1:0]  ev_req,
  output logic [N-1:0]  ev_ack,
  output logic          req,
  input  logic          ack,
  output logic [AW-1:0] addr
);
  for (genvar l = 0; l < AW; l++) begin : g_lvl
    localparam int unsigned NN = N >> (l + 1);  // encoders at this level
    localparam int unsigned OW = l + 1;         // address bits they produce

    // Encoder outputs of this level.
    logic          enc_req [NN];
    logic          enc_ack [NN];
    logic [OW-1:0] enc_addr[NN];

    for (genvar k = 0; k < NN; k++) begin : g_enc
      if (l == 0) begin : g_leaf
        arb_encoder u_arb (
          .rst_n,
          .req1(ev_req[2*k]),   .ack1(ev_ack[2*k]),
          .req2(ev_req[2*k+1]), .ack2(ev_ack[2*k+1]),
          .req_next(enc_req[k]), .ack_next(enc_ack[k]), .addr(enc_addr[k][0])
        );
      end else begin : g_inner
        aer_node #(.CW(l)) u_node (
          .rst_n,
          .req1(g_lvl[l-1].g_mp.mp_req[2*k]),   .ack1(g_lvl[l-1].g_mp.mp_ack[2*k]),
          .addr1(g_lvl[l-1].g_mp.mp_addr[2*k]),
          .req2(g_lvl[l-1].g_mp.mp_req[2*k+1]), .ack2(g_lvl[l-1].g_mp.mp_ack[2*k+1]),
          .addr2(g_lvl[l-1].g_mp.mp_addr[2*k+1]),
          .req_next(enc_req[k]), .ack_next(enc_ack[k]), .addr(enc_addr[k])
        );
      end
    end

    if (l < AW - 1) begin : g_mp
      // Micropipeline column behind this level.
      logic          mp_req [NN];
      logic          mp_ack [NN];
      logic [OW-1:0] mp_addr[NN];

      for (genvar k = 0; k < NN; k++) begin : g_stage
        mp_stage #(.W(OW), .REQ_BUFS(REQ_BUFS), .ACK_BUFS(ACK_BUFS), .BUF_PS(BUF_PS)) u_mp (
          .rst_n,
          .req_pre(enc_req[k]),  .ack_pre(enc_ack[k]),  .data_in(enc_addr[k]),
          .req_next(mp_req[k]),  .ack_next(mp_ack[k]),  .data_out(mp_addr[k])
        );
      end
    end else begin : g_root
      assign req        = enc_req[0];
      assign enc_ack[0] = ack;
      assign addr       = enc_addr[0];
    end
  end
endmodule
