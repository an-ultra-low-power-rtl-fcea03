// tb_aer_encoder: end-to-end test of the AER encoder at its default size
// (8 events, default delay lines).
//
// The event sources are 4-phase producers, one per input; the receiver is a
// 4-phase consumer of out_req/out_addr. Phases:
//   A  latency: each event alone on an idle encoder. out_req must rise
//      exactly (log2(N)-1)*REQ delay + OUT delay after ev_req, ev_ack exactly
//      one REQ plus one ACK delay after it, and out_addr must equal the event
//      number.
//   B  throughput: one source back-to-back with a fast receiver; the input
//      handshake period must equal 2*(REQ delay + ACK delay) plus the two
//      source reaction times (the first stage bounds the rate).
//   C  full-scan load: all sources fire repeatedly with random gaps, the
//      receiver answers with random delays.
//   D  ties: all sources raise their requests in the same instant.
// Always checked: every delivered address belongs to an event that the
// encoder has accepted and not yet delivered; out_addr is stable while
// out_req is high; each source gets exactly its events delivered.
// Mechanisms counted (each must occur): collisions at an input encoder,
// exact ties, back-pressure stalls, semi-decoupled completion of an input
// handshake in a micropipeline stage, and several events in flight at once.
`timescale 1ns/1ps
module tb_aer_encoder;
  localparam int unsigned N  = aer_pkg::DEF_N;
  localparam int unsigned AW = $clog2(N);
  localparam realtime DR = aer_pkg::DEF_REQ_BUFS * aer_pkg::DEF_BUF_PS * 1ps;
  localparam realtime DA = aer_pkg::DEF_ACK_BUFS * aer_pkg::DEF_BUF_PS * 1ps;
  localparam realtime DO = aer_pkg::DEF_OUT_BUFS * aer_pkg::DEF_BUF_PS * 1ps;
  localparam realtime TS = 0.01ns;  // reaction time of a fast source/receiver

  logic          rst_n, out_req, out_ack;
  logic [N-1:0]  ev_req, ev_ack;
  logic [AW-1:0] out_addr;

  int checks = 0, failures = 0;
  bit go = 0;
  bit slow_rx = 0;            // receiver answers with random delays
  int accepted[N], delivered[N], sent[N];
  int n_collision = 0, n_tie = 0, n_stall = 0, n_decoupled = 0, n_inflight = 0;

  aer_encoder dut (.rst_n, .ev_req, .ev_ack, .out_req, .out_ack, .out_addr);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("%t FAIL %s", $realtime, what);
    end
  endtask

  function automatic bit near(input realtime a, input realtime b);
    return (a - b < 0.001ns) && (b - a < 0.001ns);
  endfunction

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- receiver
  initial begin
    out_ack = 0;
    wait (go);
    forever begin
      logic [AW-1:0] a;
      int in_flight;
      wait (out_req);
      #0.01;
      a = out_addr;
      check(accepted[a] > delivered[a],
            $sformatf("address %0d delivered %0d times, accepted %0d", a, delivered[a] + 1, accepted[a]));
      delivered[a]++;
      in_flight = 0;
      for (int i = 0; i < N; i++) in_flight += accepted[i] - delivered[i];
      if (in_flight >= 2) n_inflight++;
      if (slow_rx) #($urandom_range(1, 40) * 0.1ns);
      else         #(TS - 0.01ns + 1ps);
      check(out_addr == a, "out_addr stable while out_req is high");
      out_ack = 1;
      wait (!out_req);
      if (slow_rx) #($urandom_range(1, 20) * 0.1ns);
      else         #TS;
      out_ack = 0;
    end
  end

  // Acceptance: an event counts as accepted when its acknowledge rises.
  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(posedge ev_ack[i]) if (go) accepted[i]++;
    // Collision at an input encoder: this request waits while its sibling
    // holds the encoder.
    always @(posedge ev_req[i]) if (go) begin
      #0.01;
      if (ev_ack[i ^ 1] || (ev_req[i ^ 1] && !ev_ack[i])) n_collision++;
    end
  end

  // Semi-decoupled stage: input handshake of the first input-level stage
  // completes (ack_pre falls) while its output request is still pending.
  always @(negedge dut.u_tree.g_lvl[0].g_mp.g_stage[0].u_mp.ack_pre)
    if (go && dut.u_tree.g_lvl[0].g_mp.g_stage[0].u_mp.req_next) n_decoupled++;

  // ------------------------------------------------------------- one event
  task automatic fire(input int i, output realtime t_ack);
    realtime t0;
    t0 = $realtime;
    ev_req[i] = 1;
    sent[i]++;
    wait (ev_ack[i]);
    t_ack = $realtime - t0;
    #TS;
    ev_req[i] = 0;
    wait (!ev_ack[i]);
  endtask

  // A source sending n events; the first one at once, the others after
  // random gaps. Counts a stall when the acknowledge comes later than on an
  // idle encoder.
  task automatic src_loop(input int i, input int n);
    realtime t_ack;
    for (int k = 0; k < n; k++) begin
      if (k > 0) #($urandom_range(1, 30) * 0.1ns);
      fire(i, t_ack);
      if (t_ack > DR + DA + 0.001ns) n_stall++;
    end
  endtask

  initial begin
    realtime t0, t_ack, t_out, t_fall, period;
    rst_n = 1; ev_req = '0;
    #0.5 rst_n = 0;
    #2 rst_n = 1; go = 1;
    #5;

    // A: latency on an idle encoder.
    for (int i = 0; i < N; i++) begin
      fork
        fire(i, t_ack);
        begin
          t0 = $realtime;
          wait (out_req);
          t_out = $realtime - t0;
          #0.001;
          check(out_addr == AW'(i), $sformatf("event %0d delivered as address %0d", i, out_addr));
          wait (!out_req);
          t_fall = $realtime - t0;
        end
      join
      check(near(t_out, (AW - 1) * DR + DO), $sformatf("event %0d: out_req after %0t", i, t_out));
      check(near(t_ack, DR + DA), $sformatf("event %0d: ev_ack after %0t", i, t_ack));
      if (i == 0) $display("latency ev_req->out_req %0t ps, ev_req->ev_ack %0t ps, ev_req->out_req fall %0t ps",
                           t_out, t_ack, t_fall);
      #10;
    end

    // B: back-to-back events from one source, fast receiver.
    t0 = 0;
    for (int k = 0; k < 40; k++) begin
      if (k == 8) t0 = $realtime;
      fire(3, t_ack);
      #TS;
    end
    period = ($realtime - t0) / 32;
    check(near(period, 2 * (DR + DA) + 2 * TS), $sformatf("input handshake period %0t", period));
    $display("input handshake period %0t ps (%0d MEvent/s)", period, int'(1.0e3 / period));
    #20;

    // C: full-scan load with a slow, random receiver.
    slow_rx = 1;
    fork
      src_loop(0, 40); src_loop(1, 40); src_loop(2, 40); src_loop(3, 40);
      src_loop(4, 40); src_loop(5, 40); src_loop(6, 40); src_loop(7, 40);
    join
    #50;

    // D: exact ties, all sources at once.
    slow_rx = 0;
    repeat (10) begin
      fork
        src_loop(0, 1); src_loop(1, 1); src_loop(2, 1); src_loop(3, 1);
        src_loop(4, 1); src_loop(5, 1); src_loop(6, 1); src_loop(7, 1);
      join
      n_tie++;
      #20;
    end
    #50;

    for (int i = 0; i < N; i++)
      check(sent[i] == delivered[i] && accepted[i] == delivered[i],
            $sformatf("event %0d: sent %0d accepted %0d delivered %0d", i, sent[i], accepted[i], delivered[i]));
    check(n_collision > 0, "collisions occurred");
    check(n_tie > 0,       "ties occurred");
    check(n_stall > 0,     "stalls occurred");
    check(n_decoupled > 0, "semi-decoupled completions occurred");
    check(n_inflight > 0,  "several events in flight");
    $display("mechanisms: collisions=%0d ties=%0d stalls=%0d decoupled=%0d in_flight>=2:%0d",
             n_collision, n_tie, n_stall, n_decoupled, n_inflight);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
