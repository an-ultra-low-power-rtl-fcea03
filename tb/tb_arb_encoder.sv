// tb_arb_encoder: self-checking test of the arbitered encoder.
//
// Two 4-phase sources compete for the output channel, which a 4-phase
// receiver with random response times serves. Checked at every output
// handshake: the address names a side whose request is high, the
// acknowledge returns to that side and only that side, it falls again after
// the receiver's acknowledge falls, and the two acknowledges are never high
// together. At the end each side must have been served exactly as often as
// it requested. Three phases: staggered random traffic, exact ties (both
// requests rise in the same instant), and a held loser (a request that
// arrives while the other side is being served must wait for it).
`timescale 1ns/1ps
module tb_arb_encoder;
  logic rst_n, req1, req2, ack1, ack2, req_next, ack_next, addr;
  int checks = 0, failures = 0;
  bit go = 0;  // set once reset has been released
  int sent[2], served[2];
  int ties = 0, held = 0;

  arb_encoder dut (.rst_n, .req1, .ack1, .req2, .ack2, .req_next, .ack_next, .addr);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("%t FAIL %s (req1=%b req2=%b ack1=%b ack2=%b addr=%b)",
               $realtime, what, req1, req2, ack1, ack2, addr);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Receiver: serves the output channel.
  initial begin
    ack_next = 0;
    wait (go);
    forever begin
      logic a;
      wait (req_next);
      #0.01;
      a = addr;
      check(a ? req2 : req1, "address names a requesting side");
      #($urandom_range(1, 20) * 0.1);
      ack_next = 1;
      #0.01;
      check(a ? (ack2 && !ack1) : (ack1 && !ack2), "acknowledge returns to the granted side");
      if (a) served[1]++; else served[0]++;
      wait (!req_next);
      #($urandom_range(1, 20) * 0.1);
      ack_next = 0;
      #0.01;
      check(!ack1 && !ack2, "acknowledge returns to zero");
    end
  end

  always @(ack1 or ack2) if (rst_n) #0 check(!(ack1 && ack2), "mutual exclusion");

  task automatic handshake(input int side);
    if (side == 0) begin
      req1 = 1; sent[0]++; wait (ack1); #0.3; req1 = 0; wait (!ack1);
    end else begin
      req2 = 1; sent[1]++; wait (ack2); #0.3; req2 = 0; wait (!ack2);
    end
  endtask

  initial begin
    rst_n = 1; #0.5 rst_n = 0; req1 = 0; req2 = 0;
    #2 rst_n = 1; go = 1;
    #1;
    // Phase 1: independent random traffic.
    fork
      repeat (60) begin #($urandom_range(0, 30) * 0.1); handshake(0); end
      repeat (60) begin #($urandom_range(0, 30) * 0.1); handshake(1); end
    join
    #5;
    // Phase 2: exact ties.
    repeat (20) begin
      fork
        handshake(0);
        handshake(1);
      join
      ties++;
      #1;
    end
    // Phase 3: a request arriving during the other's handshake is held.
    repeat (10) begin
      fork
        handshake(0);
        begin
          #0.05;
          check(ack1 == 0, "no acknowledge before the receiver answers");
          req2 = 1; sent[1]++;
          wait (ack1);
          check(!ack2, "held request not acknowledged while the other is served");
          held++;
          wait (ack2); #0.3; req2 = 0; wait (!ack2);
        end
      join
      #1;
    end
    #5;
    for (int s = 0; s < 2; s++)
      check(sent[s] == served[s], $sformatf("side %0d: sent %0d served %0d", s + 1, sent[s], served[s]));
    check(ties == 20 && held == 10, "tie and hold phases completed");
    $display("served: side1=%0d side2=%0d ties=%0d held=%0d", served[0], served[1], ties, held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
