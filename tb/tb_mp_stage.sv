// tb_mp_stage: self-checking test of one semi-decoupled micropipeline stage.
//
// A 4-phase producer sends random 4-bit words; a 4-phase receiver takes them.
// Checked: every word arrives once and in order; data_out is valid one ACK
// delay after req_next rises; on an idle stage req_next rises exactly one REQ
// delay and ack_pre exactly one REQ plus one ACK delay after req_pre; the
// input handshake completes while the receiver is still stalled (the
// semi-decoupled property); and a second word is not acknowledged until the
// stage's output request has returned to zero.
`timescale 1ns/1ps
module tb_mp_stage;
  localparam int unsigned W = 4, RB = 3, AB = 2, BP = 100;
  localparam realtime DR = RB * BP * 1ps, DA = AB * BP * 1ps;

  logic rst_n, req_pre, ack_pre, req_next, ack_next;
  logic [W-1:0] data_in, data_out;
  int checks = 0, failures = 0;
  bit go = 0;  // set once reset has been released
  int received = 0, decoupled = 0, blocked = 0;
  bit stall = 0;
  logic [W-1:0] q[$];

  mp_stage #(.W(W), .REQ_BUFS(RB), .ACK_BUFS(AB), .BUF_PS(BP)) dut (
    .rst_n, .req_pre, .ack_pre, .data_in, .req_next, .ack_next, .data_out
  );

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
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Receiver.
  initial begin
    ack_next = 0;
    wait (go);
    forever begin
      logic [W-1:0] exp;
      wait (req_next);
      #(DA + 0.01ns);
      exp = q.size() ? q.pop_front() : 'x;
      check(data_out == exp, $sformatf("data_out %h expected %h", data_out, exp));
      received++;
      wait (!stall);
      #($urandom_range(1, 15) * 0.1ns);
      ack_next = 1;
      wait (!req_next);
      #($urandom_range(1, 15) * 0.1ns);
      ack_next = 0;
    end
  end

  // One producer handshake; returns when the input handshake has completed.
  task automatic send(input logic [W-1:0] v);
    data_in = v;
    #0.05;
    req_pre = 1;
    wait (ack_pre);
    q.push_back(v);
    #0.05 data_in = ~v;  // data may change once acknowledged
    $display("%t sent %h", $realtime, v);
    #($urandom_range(1, 10) * 0.1ns);
    req_pre = 0;
    wait (!ack_pre);
  endtask

  initial begin
    realtime t0;
    rst_n = 1; #0.5 rst_n = 0; req_pre = 0; data_in = '0;
    #2;
    check(!req_next && !ack_pre && data_out == '0, $sformatf("reset state rn=%b ap=%b d=%h", req_next, ack_pre, data_out));
    rst_n = 1; go = 1;
    #1;
    // Forward latencies of an idle stage.
    data_in = 4'h5;
    #0.05;
    t0 = $realtime;
    req_pre = 1;
    wait (req_next);
    check(near($realtime - t0, DR), $sformatf("req_next after %0t, expected %0t", $realtime - t0, DR));
    wait (ack_pre);
    check(near($realtime - t0, DR + DA), $sformatf("ack_pre after %0t, expected %0t", $realtime - t0, DR + DA));
    q.push_back(4'h5);
    #0.05 req_pre = 0;
    wait (!ack_pre);
    #10;
    // Random stream.
    repeat (200) begin
      send(4'($urandom));
      #($urandom_range(1, 20) * 0.1ns);
    end
    #10;
    // Decoupling: with the receiver stalled, the input handshake still completes.
    repeat (5) begin
      stall = 1;
      send(4'($urandom));
      check(!ack_next, "input handshake finished while the receiver is stalled");
      decoupled++;
      // A second word must wait until the first has left the output.
      data_in = 4'($urandom);
      #0.05 req_pre = 1;
      #(5 * (DR + DA));
      check(!ack_pre && req_next, "second word held while the stage is full");
      blocked++;
      stall = 0;
      wait (ack_pre);
      q.push_back(data_in);
      #0.05 req_pre = 0;
      wait (!ack_pre);
      #10;
    end
    #10;
    check(received == 1 + 200 + 10 && q.size() == 0, $sformatf("received %0d words", received));
    check(decoupled == 5 && blocked == 5, "decoupling phase completed");
    $display("received=%0d decoupled=%0d blocked=%0d", received, decoupled, blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
