// tb_aer_node: self-checking test of an inner tree node (CW = 2).
//
// Two 4-phase children offer random 2-bit addresses; a receiver with random
// response times serves the node's output. At each output request the
// 3-bit address must be {side, that side's address} for a side whose
// request is high, and the acknowledge must go back to that side only. At
// the end every child word must have been delivered. Includes exact ties.
`timescale 1ns/1ps
module tb_aer_node;
  localparam int unsigned CW = 2;
  logic rst_n, req1, req2, ack1, ack2, req_next, ack_next;
  logic [CW-1:0] addr1, addr2;
  logic [CW:0]   addr;
  int checks = 0, failures = 0;
  bit go = 0;
  int sent[2], served[2];

  aer_node #(.CW(CW)) dut (
    .rst_n, .req1, .ack1, .addr1, .req2, .ack2, .addr2, .req_next, .ack_next, .addr
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("%t FAIL %s", $realtime, what);
    end
  endtask

  initial begin
    #200000;
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
      logic [CW:0] a;
      wait (req_next);
      #0.01;
      a = addr;
      if (a[CW]) check(req2 && a[CW-1:0] == addr2, $sformatf("addr %b, child 2 offers %b", a, addr2));
      else       check(req1 && a[CW-1:0] == addr1, $sformatf("addr %b, child 1 offers %b", a, addr1));
      #($urandom_range(1, 20) * 0.1ns);
      ack_next = 1;
      #0.01;
      check(a[CW] ? (ack2 && !ack1) : (ack1 && !ack2), "acknowledge returns to the granted side");
      served[a[CW]]++;
      wait (!req_next);
      #($urandom_range(1, 20) * 0.1ns);
      ack_next = 0;
    end
  end

  task automatic child(input int side);
    logic [CW-1:0] v;
    v = CW'($urandom);
    sent[side]++;
    if (side == 0) begin
      addr1 = v; #0.05 req1 = 1; wait (ack1); #0.1 addr1 = ~v; req1 = 0; wait (!ack1);
    end else begin
      addr2 = v; #0.05 req2 = 1; wait (ack2); #0.1 addr2 = ~v; req2 = 0; wait (!ack2);
    end
  endtask

  initial begin
    rst_n = 1; req1 = 0; req2 = 0; addr1 = '0; addr2 = '0;
    #0.5 rst_n = 0;
    #2 rst_n = 1; go = 1;
    #1;
    fork
      repeat (80) begin #($urandom_range(1, 30) * 0.1ns); child(0); end
      repeat (80) begin #($urandom_range(1, 30) * 0.1ns); child(1); end
    join
    repeat (20) begin
      #1;
      fork child(0); child(1); join
    end
    #5;
    for (int s = 0; s < 2; s++)
      check(sent[s] == served[s], $sformatf("child %0d: sent %0d served %0d", s + 1, sent[s], served[s]));
    $display("served: child1=%0d child2=%0d", served[0], served[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
