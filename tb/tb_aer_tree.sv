// tb_aer_tree: test of the bare AER tree at 16 events (four encoder levels,
// three micropipeline columns), showing that the structure scales.
//
// The tree's root request is not delayed, so the receiver reads the address
// one ACK delay after the request rises, as the bundled-data timing of the
// last micropipeline stage requires. Checked: on an idle tree the root
// request rises exactly 3 REQ delays after an event request and carries the
// event's number; under random load from all 16 sources, and with all 16
// requests raised in the same instant, every event is delivered exactly once
// and only after it was accepted.
`timescale 1ns/1ps
module tb_aer_tree;
  localparam int unsigned N  = 16;
  localparam int unsigned AW = $clog2(N);
  localparam int unsigned RB = 6, AB = 3, BP = 100;
  localparam realtime DR = RB * BP * 1ps, DA = AB * BP * 1ps;

  logic          rst_n, req, ack;
  logic [N-1:0]  ev_req, ev_ack;
  logic [AW-1:0] addr;

  int checks = 0, failures = 0;
  bit go = 0;
  int phase = 0;                 // 1: random load, 2..: tie rounds
  int accepted[N], delivered[N], sent[N];
  int done_cnt = 0;

  aer_tree #(.N(N), .REQ_BUFS(RB), .ACK_BUFS(AB), .BUF_PS(BP)) dut (
    .rst_n, .ev_req, .ev_ack, .req, .ack, .addr
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
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Receiver: reads the address one ACK delay after req.
  initial begin
    ack = 0;
    wait (go);
    forever begin
      logic [AW-1:0] a;
      wait (req);
      #(DA + 0.01ns);
      a = addr;
      check(accepted[a] > delivered[a], $sformatf("address %0d delivered but not pending", a));
      delivered[a]++;
      #($urandom_range(1, 20) * 0.1ns);
      check(addr == a, "address stable while req is high");
      ack = 1;
      wait (!req);
      #($urandom_range(1, 10) * 0.1ns);
      ack = 0;
    end
  end

  task automatic fire(input int i);
    ev_req[i] = 1;
    sent[i]++;
    wait (ev_ack[i]);
    #0.01;
    ev_req[i] = 0;
    wait (!ev_ack[i]);
  endtask

  for (genvar i = 0; i < N; i++) begin : g_src
    always @(posedge ev_ack[i]) if (go) accepted[i]++;
    initial begin
      wait (phase == 1);
      repeat (25) begin
        #($urandom_range(1, 40) * 0.1ns);
        fire(i);
      end
      done_cnt++;
      for (int r = 2; r < 12; r++) begin
        wait (phase == r);
        fire(i);
        done_cnt++;
      end
    end
  end

  initial begin
    realtime t0;
    rst_n = 1; ev_req = '0;
    #0.5 rst_n = 0;
    #2 rst_n = 1; go = 1;
    #5;
    // Idle latency of four events spread over the tree.
    for (int i = 0; i < N; i += 5) begin
      t0 = $realtime;
      fork
        fire(i);
        begin
          wait (req);
          check(near($realtime - t0, (AW - 1) * DR), $sformatf("event %0d: req after %0t", i, $realtime - t0));
          #(DA + 0.01ns);
          check(addr == AW'(i), $sformatf("event %0d delivered as %0d", i, addr));
        end
      join
      #10;
    end
    // Random load, then ten rounds of exact ties.
    phase = 1;
    wait (done_cnt == N);
    for (int r = 2; r < 12; r++) begin
      #20;
      done_cnt = 0;
      phase = r;
      wait (done_cnt == N);
    end
    #50;
    for (int i = 0; i < N; i++)
      check(sent[i] == delivered[i] && accepted[i] == delivered[i],
            $sformatf("event %0d: sent %0d accepted %0d delivered %0d", i, sent[i], accepted[i], delivered[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
