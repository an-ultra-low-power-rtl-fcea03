// tb_aer_fullscan: full-scan event stream from a 100 MHz clocked injector.
//
// This reproduces the kind of load used to characterise the encoder in
// silicon: a synchronous test controller running at 100 MHz scans through
// the N inputs in order, one 4-phase event at a time, and also acts as the
// receiver of the encoded addresses. Both handshakes are driven from the
// controller clock: a request is raised on a clock edge, the acknowledge is
// sampled on the following edges. The encoder at its default size and
// delays answers well within one clock period, so each input handshake
// takes exactly two clock periods (20 ns, 50 MEvent/s); the test checks
// that period, that the addresses come out in scan order, and that nothing
// is lost. Board, pad and synchroniser delays of a real test setup are not
// modelled; they lengthen the handshake by whole clock periods.
`timescale 1ns/1ps
module tb_aer_fullscan;
  localparam int unsigned N      = aer_pkg::DEF_N;
  localparam int unsigned AW     = $clog2(N);
  localparam int unsigned ROUNDS = 50;
  localparam realtime     TCLK   = 10ns;

  logic          clk = 0, rst_n, out_req, out_ack;
  logic [N-1:0]  ev_req, ev_ack;
  logic [AW-1:0] out_addr;

  int checks = 0, failures = 0;
  int sent = 0, got = 0;
  int scan = 0;                  // next input to fire
  logic [AW-1:0] expect_addr = '0;
  realtime t_first, t_last;

  aer_encoder dut (.rst_n, .ev_req, .ev_ack, .out_req, .out_ack, .out_addr);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("%t FAIL %s", $realtime, what);
    end
  endtask

  always #(TCLK / 2) clk = ~clk;

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Injector: raise, wait for ack high, lower, wait for ack low, next input.
  typedef enum logic [1:0] {IDLE, RAISED, LOWERED, DONE} inj_state_t;
  inj_state_t inj = IDLE;

  always @(posedge clk) begin
    if (rst_n) begin
      unique case (inj)
        IDLE: begin
          ev_req[scan] <= 1'b1;
          if (sent == 0) t_first = $realtime;
          t_last = $realtime;
          sent++;
          inj <= RAISED;
        end
        RAISED: if (ev_ack[scan]) begin
          ev_req[scan] <= 1'b0;
          inj <= LOWERED;
        end
        LOWERED: if (!ev_ack[scan]) begin
          scan = (scan + 1) % N;
          if (sent == N * ROUNDS) inj <= DONE;
          else begin
            ev_req[scan] <= 1'b1;
            t_last = $realtime;
            sent++;
            inj <= RAISED;
          end
        end
        DONE: ;
      endcase
    end
  end

  // Receiver in the same clock domain.
  always @(posedge clk) begin
    if (rst_n) begin
      if (out_req && !out_ack) begin
        check(out_addr == expect_addr, $sformatf("got address %0d, expected %0d", out_addr, expect_addr));
        expect_addr <= expect_addr + 1'b1;
        got++;
        out_ack <= 1'b1;
      end else if (!out_req && out_ack) begin
        out_ack <= 1'b0;
      end
    end
  end

  initial begin
    realtime period;
    rst_n = 1; ev_req = '0; out_ack = 0;
    #0.5 rst_n = 0;
    #(TCLK + 2ns) rst_n = 1;
    wait (inj == DONE);
    repeat (5) @(posedge clk);
    check(got == N * ROUNDS, $sformatf("received %0d of %0d events", got, N * ROUNDS));
    period = (t_last - t_first) / (sent - 1);
    check(period == 2 * TCLK, $sformatf("input handshake period %0t", period));
    $display("full scan: %0d events, period %0t ps, %0d MEvent/s", got, period, int'(1.0e3 / period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
