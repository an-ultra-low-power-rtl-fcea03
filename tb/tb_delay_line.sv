// tb_delay_line: checks the delay of the matched delay line.
//
// A line of 5 buffers of 100 ps must pass each edge of its input after
// exactly 500 ps: the output is sampled just before and just after that time
// for both rising and falling edges, and a zero-buffer line must be a wire.
`timescale 1ns/1ps
module tb_delay_line;
  logic a, y, y0;
  int checks = 0, failures = 0;

  delay_line #(.BUFS(5), .BUF_PS(100)) dut  (.a, .y);
  delay_line #(.BUFS(0), .BUF_PS(100)) dut0 (.a, .y(y0));

  task automatic expect_bit(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%t %s: got %b expected %b", $realtime, what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 0;
    #5;
    for (int i = 0; i < 10; i++) begin
      logic v;
      v = ~a;
      a = v;
      #0.01 expect_bit(y0, v, "zero-length line");
      #0.48 expect_bit(y, ~v, "before 500 ps");
      #0.02 expect_bit(y, v, "after 500 ps");
      #2;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
