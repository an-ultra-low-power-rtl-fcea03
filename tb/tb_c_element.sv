// tb_c_element: self-checking test of the Muller C-element.
//
// Drives random input pairs (and resets) and compares y with a reference
// state machine: y becomes 1 when both inputs are 1, 0 when both are 0, and
// keeps its previous value otherwise.
`timescale 1ns/1ps
module tb_c_element;
  logic rst_n, x1, x2, y;
  logic model;
  int checks = 0, failures = 0;

  c_element dut (.rst_n, .x1, .x2, .y);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; x1 = 0; x2 = 0; model = 0;
    #1;
    checks++; if (y !== 1'b0) begin failures++; $display("reset: y=%b", y); end
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      x1 = 1'($urandom_range(0, 1));
      x2 = 1'($urandom_range(0, 1));
      if ($urandom_range(0, 49) == 0) begin
        rst_n = 0; model = 0;
      end else begin
        rst_n = 1;
        if (x1 && x2)        model = 1;
        else if (!x1 && !x2) model = 0;
      end
      #1;
      checks++;
      if (y !== model) begin
        failures++;
        $display("step %0d: x1=%b x2=%b rst_n=%b y=%b expected %b", i, x1, x2, rst_n, y, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
