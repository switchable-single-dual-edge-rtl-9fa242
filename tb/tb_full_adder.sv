`timescale 1ns/1ps
// tb_full_adder: exhaustive check of the one-bit full adder against integer
// addition of its three inputs.
module tb_full_adder;
  logic a, b, cin, s, cout;
  int checks = 0, failures = 0;

  full_adder dut (.a, .b, .cin, .s, .cout);

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      checks++;
      if ({cout, s} != 2'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL a=%0d b=%0d cin=%0d -> cout=%0d s=%0d", a, b, cin, cout, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
