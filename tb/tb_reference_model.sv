// Self-checking testbench of reference_model: every 6-bit code must give
// code x 1 nA, so codes 1 and 63 give the 1 nA and 63 nA ends of the range.
module tb_reference_model;
  timeunit 1ns; timeprecision 1ps;
  logic [5:0] iref_code;
  real i_ref;
  int checks = 0, failures = 0;
  reference_model u_dut (.iref_code, .i_ref);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < 64; c++) begin
      iref_code = 6'(c); #1;
      checks++;
      if (i_ref < c * 1.0e-9 - 1.0e-15 || i_ref > c * 1.0e-9 + 1.0e-15) begin
        failures++; $display("FAIL code %0d: %g A", c, i_ref);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
