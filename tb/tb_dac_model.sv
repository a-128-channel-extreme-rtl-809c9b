// Self-checking testbench of dac_model: for several reference currents and
// every 6-bit input, I_DAC must be I_ref * D / 64.
module tb_dac_model;
  timeunit 1ns; timeprecision 1ps;
  logic [5:0] d;
  real i_ref, i_dac, e;
  int checks = 0, failures = 0;
  dac_model u_dut (.d, .i_ref, .i_dac);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 1; r <= 63; r += 31) begin
      i_ref = r * 1.0e-9;
      for (int c = 0; c < 64; c++) begin
        d = 6'(c); #1;
        e = r * 1.0e-9 * c / 64.0;
        checks++;
        if (i_dac < e - 1.0e-16 || i_dac > e + 1.0e-16) begin
          failures++; $display("FAIL iref %0d nA d %0d: %g A expected %g", r, c, i_dac, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
