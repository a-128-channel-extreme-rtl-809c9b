// Self-checking testbench of cco_model.
//
// For input currents from 1 nA to 150 nA the bench counts v_o pulses during
// a 1 ms NEU window and compares the count with 1 ms / T_CCO computed from
// T_CCO = C_F*DVDD/I + C_F*DVDD/(I_RST - I) (100 fF, 0.6 V, 200 nA), allowing
// one pulse of phase error. With NEU low, or with zero current, there must be
// no pulses, and a NEU low pulse must restart the integration phase.
module tb_cco_model;
  timeunit 1ns; timeprecision 1ps;
  logic neu = 1'b0, v_o;
  real i_in = 0.0;
  int pulses = 0;
  int checks = 0, failures = 0;
  cco_model u_dut (.neu, .i_in, .v_o);

  always @(posedge v_o) pulses++;

  initial begin
    #100_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic window(input real cur, input int en, output int n);
    i_in = cur; #1000;
    pulses = 0;
    neu = en[0];
    #1_000_000;          // 1 ms
    neu = 1'b0;
    n = pulses;
    #10000;
  endtask

  real currents [6] = '{1.0e-9, 5.0e-9, 12.0e-9, 40.0e-9, 100.0e-9, 150.0e-9};
  initial begin
    int n;
    real t, e;
    foreach (currents[c]) begin
      window(currents[c], 1, n);
      t = 100.0e-15 * 0.6 / currents[c] + 100.0e-15 * 0.6 / (200.0e-9 - currents[c]);
      e = 1.0e-3 / t;
      checks++;
      if (n < $rtoi(e) - 1 || n > $rtoi(e) + 1) begin
        failures++; $display("FAIL I=%g: %0d pulses, expected %f", currents[c], n, e);
      end
    end
    window(50.0e-9, 0, n);
    checks++; if (n != 0) begin failures++; $display("FAIL pulses with NEU low"); end
    window(0.0, 1, n);
    checks++; if (n != 0) begin failures++; $display("FAIL pulses with zero current"); end
    window(12.0e-9, 1, n);
    // NEU low must abort an integration phase: at 1 nA one phase lasts 60 us,
    // so two 40 us NEU windows 1 us apart give no pulse
    i_in = 1.0e-9; #1000; pulses = 0;
    neu = 1'b1; #40_000; neu = 1'b0; #1000; neu = 1'b1; #40_000; neu = 1'b0;
    checks++; if (pulses != 0) begin failures++; $display("FAIL pulse after NEU low: %0d", pulses); end
    #10000;
    // 12 nA: T = 5 us + 0.319 us, 188 pulses in 1 ms
    checks++; if (n < 187 || n > 189) begin failures++; $display("FAIL restart after zero current: %0d", n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
