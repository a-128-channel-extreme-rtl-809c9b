// Self-checking testbench of mirror_array_model (128 x 128).
//
// One row at a time is driven with 10 nA, as in the published mismatch
// measurement; the column currents divided by 10 nA are the weights w_ij.
// The bench checks that ln(w_ij) * U_T, the threshold mismatch, has a mean
// near 0 and a standard deviation near 16.5 mV over all 16384 mirrors, that
// all weights are positive, and that the array is linear: the response to
// all rows together equals the sum of the single-row responses.
module tb_mirror_array_model;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned D = 128, L = 128;
  real i_dac [D];
  real i_in [L];
  real single_sum [L];
  int checks = 0, failures = 0;
  mirror_array_model #(.D(D), .L(L)) u_dut (.i_dac, .i_in);

  initial begin
    #10_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real sum, sum2, dvt, mean, sd, x;
    int n, nonpos;
    sum = 0; sum2 = 0; n = 0; nonpos = 0;
    for (int i = 0; i < L; i++) single_sum[i] = 0;
    for (int j = 0; j < D; j++) i_dac[j] = 0.0;
    #10;
    for (int j = 0; j < D; j++) begin
      for (int k = 0; k < D; k++) i_dac[k] = (k == j) ? 10.0e-9 : 0.0;
      #10;
      for (int i = 0; i < L; i++) begin
        x = i_in[i] / 10.0e-9;
        if (x <= 0.0) nonpos++;
        else begin
          dvt = $ln(x) * 25.85e-3;
          sum += dvt; sum2 += dvt * dvt; n++;
        end
        single_sum[i] += i_in[i];
      end
    end
    mean = sum / n;
    sd = $sqrt(sum2 / n - mean * mean);
    $display("mismatch: mean %f mV, sd %f mV over %0d mirrors", mean * 1e3, sd * 1e3, n);
    checks++; if (nonpos != 0) begin failures++; $display("FAIL %0d non-positive weights", nonpos); end
    checks++; if (mean > 0.5e-3 || mean < -0.5e-3) begin failures++; $display("FAIL mean"); end
    checks++; if (sd < 16.0e-3 || sd > 17.0e-3) begin failures++; $display("FAIL sd"); end
    for (int k = 0; k < D; k++) i_dac[k] = 10.0e-9;
    #10;
    for (int i = 0; i < L; i++) begin
      checks++;
      x = i_in[i] - single_sum[i];
      if (x > 1e-15 * D || x < -1e-15 * D) begin failures++; $display("FAIL linearity col %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
