// Self-checking testbench of the MLCP chip model (D = 16 rows, L = 8 nodes,
// sub-window and NEU phase shortened to 400 us and 300 us, 10 MHz clk).
//
// The bench drives the chip pins as the DSP would: it programs S_ext, f_max
// and I_ref over SPI, sends random spike trains as SPK pulses with
// addresses, gives a CLK_in edge per sub-window, a NEU phase, L CLK_out
// pulses to read C<13:0>, and RN_cnt. Its own row model predicts every
// window count Q (checked inside the chip), and from Q, I_ref and the drawn
// mirror weights it predicts every hidden count through the CCO equation;
// each word read on C must match within one pulse, or equal the f_max stop
// value. Row 5 takes the delayed counts of row 4 (TDBDI); node 0 has the
// lowest stop value; bursts drive some windows into saturation. Each of
// these must be seen at least once.
module tb_mlcp;
  timeunit 1ns; timeprecision 1ps;
  import tb_ref_pkg::*;
  localparam int unsigned D = 16, L = 8;
  localparam int unsigned NEU_CYC = 3000;
  localparam int IREF = 6;
  localparam int TD_ROW = 5;
  localparam int unsigned NB = D + 3*L + 6;

  logic clk = 1'b0, por_n = 1'b0;
  logic spk = 1'b0, rn_in = 1'b1, clk_in = 1'b0, neu = 1'b0, rn_cnt = 1'b1, clk_out = 1'b0;
  logic [6:0] addr = '0;
  logic [2:0] sdl = 3'd1;
  logic sclk = 1'b0, mosi = 1'b0, cs_n = 1'b1, miso;
  logic [13:0] c;
  int checks = 0, failures = 0;
  int n_tdbdi = 0, n_qsat = 0, n_cap = 0;

  mlcp #(.D(D), .L(L)) u_dut (.clk, .por_n, .spk, .addr, .sdl, .rn_in, .clk_in, .neu, .rn_cnt, .clk_out, .c,
    .sclk, .mosi, .cs_n, .miso);
  always #50 clk = ~clk;

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic spi_send(input logic [NB-1:0] f);
    cs_n = 1'b0; #1000;
    for (int b = NB-1; b >= 0; b--) begin
      mosi = f[b]; #500; sclk = 1'b1; #500; sclk = 1'b0;
    end
    #1000 cs_n = 1'b1; #1000;
  endtask

  task automatic cyc(input int n); repeat (n) @(negedge clk); endtask

  row_ref rows [D];
  int fmax_code [L];
  logic [NB-1:0] frame;

  initial begin
    int nsp [D];
    int q_exp [D];
    real i_exp;
    for (int j = 0; j < D; j++) rows[j] = new();
    cyc(4); por_n = 1'b1; cyc(4);
    // configuration frame: iref, fmax[L-1..0], s_ext[D-1..0]
    frame = '0;
    frame[NB-1 -: 6] = 6'(IREF);
    for (int i = 0; i < L; i++) begin
      fmax_code[i] = (i == 0) ? 0 : 7;
      frame[D + 3*i +: 3] = 3'(fmax_code[i]);
    end
    frame[TD_ROW] = 1'b1;
    spi_send(frame);
    rn_in = 1'b0; rn_cnt = 1'b0; cyc(3); rn_in = 1'b1; rn_cnt = 1'b1; cyc(3);

    for (int p = 0; p < 16; p++) begin
      // spikes of sub-window p
      for (int j = 0; j < D; j++) begin
        nsp[j] = (p >= 3 && p < 9 && j < 2) ? 14 : $urandom_range(0, 9);
      end
      for (int k = 0; k < 15; k++)
        for (int j = 0; j < D; j++)
          if (k < nsp[j]) begin
            addr = 7'(j); spk = 1'b1; cyc(3); spk = 1'b0; cyc(3);
            rows[j].spike();
          end
      // CLK_in rising edge closes the sub-window
      cyc(5);
      clk_in = 1'b1;
      begin
        int taps [D];
        for (int j = 0; j < D; j++) taps[j] = rows[j].tap(int'(sdl));
        for (int j = 0; j < D; j++) rows[j].tick(j == TD_ROW, j == 0 ? 0 : taps[j-1]);
      end
      cyc(10);
      for (int j = 0; j < D; j++) begin
        q_exp[j] = rows[j].q();
        checks++;
        if (u_dut.q[j] != 6'(q_exp[j])) begin
          failures++; $display("FAIL p%0d Q[%0d]: got %0d expected %0d", p, j, u_dut.q[j], q_exp[j]);
        end
        if (rows[j].raw_sum() > 63) n_qsat++;
      end
      if (q_exp[TD_ROW] > 0) n_tdbdi++;
      // NEU phase
      neu = 1'b1; cyc(NEU_CYC); neu = 1'b0; cyc(4);
      // read-out
      for (int i = 0; i < L; i++) begin
        i_exp = 0.0;
        for (int j = 0; j < D; j++) i_exp += u_dut.u_mirror.w[i][j] * (IREF * 1.0e-9) * q_exp[j] / 64.0;
        checks++;
        if (!count_ok(int'(c), i_exp, NEU_CYC * 100.0e-9, fmax_code[i])) begin
          failures++;
          $display("FAIL p%0d h[%0d]: got %0d expected %f (I_in %g)", p, i, c, exp_pulses(i_exp, NEU_CYC * 100.0e-9), i_exp);
        end
        if (int'(c) == stop_value(fmax_code[i])) n_cap++;
        clk_out = 1'b1; cyc(3); clk_out = 1'b0; cyc(3);
      end
      rn_cnt = 1'b0; cyc(1); rn_cnt = 1'b1;
      clk_in = 1'b0;
      cyc(20);
    end
    $display("mechanisms: tdbdi=%0d q_saturation=%0d fmax_stop=%0d", n_tdbdi, n_qsat, n_cap);
    checks++; if (n_tdbdi == 0) begin failures++; $display("FAIL TDBDI row never active"); end
    checks++; if (n_qsat == 0) begin failures++; $display("FAIL window saturation never seen"); end
    checks++; if (n_cap == 0) begin failures++; $display("FAIL f_max stop never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
