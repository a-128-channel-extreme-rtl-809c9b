// Self-checking testbench of spi_config: checks the reset values, sends two
// random frames (D + 3L + 6 bits, MSB first, mode 0) and checks every
// S_ext bit, f_max code and the I_ref code after cs_n rises, that nothing
// changes before cs_n rises, and that miso returns the previous frame.
module tb_spi_config;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned D = 128, L = 128, NB = D + 3*L + 6;
  logic clk = 1'b0, por_n = 1'b0, sclk = 1'b0, mosi = 1'b0, cs_n = 1'b1;
  logic miso;
  logic [D-1:0] s_ext;
  logic [2:0] fmax [L];
  logic [5:0] iref_code;
  logic [NB-1:0] frame, prev, back;
  int checks = 0, failures = 0;

  spi_config #(.D(D), .L(L)) u_dut (.clk, .por_n, .sclk, .mosi, .cs_n, .miso, .s_ext, .fmax, .iref_code);
  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic send(input logic [NB-1:0] f, output logic [NB-1:0] rx);
    cs_n = 1'b0; #100;
    for (int b = NB-1; b >= 0; b--) begin
      mosi = f[b]; #40;
      rx[b] = miso;
      sclk = 1'b1; #50; sclk = 1'b0; #10;
    end
    #100;
  endtask

  initial begin
    #100 por_n = 1'b1; #50;
    check("reset s_ext", int'(s_ext != 0), 0);
    check("reset fmax0", fmax[0], 7);
    check("reset iref", iref_code, 32);
    prev = '0;
    for (int n = 0; n < 2; n++) begin
      for (int w = 0; w < NB; w += 32) frame[w +: 32] = $urandom;
      send(frame, back);
      check("unchanged before cs_n rises", iref_code, n == 0 ? 32 : int'(prev[NB-1 -: 6]));
      cs_n = 1'b1; #100;
      check("miso returns previous frame", int'(back == prev), 1);
      for (int j = 0; j < D; j++) check($sformatf("s_ext[%0d]", j), s_ext[j], frame[j]);
      for (int i = 0; i < L; i++) check($sformatf("fmax[%0d]", i), fmax[i], frame[D + 3*i +: 3]);
      check("iref", iref_code, frame[NB-1 -: 6]);
      prev = frame;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
