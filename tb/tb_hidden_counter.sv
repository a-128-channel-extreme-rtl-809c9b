// Self-checking testbench of hidden_counter.
//
// An asynchronous pulse train (random widths and gaps of at least two clock
// periods) is applied while NEU is high, pulses are also sent while NEU is
// low, and every f_max code is tried: the count must equal the number of
// pulses sent during NEU, capped at 2^(7+f_max) - 1, and RN_cnt must clear it.
module tb_hidden_counter;
  timeunit 1ns; timeprecision 1ps;
  import elm_pkg::*;
  logic clk = 1'b0, rn_cnt = 1'b0, neu = 1'b0, v_o = 1'b0;
  logic [2:0] fmax = '0;
  logic [13:0] count;
  int checks = 0, failures = 0;

  hidden_counter u_dut (.clk, .rn_cnt, .neu, .v_o, .fmax, .count);
  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulses(input int n);
    for (int i = 0; i < n; i++) begin
      #($urandom_range(23, 61)) v_o = 1'b1;
      #($urandom_range(23, 47)) v_o = 1'b0;
    end
  endtask

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  int n, cap, stops_hit = 0;
  initial begin
    #100 rn_cnt = 1'b1;
    for (int code = 0; code < 8; code++) begin
      for (int rep = 0; rep < 3; rep++) begin
        fmax = 3'(code);
        cap  = (1 << (7 + code)) - 1;
        n    = (rep == 0) ? cap + 5 : $urandom_range(0, (code < 3) ? 300 : 400);
        @(negedge clk) rn_cnt = 1'b0; @(negedge clk) rn_cnt = 1'b1;
        check("cleared", count, 0);
        pulses(3);                          // NEU low: ignored
        #100 neu = 1'b1; #100;
        pulses(n);
        #100 neu = 1'b0; #100;
        pulses(2);                          // NEU low again: ignored
        #100;
        check($sformatf("count code %0d", code), count, n > cap ? cap : n);
        if (n > cap) stops_hit++;
      end
    end
    check("stop value reached", stops_hit >= 8, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
