// Self-checking testbench of column_scanner: random counter values are
// latched on the NEU falling edge, the counters then change (as when they
// are cleared), and L CLK_out pulses must present h_1 .. h_L in order on C,
// staying on the last column after extra pulses.
module tb_column_scanner;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned L = 128;
  logic clk = 1'b0, rst_n = 1'b0, neu = 1'b0, clk_out = 1'b0;
  logic [13:0] h [L];
  logic [13:0] c;
  logic [13:0] exp_h [L];
  int checks = 0, failures = 0;

  column_scanner #(.L(L)) u_dut (.clk, .rst_n, .neu, .clk_out, .h, .c);
  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int frame = 0; frame < 4; frame++) begin
      for (int i = 0; i < L; i++) begin h[i] = 14'($urandom); exp_h[i] = h[i]; end
      neu = 1'b1; repeat (20) @(negedge clk);
      neu = 1'b0; repeat (3) @(negedge clk);
      for (int i = 0; i < L; i++) h[i] = '0;     // counters cleared after the latch
      for (int i = 0; i < L + 2; i++) begin
        checks++;
        if (c !== exp_h[i < L ? i : L-1]) begin
          failures++; $display("FAIL frame %0d word %0d: got %0d expected %0d", frame, i, c, exp_h[i < L ? i : L-1]);
        end
        clk_out = 1'b1; repeat (3) @(negedge clk);
        clk_out = 1'b0; repeat (3) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
