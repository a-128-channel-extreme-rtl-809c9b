// Self-checking testbench of spk_demux: every address with and without the
// spike strobe, plus random addresses, compared with a one-hot prediction.
module tb_spk_demux;
  timeunit 1ns; timeprecision 1ps;
  logic spk;
  logic [6:0] addr;
  logic [127:0] row_spk;
  int checks = 0, failures = 0;

  spk_demux u_dut (.spk, .addr, .row_spk);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [127:0] exp);
    checks++;
    if (row_spk !== exp) begin
      failures++;
      $display("FAIL spk=%0b addr=%0d got %h expected %h", spk, addr, row_spk, exp);
    end
  endtask

  initial begin
    for (int a = 0; a < 128; a++) begin
      spk = 1'b1; addr = 7'(a); #1; check(128'(1) << a);
      spk = 1'b0; #1; check('0);
    end
    for (int n = 0; n < 500; n++) begin
      spk = 1'($urandom_range(0, 1)); addr = 7'($urandom);
      #1; check(spk ? (128'(1) << addr) : '0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
