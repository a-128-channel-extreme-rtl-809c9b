// Self-checking testbench of timing_control at reduced cycle counts.
//
// Over several periods it measures, cycle by cycle, the CLK_in period and
// duty, the NEU delay and length, the number of CLK_out pulses while NEU is
// low, the h_valid strobes (one per column, index 0..L-1, each in the cycle
// before a CLK_out rising edge), the one-cycle RN_cnt clear after the
// read-out with frame_done, and the one-time RN_in pulse; it checks them
// against the parameters. It also stops and restarts the sequencer.
module tb_timing_control;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned L = 10, TS = 400, ND = 16, NC = 150, CH = 4, RNL = 4;
  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0;
  logic clk_in, rn_in, neu, clk_out, rn_cnt, h_valid, frame_done;
  logic [6:0] h_idx;
  int checks = 0, failures = 0;

  timing_control #(.L(L), .TS_CYC(TS), .NEU_DLY(ND), .NEU_CYC(NC), .CLKOUT_HALF(CH), .RN_LEN(RNL)) u_dut (
    .clk, .rst_n, .run, .clk_in, .rn_in, .neu, .clk_out, .rn_cnt, .h_valid, .h_idx, .frame_done);
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // per-period trace, cycle 0 = CLK_in rising
  int unsigned t;
  int rn_in_low, periods;
  logic clk_in_q, clk_out_q, neu_q;
  int neu_rise, neu_fall, clkout_rises, hv, nxt_idx, clr_at, fd_at, hi_cnt;
  logic hv_prev;
  logic started = 1'b0;

  task automatic end_period();
    check("CLK_in high cycles", hi_cnt, TS/2);
    check("NEU rise", neu_rise, ND);
    check("NEU length", neu_fall - neu_rise, NC);
    check("CLK_out pulses", clkout_rises, L);
    check("h_valid strobes", hv, L);
    check("RN_cnt position", clr_at, ND + NC + 2*CH*L);
    check("frame_done with RN_cnt", fd_at, clr_at);
    periods++;
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (!rn_in) rn_in_low++;
      if (clk_in && !clk_in_q) begin
        if (started) begin
          check("period", t, TS);
          end_period();
        end
        started = 1'b1;
        t = 0; hi_cnt = 0; neu_rise = -1; neu_fall = -1; clkout_rises = 0; hv = 0; nxt_idx = 0; clr_at = -1; fd_at = -1;
      end
      if (clk_in) hi_cnt++;
      if (neu && !neu_q) neu_rise = t;
      if (!neu && neu_q) neu_fall = t;
      if (clk_out && !clk_out_q) begin
        clkout_rises++;
        check("h_valid before CLK_out rise", int'(hv_prev), 1);
        if (neu) begin failures++; $display("FAIL CLK_out while NEU high"); end
      end
      if (h_valid) begin
        check("h_idx", h_idx, nxt_idx);
        nxt_idx++; hv++;
      end
      if (!rn_cnt) clr_at = t;
      if (frame_done) fd_at = t;
      clk_in_q <= clk_in; clk_out_q <= clk_out; neu_q <= neu; hv_prev = h_valid;
      t++;
    end
  end

  initial begin
    t = 32'hFFFF_FFFF; periods = 0; rn_in_low = 0;
    clk_in_q = 0; clk_out_q = 0; neu_q = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    check("idle: CLK_in low", clk_in, 0);
    t = 0;
    run = 1'b1;
    repeat (TS * 4 + 2) @(negedge clk);
    check("RN_in low once for RN_LEN cycles", rn_in_low, RNL);
    check("periods seen", periods >= 3, 1);
    run = 1'b0;
    repeat (TS * 2) @(negedge clk);
    check("stopped", clk_in, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
