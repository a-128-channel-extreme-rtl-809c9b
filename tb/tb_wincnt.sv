// Self-checking testbench of wincnt.
//
// Two rows are chained as on the chip: row 1 counts its own spikes
// (S_ext = 0), row 2 takes row 1's delayed sub-window counts (S_ext = 1).
// The bench sends random spike bursts per sub-window, counts them itself and
// predicts, at every tick, the 4-bit sub-window value entering each window,
// the exact sum of the last five and the saturated 6-bit Q, and the D_o taps
// selected by SDL. It also replays the published measurement: 14 spikes per
// 20 ms window give Q = 14, 28, 42, 56, 63 starting two ticks (40 ms) after
// the spikes start, and with SDL = 001 the delayed row follows two ticks
// (40 ms) later.
module tb_wincnt;
  timeunit 1ns; timeprecision 1ps;
  import elm_pkg::*;

  localparam int unsigned P = 64;   // clk cycles per sub-window

  logic clk = 1'b0, rn_in = 1'b0, tick = 1'b0;
  logic spk1 = 1'b0, spk2 = 1'b0;
  logic [SDL_W-1:0] sdl = '0;
  logic [SUBCNT_W-1:0] d_o1, d_o2;
  logic [WIN_W-1:0] q1, q2;
  int checks = 0, failures = 0;

  wincnt u1 (.clk, .rn_in, .tick, .spk(spk1), .s_ext(1'b0), .sdl, .d_i(4'd0), .d_o(d_o1), .q(q1));
  wincnt u2 (.clk, .rn_in, .tick, .spk(spk2), .s_ext(1'b1), .sdl, .d_i(d_o1), .d_o(d_o2), .q(q2));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state: dn1[n], dn2[n] are the values that entered the windows at tick n
  int dn1 [$], dn2 [$];
  int sub1;       // spikes counted by the bench in the current sub-window (row 1)

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int wsum(ref int h [$]);
    int s = 0;
    for (int t = 0; t < 5 && t < h.size(); t++) s += h[h.size()-1-t];
    return s;
  endfunction

  int last_sub1;  // count of the sub-window that ends at this tick
  int reg_sub1;   // the 4b register: count of the sub-window that ended at the previous tick

  // one sub-window with n1 spikes on row 1 and n2 on row 2 (row 2 ignores its own)
  task automatic subwindow(input int n1, input int n2);
    int slot1 [P], slot2 [P];
    int k;
    for (int c = 0; c < P; c++) begin slot1[c] = 0; slot2[c] = 0; end
    for (int i = 0; i < n1; i++) begin
      do k = 2 + $urandom_range(0, (P-4)/2-1) * 2; while (slot1[k]);
      slot1[k] = 1;
    end
    for (int i = 0; i < n2; i++) begin
      do k = 2 + $urandom_range(0, (P-4)/2-1) * 2; while (slot2[k]);
      slot2[k] = 1;
    end
    // tick cycle
    @(negedge clk); tick = 1'b1; spk1 = 1'b0; spk2 = 1'b0;
    @(negedge clk); tick = 1'b0;
    // reference update for this tick
    begin
      int d1, d2, e1, e2;
      d1 = reg_sub1;
      reg_sub1 = last_sub1;
      d2 = 0;
      if (dn1.size() >= 1 + sdl_tap()) d2 = dn1[dn1.size() - 1 - sdl_tap()];
      dn1.push_back(d1);
      dn2.push_back(d2);
      e1 = wsum(dn1); e2 = wsum(dn2);
      check("q1", q1, e1 > 63 ? 63 : e1);
      check("q2", q2, e2 > 63 ? 63 : e2);
      check("d_o1", d_o1, dn1.size() > sdl_tap() ? dn1[dn1.size()-1-sdl_tap()] : 0);
      check("d_o2", d_o2, dn2.size() > sdl_tap() ? dn2[dn2.size()-1-sdl_tap()] : 0);
    end
    last_sub1 = 0;
    for (int c = 1; c < P; c++) begin
      spk1 = slot1[c][0]; spk2 = slot2[c][0];
      if (slot1[c] && last_sub1 < 15) last_sub1++;
      @(negedge clk);
    end
    spk1 = 1'b0; spk2 = 1'b0;
  endtask

  function automatic int sdl_tap();
    return (sdl < 5) ? int'(sdl) : 4;
  endfunction

  int seq [5] = '{14, 28, 42, 56, 63};
  int cnt63;

  initial begin
    last_sub1 = 0;
    reg_sub1 = 0;
    repeat (4) @(negedge clk);
    rn_in = 1'b1;
    // published replay: SDL = 001, 14 spikes per sub-window from sub-window 0
    sdl = 3'b001;
    for (int n = 0; n < 9; n++) begin
      subwindow(14, 0);
      // after tick n (counting the first tick as n = 0) the window holds n-1 sub-windows
      if (n >= 2 && n <= 6) check("fig q1", q1, seq[n-2]);
      if (n < 2) check("fig q1 latency", q1, 0);
      if (n >= 4 && n <= 8) check("fig q2", q2, seq[n-4]);
      if (n < 4) check("fig q2 latency", q2, 0);
    end
    // random traffic with random SDL changes, including saturating bursts
    for (int n = 0; n < 300; n++) begin
      if (n % 23 == 0) sdl = 3'($urandom_range(0, 7));
      subwindow((n % 50 < 8) ? $urandom_range(13, 20) : $urandom_range(0, 8), $urandom_range(0, 3));
      if (q1 == 63) cnt63++;
    end
    check("saturation seen", cnt63 > 0, 1);
    // reset clears everything
    @(negedge clk); rn_in = 1'b0; @(negedge clk); rn_in = 1'b1;
    check("reset q1", q1, 0);
    check("reset q2", q2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
