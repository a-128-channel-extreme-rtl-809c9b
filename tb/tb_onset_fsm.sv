// Self-checking testbench of onset_fsm with the published LAMBDA = 6,
// TR = 7 and TAU = 6, and a second instance with TAU = 10, LAMBDA = 6. A
// random G sequence (with bursts) and class labels are fed in; an
// independent model of the lambda-of-tau test with refractory period gives
// the expected G_track and F at every time point.
module tb_onset_fsm;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 1'b0, rst_n = 1'b0, valid = 1'b0, g = 1'b0;
  logic [3:0] s = '0;
  logic gt_a, gt_b, rf_a, rf_b;
  logic [3:0] f_a, f_b;
  int checks = 0, failures = 0;

  onset_fsm #(.LAMBDA(6), .TAU(6), .TR(7))  u_a (.clk, .rst_n, .valid, .g, .s, .g_track(gt_a), .f(f_a), .refractory(rf_a));
  onset_fsm #(.LAMBDA(6), .TAU(10), .TR(7)) u_b (.clk, .rst_n, .valid, .g, .s, .g_track(gt_b), .f(f_b), .refractory(rf_b));
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

  // reference model
  typedef struct { int tau; int hist[$]; int refr; } ref_t;
  ref_t ra, rb;
  int dets_a = 0, dets_b = 0, blocked = 0;

  function automatic int step(ref ref_t r, input int gin, output int was_blocked);
    int ones = 0;
    was_blocked = 0;
    r.hist.push_back(gin);
    if (r.hist.size() > r.tau) void'(r.hist.pop_front());
    foreach (r.hist[t]) ones += r.hist[t];
    if (r.refr > 0) begin
      r.refr--;
      was_blocked = (ones >= 6);
      return 0;
    end
    if (ones >= 6) begin
      r.refr = 7;
      r.hist.delete();
      return 1;
    end
    return 0;
  endfunction

  initial begin
    int ea, eb, bl, dummy;
    ra.tau = 6; rb.tau = 10; ra.refr = 0; rb.refr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      int burst = (n % 40) < 14;
      g = burst ? ($urandom_range(0, 9) != 0) : ($urandom_range(0, 5) == 0);
      s = 4'($urandom_range(1, 12));
      ea = step(ra, g, bl); blocked += bl;
      eb = step(rb, g, dummy);
      valid = 1'b1; @(negedge clk); valid = 1'b0;
      check("g_track a", gt_a, ea);
      check("f a", f_a, ea ? s : 0);
      check("g_track b", gt_b, eb);
      check("f b", f_b, eb ? s : 0);
      check("refractory a", rf_a, ra.refr > 0);
      dets_a += ea; dets_b += eb;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    check("detections happened", dets_a > 10, 1);
    check("refractory blocked a detection", blocked > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
