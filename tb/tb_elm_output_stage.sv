// Self-checking testbench of elm_output_stage.
//
// Random signed weights are written for all L x C entries; random frames of
// L hidden words are streamed in (with gaps between words). The bench
// computes o_k = sum beta_ki h_i, the 1-based argmax over the first M
// outputs and G = o_{M+1} > theta itself and compares all of them when
// out_valid pulses, which must be exactly one cycle after frame_done. Frames
// with a forced tie check the lowest-index rule and that the onset output,
// although larger, is not a class; the threshold is set on
// both sides of o_{M+1}.
module tb_elm_output_stage;
  timeunit 1ns; timeprecision 1ps;
  import elm_pkg::*;
  localparam int unsigned L = 128, C = 13;
  logic clk = 1'b0, rst_n = 1'b0;
  logic beta_we = 1'b0;
  logic [6:0] beta_addr_i = '0;
  logic [3:0] beta_addr_k = '0;
  logic signed [15:0] beta_wdata = '0;
  logic signed [39:0] theta = '0;
  logic h_valid = 1'b0, frame_done = 1'b0;
  logic [6:0] h_idx = '0;
  logic [13:0] h = '0;
  logic signed [39:0] o [C];
  logic [3:0] s;
  logic g, out_valid;
  int checks = 0, failures = 0;

  elm_output_stage #(.L(L), .C(C)) u_dut (.clk, .rst_n, .beta_we, .beta_addr_i, .beta_addr_k, .beta_wdata,
    .theta, .h_valid, .h_idx, .h, .frame_done, .o, .s, .g, .out_valid);
  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  int bm [L][C];
  int hv [L];
  longint eo [C];
  int es, g_hi = 0, g_lo = 0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int frame = 0; frame < 8; frame++) begin
      // (re)load weights; frame 3 makes outputs 2 and 5 tie
      if (frame == 0 || frame == 3 || frame == 5) begin
        for (int i = 0; i < L; i++) begin
          for (int k = 0; k < C; k++) bm[i][k] = $signed(16'($urandom));
          if (frame == 3) begin
            if (bm[i][2] < 0) bm[i][2] = -bm[i][2];
            if (bm[i][2] > 30000) bm[i][2] = 30000;
            bm[i][C-1] = bm[i][2] + 1;   // onset output above every class output
            for (int k = 0; k < C-1; k++) if (k != 2) bm[i][k] = (k == 5) ? bm[i][2] : -bm[i][2];
          end
          for (int k = 0; k < C; k++) begin
            @(negedge clk);
            beta_we = 1'b1; beta_addr_i = 7'(i); beta_addr_k = 4'(k); beta_wdata = 16'(bm[i][k]);
          end
        end
        @(negedge clk); beta_we = 1'b0;
      end
      for (int k = 0; k < C; k++) eo[k] = 0;
      for (int i = 0; i < L; i++) begin
        hv[i] = (frame == 3) ? 100 : $urandom_range(0, 16383);
        for (int k = 0; k < C; k++) eo[k] += longint'(bm[i][k]) * longint'(hv[i]);
      end
      es = 0;
      for (int k = 1; k < C-1; k++) if (eo[k] > eo[es]) es = k;
      theta = (frame % 2) ? 40'(eo[C-1] - 1) : 40'(eo[C-1]);
      for (int i = 0; i < L; i++) begin
        @(negedge clk); h_valid = 1'b1; h_idx = 7'(i); h = 14'(hv[i]);
        @(negedge clk); h_valid = 1'b0; repeat ($urandom_range(0, 3)) @(negedge clk);
      end
      @(negedge clk); frame_done = 1'b1;
      @(negedge clk); frame_done = 1'b0;
      check("out_valid one cycle after frame_done", out_valid, 1);
      for (int k = 0; k < C; k++) check($sformatf("o[%0d]", k), o[k], eo[k]);
      check("s", s, es + 1);
      check("g", g, (frame % 2) ? 1 : 0);
      if (g) g_hi++; else g_lo++;
      if (frame == 3) check("tie goes to lowest index", s, 3);
      @(negedge clk);
      check("out_valid is a pulse", out_valid, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
