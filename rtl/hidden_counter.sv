// CNT: output counter of one hidden node, the CCO-based ADC and saturating
// activation function of the extreme learning machine.
//
// While NEU is high the counter adds one for every rising edge of the CCO
// output v_o, so after the NEU phase it holds the CCO frequency times the
// phase length. It stops at a stop value programmed by the 3-bit code f_max,
// which makes the node's transfer curve saturate; the stop value is
// 2^(7+f_max) - 1 (f_max = 7 is the full 14-bit range, and a node meant to be
// linear is simply given a large code). RN_cnt low clears it. The count is
// held while NEU is low, for the column scanner to read.
//
// The 14-bit width and the 3-bit stop code follow the published chip; the
// code-to-stop mapping is this design's choice, and so is counting on the
// system clock: v_o is asynchronous, goes through a two-flop synchronizer and
// its rising edges are counted, so the system clock must run at more than
// twice the highest CCO frequency (the chip clocks the counter with v_o).
//
// Timing: a v_o rising edge is counted three clock cycles later; rn_cnt is a
// synchronous clear and has priority.
module hidden_counter
  import elm_pkg::*;
(
  input  logic              clk,
  input  logic              rn_cnt,
  input  logic              neu,
  input  logic              v_o,
  input  logic [FMAX_W-1:0] fmax,
  output logic [HCNT_W-1:0] count
);
  logic [2:0] sync;   // sync[0] first flop, sync[2] previous synchronized value
  logic       rise;

  always_ff @(posedge clk) sync <= {sync[1:0], v_o};
  assign rise = sync[1] && !sync[2];

  always_ff @(posedge clk) begin
    if (!rn_cnt)
      count <= '0;
    else if (neu && rise && count < fmax_stop(fmax))
      count <= count + 1'b1;
  end
endmodule
