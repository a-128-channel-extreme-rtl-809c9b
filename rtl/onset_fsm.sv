// Onset post-processing: turns the per-period onset decision G into the
// tracked onset G_track and the final decoded output F.
//
// At each new time point (valid) G is shifted into a history of the last TAU
// points. When at least LAMBDA of them are set, and the block is not in its
// refractory period, G_track is raised for that time point, the history is
// cleared and a refractory period of TR time points starts during which no
// further detection is made (the history keeps filling). F = G_track * s: the
// movement class at a detected onset, 0 otherwise.
//
// The lambda-of-tau test, the refractory period and F follow the published
// post-processing; LAMBDA = 6 and TR = 7 (140 ms at 20 ms per point) are the
// published optimum. The published text asks for lambda positives over the
// last tau points, its flow chart for lambda sequential positives; with the
// default TAU = LAMBDA both are the same. A one-point G_track pulse, clearing
// the history at a detection and reset values are this design's choices.
//
// Timing: outputs update in the cycle after valid and hold until the next.
module onset_fsm
  import elm_pkg::*;
#(
  parameter int unsigned LAMBDA = 6,
  parameter int unsigned TAU    = 6,
  parameter int unsigned TR     = 7
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               valid,
  input  logic               g,
  input  logic [CLASS_W-1:0] s,
  output logic               g_track,
  output logic [CLASS_W-1:0] f,
  output logic               refractory
);
  localparam int unsigned RW = $clog2(TR + 1);

  logic [TAU-1:0] hist, hist_n;
  logic [RW-1:0]  refr;
  int unsigned    ones;

  initial assert (LAMBDA >= 1 && LAMBDA <= TAU) else $error("onset_fsm: need 1 <= LAMBDA <= TAU");

  always_comb begin
    if (TAU > 1) hist_n = {hist[TAU-2:0], g};
    else         hist_n = TAU'(g);
    ones = 0;
    for (int unsigned t = 0; t < TAU; t++) ones += 32'(hist_n[t]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hist    <= '0;
      refr    <= '0;
      g_track <= 1'b0;
      f       <= '0;
    end else if (valid) begin
      if (refr != '0) begin
        refr    <= refr - 1'b1;
        hist    <= hist_n;
        g_track <= 1'b0;
        f       <= '0;
      end else if (ones >= LAMBDA) begin
        refr    <= RW'(TR);
        hist    <= '0;
        g_track <= 1'b1;
        f       <= s;
      end else begin
        hist    <= hist_n;
        g_track <= 1'b0;
        f       <= '0;
      end
    end
  end

  assign refractory = (refr != '0);
endmodule
