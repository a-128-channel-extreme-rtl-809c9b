// WinCNT: moving-window spike counter of one MLCP input row.
//
// A 4-bit counter counts the row's spikes inside one sub-window of length t_s
// (one CLK_in period). At each CLK_in rising edge (the one-cycle strobe
// `tick`) the count moves into a 4-bit register and the counter restarts.
// The sub-window value D_n entering the window is chosen by s_ext: the row's
// own registered count (s_ext = 0) or the delayed count D_i arriving from the
// previous row (s_ext = 1), which is how the time-delayed extra input
// dimensions (TDBDI) are made. D_n is shifted into a five-deep chain of 4-bit
// registers holding D_{n-1} .. D_{n-5}, and the 6-bit window count follows
//     Q_n = Q_{n-1} + D_n - D_{n-5}
// so Q is the number of spikes in the last five sub-windows (5 t_s). The
// running sum is kept one bit wider than Q (five 4-bit values reach 75) and
// the 6-bit output saturates at 63, as the measured sequence 14, 28, 43, 57,
// 63 of the published chip shows. SDL<2:0>
// selects which chain register is passed on as D_o to the next row: code k
// gives D_{n-1-k}, a delay of k+1 sub-windows (20 ms to 100 ms at t_s=20 ms).
//
// Structure, widths and the update equation follow the published circuit.
// Own choices: everything runs on one system clock with `tick` as enable
// (the chip clocks the 4-bit counter with the spikes themselves); the 4-bit
// counter saturates at 15; SDL codes 5..7 select the deepest register;
// rn_in is an active-low synchronous clear.
//
// Timing: q, d_o and the registers change in the cycle after tick. A spike
// strobe in the tick cycle is counted in the new sub-window.
module wincnt
  import elm_pkg::*;
#(
  parameter int unsigned NTAP_P = NTAP
) (
  input  logic                clk,
  input  logic                rn_in,
  input  logic                tick,
  input  logic                spk,
  input  logic                s_ext,
  input  logic [SDL_W-1:0]    sdl,
  input  logic [SUBCNT_W-1:0] d_i,
  output logic [SUBCNT_W-1:0] d_o,
  output logic [WIN_W-1:0]    q
);
  logic [SUBCNT_W-1:0] cnt;              // 4b CNT
  logic [SUBCNT_W-1:0] sub_reg;          // 4b reg after the counter
  logic [SUBCNT_W-1:0] chain [NTAP_P];   // chain[0] = D_{n-1} ... chain[NTAP_P-1] = D_{n-NTAP_P}
  logic [SUBCNT_W-1:0] d_n;
  logic [WIN_W:0]      sum;              // exact window sum, 0..75

  assign d_n = s_ext ? d_i : sub_reg;

  always_ff @(posedge clk) begin
    if (!rn_in) begin
      cnt     <= '0;
      sub_reg <= '0;
      sum     <= '0;
      for (int unsigned t = 0; t < NTAP_P; t++) chain[t] <= '0;
    end else if (tick) begin
      sub_reg  <= cnt;
      cnt      <= spk ? SUBCNT_W'(1) : '0;
      // Q_n = Q_{n-1} + D_n - D_{n-5}; chain[NTAP_P-1] still holds D_{n-5}
      sum      <= sum + (WIN_W+1)'(d_n) - (WIN_W+1)'(chain[NTAP_P-1]);
      chain[0] <= d_n;
      for (int unsigned t = 1; t < NTAP_P; t++) chain[t] <= chain[t-1];
    end else if (spk && cnt != '1) begin
      cnt <= cnt + 1'b1;
    end
  end

  assign q = sum[WIN_W] ? '1 : sum[WIN_W-1:0];

  always_comb begin
    if (32'(sdl) < NTAP_P) d_o = chain[sdl];
    else                   d_o = chain[NTAP_P-1];
  end
endmodule
