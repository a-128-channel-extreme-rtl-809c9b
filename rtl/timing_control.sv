// Timing and control sequencer of the decoder (the DSP side of the MLCP).
//
// Every classification period of TS_CYC clock cycles (t_s, 20 ms at a
// 10 MHz clock) it drives one CLK_in period (high for the first half), whose
// rising edge advances all input-row windows. NEU_DLY cycles later it raises
// NEU for NEU_CYC cycles, during which the hidden-node CCOs run and their
// counters count. After NEU falls it gives L CLK_out pulses to read the
// counts out of the column scanner, each pulse CLKOUT_HALF cycles low then
// CLKOUT_HALF cycles high; in the last low cycle before each rising edge it
// strobes h_valid with the column index h_idx, telling the output stage to
// take the word on C. One cycle after the last word it strobes frame_done and
// pulls RN_cnt low for one cycle to clear the counters. RN_in is held low for
// the first RN_LEN cycles after run goes high, clearing the input rows once.
//
// The signal set and the order "count while NEU is high, read with CLK_out
// while NEU is low, clear with RN_cnt" follow the published chip control; on
// the published board this is MCU firmware. The cycle counts, the position
// of NEU within the period and the one-time RN_in pulse are this design's
// choices. Requirement: NEU_DLY + NEU_CYC + 2*CLKOUT_HALF*L + 2 <= TS_CYC.
module timing_control
  import elm_pkg::*;
#(
  parameter int unsigned L           = N_HIDDEN,
  parameter int unsigned TS_CYC      = 200_000,
  parameter int unsigned NEU_DLY     = 16,
  parameter int unsigned NEU_CYC     = 100_000,
  parameter int unsigned CLKOUT_HALF = 4,
  parameter int unsigned RN_LEN      = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  output logic              clk_in,
  output logic              rn_in,
  output logic              neu,
  output logic              clk_out,
  output logic              rn_cnt,
  output logic              h_valid,
  output logic [ADDR_W-1:0] h_idx,
  output logic              frame_done
);
  typedef enum logic [2:0] {S_IDLE, S_PRE, S_NEU, S_RD_LO, S_RD_HI, S_CLR, S_WAIT} state_t;

  localparam int unsigned CW = $clog2(TS_CYC + 1);

  state_t             state;
  logic [CW-1:0]      cyc;     // position within the period
  logic [CW-1:0]      ph;      // cycles spent in the current state
  logic [ADDR_W:0]    word;    // column being read
  logic [3:0]         rn_cnt_q;
  logic               first;

  initial assert (NEU_DLY + NEU_CYC + 2*CLKOUT_HALF*L + 2 <= TS_CYC)
    else $error("timing_control: period too short for NEU phase and read-out");

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cyc      <= '0;
      ph       <= '0;
      word     <= '0;
      rn_cnt_q <= '0;
      first    <= 1'b1;
    end else begin
      if (state == S_IDLE) begin
        cyc <= '0;
        ph  <= '0;
        if (run) state <= S_PRE;
      end else begin
        cyc <= (32'(cyc) == TS_CYC - 1) ? '0 : cyc + 1'b1;
        ph  <= ph + 1'b1;
        if (32'(rn_cnt_q) < RN_LEN) rn_cnt_q <= rn_cnt_q + 1'b1;
        unique case (state)
          S_PRE:   if (32'(ph) == NEU_DLY - 1) begin state <= S_NEU; ph <= '0; end
          S_NEU:   if (32'(ph) == NEU_CYC - 1) begin state <= S_RD_LO; ph <= '0; word <= '0; end
          S_RD_LO: if (32'(ph) == CLKOUT_HALF - 1) begin state <= S_RD_HI; ph <= '0; end
          S_RD_HI: if (32'(ph) == CLKOUT_HALF - 1) begin
                     ph <= '0;
                     if (32'(word) == L - 1) state <= S_CLR;
                     else begin state <= S_RD_LO; word <= word + 1'b1; end
                   end
          S_CLR:   begin state <= S_WAIT; ph <= '0; first <= 1'b0; end
          S_WAIT:  if (32'(cyc) == TS_CYC - 1) begin
                     ph <= '0;
                     state <= run ? S_PRE : S_IDLE;
                   end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  assign clk_in     = (state != S_IDLE) && (32'(cyc) < TS_CYC / 2);
  assign rn_in      = !(first && state != S_IDLE && 32'(rn_cnt_q) < RN_LEN);
  assign neu        = (state == S_NEU);
  assign clk_out    = (state == S_RD_HI);
  assign h_valid    = (state == S_RD_LO) && (32'(ph) == CLKOUT_HALF - 1);
  assign h_idx      = word[ADDR_W-1:0];
  assign frame_done = (state == S_CLR);
  assign rn_cnt     = (state != S_CLR) && (state != S_IDLE);
endmodule
