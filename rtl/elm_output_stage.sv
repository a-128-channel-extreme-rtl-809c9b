// ELM output stage: the trained second layer and the two classifiers.
//
// The hidden-layer outputs h_1 .. h_L arrive one word per h_valid strobe
// with their column index. For every word the stage multiplies it with the
// column's C output weights and accumulates, o_k = sum_i beta_ki * h_i, all C
// multiply-accumulates in the cycle the word arrives (the word with index 0
// restarts the sums). On frame_done it takes the movement class
// s = argmax of o_1 .. o_M (1-based, ties to the lowest index) and the onset
// classifier G = (o_{M+1} > theta), and strobes out_valid one cycle later.
// beta is written through a simple write port; the PC that trains the ELM
// would load it.
//
// The arithmetic (linear output layer, argmax over the M movement outputs,
// threshold on the extra onset output) follows the published decoder, where
// it is MCU firmware. Own choices: 16-bit signed beta, 40-bit signed
// accumulators and threshold, beta held in a register array, the streaming
// accumulation and the reset values.
module elm_output_stage
  import elm_pkg::*;
#(
  parameter int unsigned L  = N_HIDDEN,
  parameter int unsigned C  = N_OUT,
  parameter int unsigned BW = BETA_W,
  parameter int unsigned AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // beta write port
  input  logic                 beta_we,
  input  logic [ADDR_W-1:0]    beta_addr_i,
  input  logic [3:0]           beta_addr_k,
  input  logic signed [BW-1:0] beta_wdata,
  input  logic signed [AW-1:0] theta,
  // hidden-layer words
  input  logic                 h_valid,
  input  logic [ADDR_W-1:0]    h_idx,
  input  logic [HCNT_W-1:0]    h,
  input  logic                 frame_done,
  // results
  output logic signed [AW-1:0] o [C],
  output logic [CLASS_W-1:0]   s,
  output logic                 g,
  output logic                 out_valid
);
  logic signed [BW-1:0] beta [L][C];
  logic signed [AW-1:0] acc [C];
  logic [CLASS_W-1:0]   best_k;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < L; i++)
        for (int unsigned k = 0; k < C; k++) beta[i][k] <= '0;
    end else if (beta_we && 32'(beta_addr_i) < L && 32'(beta_addr_k) < C) begin
      beta[beta_addr_i][beta_addr_k] <= beta_wdata;
    end
  end

  // argmax over the M = C-1 movement outputs
  always_comb begin
    best_k = '0;
    for (int unsigned k = 1; k < C - 1; k++)
      if (acc[k] > acc[best_k]) best_k = CLASS_W'(k);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < C; k++) begin
        acc[k] <= '0;
        o[k]   <= '0;
      end
      s         <= '0;
      g         <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (h_valid && 32'(h_idx) < L) begin
        for (int unsigned k = 0; k < C; k++)
          acc[k] <= (h_idx == '0 ? AW'(0) : acc[k])
                    + AW'(beta[h_idx][k] * $signed({1'b0, h}));
      end
      if (frame_done) begin
        for (int unsigned k = 0; k < C; k++) o[k] <= acc[k];
        s         <= best_k + 1'b1;
        g         <= acc[C-1] > theta;
        out_valid <= 1'b1;
      end
    end
  end
endmodule
