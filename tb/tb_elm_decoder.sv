// End-to-end testbench of elm_decoder at reduced size: D = 16 rows, L = 8
// hidden nodes, a 600 us period with a 300 us NEU phase, two trials. The
// stimulus and checks are in elm_decoder_tb_body.svh.
module tb_elm_decoder;
  timeunit 1ns; timeprecision 1ps;
  import tb_ref_pkg::*;
  localparam int unsigned D = 16, L = 8, TS = 6000, NEU_CYC = 3000, CH = 4;
  localparam int IREF = 6, N_TRIALS = 2, FMAX0 = 0;
  localparam int N_WARM = 6, N_ACT = 12, N_QUIET = 10;
`include "elm_decoder_tb_body.svh"
  elm_decoder #(.D(D), .L(L), .TS_CYC(TS), .NEU_CYC(NEU_CYC), .CLKOUT_HALF(CH)) u_dut (
    .clk, .por_n, .run, .spk, .addr, .sdl, .sclk, .mosi, .cs_n, .miso,
    .beta_we, .beta_addr_i, .beta_addr_k, .beta_wdata, .theta,
    .o, .s, .g, .g_track, .refractory, .f, .out_valid, .clk_in, .neu, .c);
endmodule
