// Shared constants of the ELM neural decoder.
//
// The chip sizes (128 input rows, 128 hidden nodes, 14-bit hidden counts,
// 6-bit window counts, 4-bit sub-window counts, 7-bit spike address, 3-bit
// SDL delay select and 3-bit f_max stop code) are the published ones. The
// output-layer word widths (16-bit beta, 40-bit accumulators) are choices of
// this design, since the published decoder computes that layer in firmware.
package elm_pkg;
  localparam int unsigned N_ROWS     = 128; // input channels D
  localparam int unsigned N_HIDDEN   = 128; // hidden nodes L
  localparam int unsigned ADDR_W     = 7;   // A<6:0>
  localparam int unsigned SUBCNT_W   = 4;   // sub-window count D_n<3:0>
  localparam int unsigned WIN_W      = 6;   // window count Q<5:0>
  localparam int unsigned NTAP       = 5;   // delay chain depth / window length in t_s
  localparam int unsigned SDL_W      = 3;   // SDL<2:0>
  localparam int unsigned HCNT_W     = 14;  // hidden counter / C<13:0>
  localparam int unsigned FMAX_W     = 3;   // f_max code
  localparam int unsigned IREF_W     = 6;   // I_ref code
  localparam int unsigned N_MOVES    = 12;  // movement classes M
  localparam int unsigned N_OUT      = N_MOVES + 1; // C = M + 1 outputs
  localparam int unsigned BETA_W     = 16;  // output weight width (own choice)
  localparam int unsigned ACC_W      = 40;  // output accumulator width (own choice)
  localparam int unsigned CLASS_W    = 4;   // class label 0..12

  // Stop value of a hidden counter for a 3-bit f_max code: 2^(7+code) - 1,
  // so code 7 is the full 14-bit range and code 0 stops at 127.
  function automatic logic [HCNT_W-1:0] fmax_stop(input logic [FMAX_W-1:0] code);
    logic [HCNT_W:0] one;
    one = (HCNT_W+1)'(1) << (7 + code);
    return HCNT_W'(one - 1'b1);
  endfunction
endpackage
