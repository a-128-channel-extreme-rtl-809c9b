// Behavioural model (not synthesizable logic): current-controlled oscillator
// of one hidden node.
//
// The relaxation oscillator integrates its input current on the membrane
// node: I_in discharges v_mem until the first inverter switches, positive
// feedback through C_f snaps the node, and M3 recharges it with I_rst until
// the inverters switch back. One period is
//     T_CCO = C_F*DVDD / I_in + C_F*DVDD / (I_RST - I_in),
// the published expression. The model produces v_o high during the recharge
// phase and low during the integration phase, and runs only while NEU is
// high (NEU low holds v_mem at DVDD through M2, so v_o stays low). The leak
// current of M1, which sets the hidden-node bias b_i, is subtracted from I_in;
// it defaults to 0 as in the published use. C_F = 100 fF and DVDD = 0.6 V are
// published values; I_RST = 200 nA is this model's choice (with a 10 MHz
// system clock it keeps the v_o pulse, C_F*DVDD/I_RST = 300 ns, wide enough
// to be sampled).
//
// Timing: the period is taken from i_in at the start of each period. When
// NEU falls during an integration phase the phase is abandoned at once and
// no pulse is produced; the next NEU rise starts a fresh period. Currents at or below 1 fA stop the
// oscillator until the current or NEU changes.
module cco_model #(
  parameter real C_F    = 100.0e-15,
  parameter real DVDD   = 0.6,
  parameter real I_RST  = 200.0e-9,
  parameter real I_LEAK = 0.0
) (
  input  logic neu,
  input  real  i_in,
  output logic v_o
);
  timeunit 1ns;
  timeprecision 1ps;

  initial v_o = 1'b0;

  function automatic real i_net();
    real i;
    i = i_in - I_LEAK;
    if (i >= I_RST) i = 0.999 * I_RST;
    return i;
  endfunction

  always begin
    real i, t_int, t_rst;
    v_o = 1'b0;
    wait (neu);
    i = i_net();
    if (i <= 1.0e-15) begin
      // no current: wait for a change of current or enable
      @(i_in or neu);
    end else begin
      t_int = C_F * DVDD / i * 1.0e9;            // ns
      t_rst = C_F * DVDD / (I_RST - i) * 1.0e9;  // ns
      // NEU low resets v_mem, so it aborts the integration phase
      fork
        #(t_int);
        wait (!neu);
      join_any
      disable fork;
      if (neu) begin
        v_o = 1'b1;
        #(t_rst);
      end
    end
  end
endmodule
