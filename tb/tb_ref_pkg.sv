// Reference models shared by the MLCP and decoder testbenches.
//
// row_ref predicts one input row: spikes counted per sub-window (capped at
// 15), the 4-bit register stage, the five-deep chain and the window sum, with
// the S_ext / SDL delayed input taken from the row above. exp_count predicts
// a hidden counter from the column current: the number of CCO pulses in a
// NEU window of t_neu seconds, capped at the f_max stop value.
package tb_ref_pkg;
  class row_ref;
    int cnt;        // spikes in the running sub-window
    int reg_sub;    // 4b register
    int hist [$];   // values that entered the window, newest last
    function new(); cnt = 0; reg_sub = 0; endfunction
    function void spike(); if (cnt < 15) cnt++; endfunction
    function int tap(int sdl);   // D_o before the next tick
      int k = (sdl < 5) ? sdl : 4;
      return (hist.size() > k) ? hist[hist.size() - 1 - k] : 0;
    endfunction
    // d_in: the row above's tap, used if s_ext
    function void tick(int s_ext, int d_in);
      hist.push_back(s_ext ? d_in : reg_sub);
      if (hist.size() > 5) void'(hist.pop_front());
      reg_sub = cnt;
      cnt = 0;
    endfunction
    function int q();
      int s = 0;
      foreach (hist[t]) s += hist[t];
      return (s > 63) ? 63 : s;
    endfunction
    function int raw_sum();
      int s = 0;
      foreach (hist[t]) s += hist[t];
      return s;
    endfunction
  endclass

  // pulses of a CCO with current i during t_neu seconds; nominal value
  function automatic real exp_pulses(real i, real t_neu);
    real t_int, t;
    if (i <= 1.0e-15) return 0.0;
    t_int = 100.0e-15 * 0.6 / i;
    t = t_int + 100.0e-15 * 0.6 / (200.0e-9 - i);
    if (t_neu < t_int) return 0.0;
    return $floor((t_neu - t_int) / t) + 1.0;
  endfunction

  function automatic int stop_value(int code);
    return (1 << (7 + code)) - 1;
  endfunction

  // is a measured count consistent with the model (one pulse of slack at the
  // window edges), after the f_max cap?
  function automatic bit count_ok(int got, real i, real t_neu, int code);
    int e, cap;
    e = $rtoi(exp_pulses(i, t_neu));
    cap = stop_value(code);
    if (e - 1 >= cap) return got == cap;
    return (got >= e - 1) && (got <= ((e > cap) ? cap : e));
  endfunction
endpackage
