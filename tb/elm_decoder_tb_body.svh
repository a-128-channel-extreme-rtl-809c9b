// Shared body of the end-to-end decoder testbenches. The including module
// defines the sizes D, L, TS, NEU_CYC, CH, IREF, FMAX0, the stimulus lengths
// N_WARM, N_TRIALS, N_ACT, N_QUIET (in periods) and instantiates
// elm_decoder as u_dut on the signals declared here.
//
// Set-up: odd rows take the previous (even) row's counts delayed by one
// sub-window (S_ext = 1, SDL = 000), so each of the D/2 channels enters the
// network twice, now and one sample earlier (TDBDI with p = 2); node 0 has a
// low f_max stop value; beta of the movement outputs is random at first and
// is reloaded before each trial so that a chosen class (different in each
// trial) wins, so F must carry that class; beta of the onset output is 1 for
// every node, and theta sits halfway between the
// predicted onset output of quiet and of active input. Trials alternate
// quiet periods with movement periods in which a class-dependent half of the
// channels fires fast.
//
// Checks: every read-out hidden word against the prediction from the
// bench's own window model, the drawn mirror weights and the CCO equation
// (within one pulse, or equal to the stop value); o_1..o_13, s and G against
// exact arithmetic on the read-out words; G_track and F against an
// independent post-processing model; one result per period of TS cycles.
// Mechanisms counted, each must occur: TDBDI input, window saturation, f_max
// stop, G high and low, onset detection, detection blocked by the
// refractory period, non-zero F, the RN_in start-up clear.

  localparam int unsigned NB = D + 3*L + 6;
  localparam int TD_MASK_ODD = 1;

  logic clk = 1'b0, por_n = 1'b0, run = 1'b0;
  logic spk = 1'b0;
  logic [6:0] addr = '0;
  logic [2:0] sdl = 3'd0;
  logic sclk = 1'b0, mosi = 1'b0, cs_n = 1'b1, miso;
  logic beta_we = 1'b0;
  logic [6:0] beta_addr_i = '0;
  logic [3:0] beta_addr_k = '0;
  logic signed [15:0] beta_wdata = '0;
  logic signed [39:0] theta = '0;
  logic signed [39:0] o [13];
  logic [3:0] s, f;
  logic g, g_track, refractory, out_valid, clk_in, neu;
  logic [13:0] c;
  int checks = 0, failures = 0;

  always #50 clk = ~clk;     // 10 MHz

  task automatic cyc(input int n); repeat (n) @(negedge clk); endtask

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic spi_send(input logic [NB-1:0] fr);
    cs_n = 1'b0; #1000;
    for (int b = NB-1; b >= 0; b--) begin
      mosi = fr[b]; #500; sclk = 1'b1; #500; sclk = 1'b0;
    end
    #1000 cs_n = 1'b1; #1000;
  endtask

  row_ref rows [D];
  int fmax_code [L];
  int bm [L][13];
  int q_now [D];
  int hw [L];
  int n_words;
  int n_tdbdi = 0, n_qsat = 0, n_cap = 0, n_g1 = 0, n_g0 = 0, n_det = 0, n_block = 0, n_f = 0, n_rnin = 0;
  logic [15:0] f_seen = '0;   // classes seen in F
  int n_results = 0;
  longint last_result_cyc = -1;
  longint cycle = 0;
  // reference onset post-processing (LAMBDA = TAU = 6, TR = 7)
  int ohist [$];
  int orefr = 0;

  always @(posedge clk) begin
    cycle++;
    if (por_n && !u_dut.rn_in) n_rnin++;
  end

  // reference window update at every CLK_in rising edge
  always @(posedge clk_in) begin
    int taps [D];
    for (int j = 0; j < D; j++) taps[j] = rows[j].tap(int'(sdl));
    for (int j = 0; j < D; j++) rows[j].tick(j % 2 == TD_MASK_ODD, j == 0 ? 0 : taps[j-1]);
    for (int j = 0; j < D; j++) begin
      q_now[j] = rows[j].q();
      if (rows[j].raw_sum() > 63) n_qsat++;
    end
    for (int j = 1; j < D; j += 2) if (q_now[j] > 0) begin n_tdbdi++; break; end
    n_words = 0;
  end

  function automatic real col_current(int i, int q [D]);
    real x = 0.0;
    for (int j = 0; j < D; j++) x += u_dut.u_mlcp.u_mirror.w[i][j] * (IREF * 1.0e-9) * q[j] / 64.0;
    return x;
  endfunction

  // capture and check each hidden word as the output stage takes it
  always @(posedge clk) begin
    if (u_dut.h_valid) begin
      int i;
      real ie;
      i = int'(u_dut.h_idx);
      hw[i] = int'(u_dut.c);
      ie = col_current(i, q_now);
      checks++;
      if (!count_ok(hw[i], ie, NEU_CYC * 100.0e-9, fmax_code[i])) begin
        failures++;
        $display("FAIL h[%0d]: got %0d expected %f", i, hw[i], exp_pulses(ie, NEU_CYC * 100.0e-9));
      end
      if (hw[i] == stop_value(fmax_code[i])) n_cap++;
      n_words++;
    end
  end

  // check the results of each period
  always @(posedge clk) begin
    if (por_n && out_valid) begin
      longint eo [13];
      int es, eg, ones, et, blk;
      #1;
      check("words per frame", n_words, L);
      if (last_result_cyc >= 0) check("result period", cycle - last_result_cyc, TS);
      last_result_cyc = cycle;
      for (int k = 0; k < 13; k++) begin
        eo[k] = 0;
        for (int i = 0; i < L; i++) eo[k] += longint'(bm[i][k]) * longint'(hw[i]);
        check($sformatf("o[%0d]", k), o[k], eo[k]);
      end
      es = 0;
      for (int k = 1; k < 12; k++) if (eo[k] > eo[es]) es = k;
      eg = (eo[12] > longint'(theta)) ? 1 : 0;
      check("s", s, es + 1);
      check("G", g, eg);
      if (eg) n_g1++; else n_g0++;
      n_results++;
      // post-processing model
      ohist.push_back(eg);
      if (ohist.size() > 6) void'(ohist.pop_front());
      ones = 0; foreach (ohist[t]) ones += ohist[t];
      et = 0; blk = 0;
      if (orefr > 0) begin orefr--; blk = (ones >= 6); end
      else if (ones >= 6) begin et = 1; orefr = 7; ohist.delete(); end
      @(negedge clk);
      check("G_track", g_track, et);
      check("F", f, et ? es + 1 : 0);
      n_det += et; n_block += blk;
      if (f != 0) begin n_f++; f_seen[f] = 1'b1; end
    end
  end

  initial begin
    #(64'd100 * TS * (N_TRIALS * (N_ACT + N_QUIET) + N_WARM + 20));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // predicted onset output sum_i h_i for every channel at window count qv
  function automatic real predict_sum(int qv);
    int qq [D];
    real sum = 0.0;
    for (int j = 0; j < D; j++) qq[j] = qv;
    for (int i = 0; i < L; i++) begin
      real e = exp_pulses(col_current(i, qq), NEU_CYC * 100.0e-9);
      if (e > stop_value(fmax_code[i])) e = stop_value(fmax_code[i]);
      sum += e;
    end
    return sum;
  endfunction

  task automatic send_spikes(input int rate_lo, input int rate_hi, input int cls);
    int nsp [D];
    for (int j = 0; j < D; j += 2) begin
      // channel j/2 is active for class cls when its bit pattern says so
      bit act = (rate_hi > 0) && (((j / 2) * 7 + cls) % 3 != 0);
      nsp[j] = act ? $urandom_range(rate_hi - 3, rate_hi) : $urandom_range(0, rate_lo);
      nsp[j+1] = $urandom_range(0, 2);   // sent to TDBDI rows: must be ignored
    end
    for (int k = 0; k < 16; k++)
      for (int j = 0; j < D; j++)
        if (k < nsp[j]) begin
          addr = 7'(j); spk = 1'b1; cyc(3); spk = 1'b0; cyc(3);
          rows[j].spike();
        end
  endtask

  // reload the movement columns of beta so that class tgt wins for any
  // h >= 0; called right after a period's spikes, before its read-out
  task automatic set_class(input int tgt);
    for (int i = 0; i < L; i++)
      for (int k = 0; k < 12; k++) begin
        bm[i][k] = (k == tgt) ? $urandom_range(50, 100) : $urandom_range(0, 100) - 100;
        @(negedge clk);
        beta_we = 1'b1; beta_addr_i = 7'(i); beta_addr_k = 4'(k); beta_wdata = 16'(bm[i][k]);
      end
    @(negedge clk); beta_we = 1'b0;
  endtask

  task automatic period(input int rate_lo, input int rate_hi, input int cls);
    @(posedge clk_in); cyc(40);
    send_spikes(rate_lo, rate_hi, cls);
  endtask

  initial begin
    logic [NB-1:0] fr;
    real qs, as;
    for (int j = 0; j < D; j++) rows[j] = new();
    cyc(4); por_n = 1'b1; cyc(4);
    fr = '0;
    fr[NB-1 -: 6] = 6'(IREF);
    for (int i = 0; i < L; i++) begin
      fmax_code[i] = (i == 0) ? FMAX0 : 7;
      fr[D + 3*i +: 3] = 3'(fmax_code[i]);
    end
    for (int j = 1; j < D; j += 2) fr[j] = 1'b1;
    spi_send(fr);
    for (int i = 0; i < L; i++)
      for (int k = 0; k < 13; k++) begin
        bm[i][k] = (k == 12) ? 1 : $urandom_range(0, 200) - 100;
        @(negedge clk);
        beta_we = 1'b1; beta_addr_i = 7'(i); beta_addr_k = 4'(k); beta_wdata = 16'(bm[i][k]);
      end
    @(negedge clk); beta_we = 1'b0;
    qs = predict_sum(5);
    as = predict_sum(35);
    theta = 40'($rtoi((qs + as) / 2.0));
    $display("theta %0d (quiet %f, active %f)", theta, qs, as);
    run = 1'b1;
    for (int p = 0; p < N_WARM; p++) period(2, 0, 0);
    for (int t = 0; t < N_TRIALS; t++) begin
      int cls = $urandom_range(0, 11);
      set_class((3 + 5 * t) % 12);
      for (int p = 0; p < N_ACT; p++) period(2, 14, cls);
      for (int p = 0; p < N_QUIET; p++) period(2, 0, 0);
    end
    @(posedge clk_in); cyc(TS / 2);
    $display("mechanisms: results=%0d tdbdi=%0d q_saturation=%0d fmax_stop=%0d G1=%0d G0=%0d detections=%0d refractory_blocks=%0d F_nonzero=%0d rn_in_cycles=%0d",
             n_results, n_tdbdi, n_qsat, n_cap, n_g1, n_g0, n_det, n_block, n_f, n_rnin);
    check("TDBDI input seen", n_tdbdi > 0, 1);
    check("window saturation seen", n_qsat > 0, 1);
    check("f_max stop seen", n_cap > 0, 1);
    check("G high seen", n_g1 > 0, 1);
    check("G low seen", n_g0 > 0, 1);
    check("onset detected", n_det > 0, 1);
    check("refractory blocked a detection", n_block > 0, 1);
    check("F non-zero seen", n_f > 0, 1);
    $display("F classes seen: %b", f_seen);
    check("RN_in start-up clear seen", n_rnin > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
