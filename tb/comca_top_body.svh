// comca_top_body.svh -- end-to-end test body shared by comca_top_tb (reduced
// size), comca_top_full_tb (default size) and comca_top_run (the interpolation
// workloads). The including module defines M, P, N, I, SPECTRA, instantiates
// comca_top as `dut` after this text and provides the task finish_run, which
// is called with the final counts in checks and failures.
//
// Sequence:
//   1. load part of the coefficients over the 8-bit bus, pulse the pointer
//      reset, then load the whole coefficient set (byte order re low/high,
//      im low/high; word order core, entry, lane) until coef_full;
//   2. stream SPECTRA random spectra of the M ADC-core FFTs back to back and
//      check every corrected channel against b_k = sum_m a_{k mod N',m} c_{k,m}
//      computed here from the formulas (reconstructed bins, interpolated
//      coefficients, flip-and-shift placement), each channel once per
//      spectrum, the non-reconstructable slots flagged, the latency of 4 clocks;
//   3. run a mismatch measurement over 2 spectra and read every integrated
//      a_m * conj(a_0) back as IEEE-754 singles.
// Each mechanism is counted; one that never happens is a failure.
  import comca_pkg::*;
  localparam int NP = N / M, D = NP / (2 * P), ENT = D / I + 1, CORES = M * P;
  localparam int AW = clog2_min1(D), LW = clog2_min1(M), PW = clog2_min1(P);
  localparam int KW = clog2_min1(N / 2), LAT = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle++;

  logic          fft_valid = 0;
  logic [AW-1:0] fft_idx = '0;
  bin_t          fft_bins [P][M];
  logic [7:0]    coef_data = '0;
  logic          coef_ready = 0, coef_reset = 0, coef_full;
  logic          cal_valid [CORES];
  logic [KW-1:0] cal_chan  [CORES];
  logic          cal_ok    [CORES];
  obin_t         cal_bin   [CORES];
  logic          meas_start = 0;
  logic [15:0]   meas_num_spectra = '0;
  logic          meas_busy, meas_done;
  logic          meas_rd_en = 0;
  logic [PW-1:0] meas_rd_par = '0;
  logic [AW-1:0] meas_rd_idx = '0;
  logic [LW-1:0] meas_rd_lane = '0;
  logic          meas_rd_valid;
  logic [31:0]   meas_rd_re, meas_rd_im;

  coef_t  stored [CORES][ENT][M];
  bin_t   spec [NP/2][M];
  longint exp_re [N/2], exp_im [N/2];
  int     hits [N/2];
  longint acc_re [P][M][D], acc_im [P][M][D];
  int     first_out = -1, in_cycle = 0;
  // mechanism counters
  int n_ptr_reset = 0, n_full = 0, n_interp = 0, n_conj = 0, n_flagged = 0;
  int n_direct = 0, n_meas = 0, n_float = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic send_byte(logic [7:0] b);
    @(negedge clk);
    coef_data = b; coef_ready = 1;
    @(negedge clk);
    coef_ready = 0;
  endtask

  task automatic send_coef(coef_t c);
    send_byte(c.re[7:0]);
    send_byte(c.re[15:8]);
    send_byte(c.im[7:0]);
    send_byte(c.im[15:8]);
  endtask

  task automatic compute_expected();
    for (int k = 0; k < N / 2; k++) begin
      int b, kp, p, t, core, k0, k1, w, j;
      bit ok;
      longint sre, sim, cre, cim, are, aim;
      comca_ref_pkg::place(k, NP, b, kp, ok);
      p = kp % P; t = kp / P; core = b * P + p;
      comca_ref_pkg::interp_idx(t, I, k0, k1, w);
      j = k % NP;
      sre = 0; sim = 0;
      for (int m = 0; m < M; m++) begin
        cre = comca_ref_pkg::lerp(stored[core][k0/I][m].re, stored[core][k1/I][m].re, w, I);
        cim = comca_ref_pkg::lerp(stored[core][k0/I][m].im, stored[core][k1/I][m].im, w, I);
        if (j < NP / 2) begin
          are = spec[j][m].re; aim = spec[j][m].im;
        end else begin
          are = spec[NP - j][m].re; aim = -longint'(spec[NP - j][m].im);
        end
        sre += are * cre - aim * cim;
        sim += are * cim + aim * cre;
      end
      exp_re[k] = comca_ref_pkg::round_sat32(sre);
      exp_im[k] = comca_ref_pkg::round_sat32(sim);
    end
  endtask

  function automatic logic [31:0] ref_f(longint v);
    logic [63:0] d;
    if (v == 0) return 32'h0;
    d = $realtobits(real'(v));
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  // output monitor (outputs are undefined until reset has been applied)
  always @(posedge clk) begin
    int n;
    n = 0;
    for (int c = 0; c < CORES; c++) begin
      if (rst_n && cal_valid[c]) begin
        n++;
        if (cal_ok[c]) begin
          int b, kp, w, k0, k1;
          bit ok;
          hits[cal_chan[c]]++;
          check(longint'(cal_bin[c].re) == exp_re[cal_chan[c]] &&
                longint'(cal_bin[c].im) == exp_im[cal_chan[c]],
                $sformatf("core %0d channel %0d value %0d,%0d exp %0d,%0d", c,
                          cal_chan[c], cal_bin[c].re, cal_bin[c].im,
                          exp_re[cal_chan[c]], exp_im[cal_chan[c]]));
          comca_ref_pkg::place(int'(cal_chan[c]), NP, b, kp, ok);
          if (b % 2 == 1) n_conj++; else n_direct++;
          comca_ref_pkg::interp_idx(kp / P, I, k0, k1, w);
          if (w != 0 && w != I) n_interp++;
        end else begin
          n_flagged++;
          check(int'(cal_chan[c]) % NP == NP / 2, "flagged slot position");
        end
      end
    end
    if (n != 0) check(n == CORES, "all cores deliver in the same clock");
    if (n != 0 && first_out < 0) first_out = cycle;
  end

  task automatic stream(bit meas);
    for (int t = 0; t < D; t++) begin
      @(negedge clk);
      if (t == 0) in_cycle = cycle;
      fft_valid = 1; fft_idx = AW'(t);
      for (int p = 0; p < P; p++)
        for (int m = 0; m < M; m++) begin
          fft_bins[p][m] = spec[t * P + p][m];
          if (meas) begin
            acc_re[p][m][t] += longint'(spec[t*P+p][m].re) * spec[t*P+p][0].re
                             + longint'(spec[t*P+p][m].im) * spec[t*P+p][0].im;
            acc_im[p][m][t] += longint'(spec[t*P+p][m].im) * spec[t*P+p][0].re
                             - longint'(spec[t*P+p][m].re) * spec[t*P+p][0].im;
          end
        end
    end
    @(negedge clk);
    fft_valid = 0;
  endtask

  initial begin
    foreach (fft_bins[p, m]) fft_bins[p][m] = '0;
    foreach (acc_re[p, m, t]) begin acc_re[p][m][t] = 0; acc_im[p][m][t] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. coefficients
    foreach (stored[c, e, m]) stored[c][e][m] = comca_ref_pkg::rand_coef();
    for (int i = 0; i < 5; i++) send_coef(comca_ref_pkg::rand_coef());   // discarded
    send_byte(8'h5a);
    @(negedge clk); coef_reset = 1; @(negedge clk); coef_reset = 0;
    n_ptr_reset++;
    foreach (stored[c, e, m]) begin
      check(!coef_full, "not full before the last coefficient");
      send_coef(stored[c][e][m]);
    end
    repeat (2) @(negedge clk);
    check(coef_full, "coefficient memory full");
    if (coef_full) n_full++;
    // 2. corrected spectra
    for (int s = 0; s < SPECTRA; s++) begin
      foreach (spec[k, m]) spec[k][m] = comca_ref_pkg::rand_bin(24);
      compute_expected();
      foreach (hits[k]) hits[k] = 0;
      first_out = -1;
      stream(0);
      repeat (LAT + 2) @(negedge clk);
      check(first_out - in_cycle == LAT + 1, $sformatf("latency %0d", first_out - in_cycle - 1));
      for (int k = 0; k < N / 2; k++)
        check(hits[k] == ((k % NP == NP / 2) ? 0 : 1),
              $sformatf("spectrum %0d channel %0d delivered %0d times", s, k, hits[k]));
    end
    // 3. mismatch measurement over two spectra
    @(negedge clk); meas_start = 1; meas_num_spectra = 16'd2;
    @(negedge clk); meas_start = 0;
    check(meas_busy, "measurement armed");
    for (int s = 0; s < 2; s++) begin
      foreach (spec[k, m]) spec[k][m] = comca_ref_pkg::rand_bin(28);
      compute_expected();
      stream(1);
      repeat (LAT + 2) @(negedge clk);   // corrected outputs of this spectrum drain
    end
    repeat (2) @(negedge clk);
    check(meas_done, "measurement done");
    if (meas_done) n_meas++;
    for (int p = 0; p < P; p++)
      for (int m = 0; m < M; m++)
        for (int t = 0; t < D; t++) begin
          @(negedge clk);
          meas_rd_en = 1; meas_rd_par = PW'(p); meas_rd_lane = LW'(m); meas_rd_idx = AW'(t);
          @(negedge clk);
          meas_rd_en = 0;
          @(posedge clk); #1;
          check(meas_rd_valid, "float readout valid");
          check(meas_rd_re == ref_f(acc_re[p][m][t]) && meas_rd_im == ref_f(acc_im[p][m][t]),
                $sformatf("measurement p=%0d m=%0d t=%0d", p, m, t));
          n_float++;
        end
    $display("mechanisms: pointer_reset=%0d coef_full=%0d direct=%0d conj=%0d interpolated=%0d flagged=%0d measurement=%0d float_reads=%0d",
             n_ptr_reset, n_full, n_direct, n_conj, n_interp, n_flagged, n_meas, n_float);
    check(n_ptr_reset > 0, "pointer reset happened");
    check(n_full > 0, "loader filled the memory");
    check(n_direct > 0, "direct channels");
    check(n_conj > 0, "reconstructed (conjugated) channels");
    check(n_interp > 0 || I == 1, "interpolated coefficients");
    check(n_flagged > 0, "non-reconstructable slots flagged");
    check(n_meas > 0, "measurement completed");
    check(n_float > 0, "float readout");
    finish_run();
  end
