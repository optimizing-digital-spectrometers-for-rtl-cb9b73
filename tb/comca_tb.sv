// comca_tb -- self-checking test of the COMCA component (M = 4, P = 2,
// N = 64, I = 2). Random coefficients are written to every core, random
// half-spectra of the M ADC-core FFTs are streamed in, and every output channel
// is compared with the corrected spectrum computed in the testbench straight
// from b_k = sum_m a_{k mod N', m} * c_{k,m}, where a_{k'} for k' > N'/2 is
// rebuilt as conj(a_{N'-k'}) and c_{k,m} is the interpolated coefficient the
// testbench placed for channel k. Each reconstructable channel must appear
// exactly once per spectrum; the M/2 non-reconstructable slots must be flagged.
module comca_tb;
  import comca_pkg::*;
  localparam int M = 4, P = 2, N = 64, I = 2;
  localparam int NP = N / M, D = NP / (2 * P), ENT = D / I + 1, CORES = M * P;
  localparam int SPECTRA = 3, LAT = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle++;

  logic in_valid = 0;
  logic [1:0] in_idx = '0;
  bin_t in_bins [P][M];
  logic wr_en = 0;
  logic [2:0] wr_core = '0;
  logic [1:0] wr_entry = '0;
  logic [1:0] wr_lane = '0;
  coef_t wr_coef = '0;
  logic out_valid [CORES];
  logic [4:0] out_chan [CORES];
  logic out_ok [CORES];
  obin_t out_bin [CORES];

  comca #(.LANES(M), .PAR(P), .NFFT(N), .INTERP(I)) dut (.*);

  coef_t stored [CORES][ENT][M];
  bin_t  spec [NP/2][M];
  longint exp_re [N/2], exp_im [N/2];
  int hits [N/2];
  int n_bad_slot = 0, first_out = -1, last_in = 0, n_spec_out = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
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

  always @(posedge clk) begin
    int n;
    n = 0;
    for (int c = 0; c < CORES; c++) begin
      if (out_valid[c]) begin
        n++;
        if (out_ok[c]) begin
          hits[out_chan[c]]++;
          check(longint'(out_bin[c].re) == exp_re[out_chan[c]] &&
                longint'(out_bin[c].im) == exp_im[out_chan[c]],
                $sformatf("core %0d channel %0d value %0d,%0d exp %0d,%0d", c, out_chan[c], out_bin[c].re, out_bin[c].im, exp_re[out_chan[c]], exp_im[out_chan[c]]));
        end else begin
          n_bad_slot++;
          check(out_chan[c] % NP == NP / 2, $sformatf("flagged slot %0d", out_chan[c]));
        end
      end
    end
    if (n != 0) check(n == CORES, "all cores deliver in the same clock");
    if (n != 0 && first_out < 0) first_out = cycle;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int start_cycle;
    foreach (in_bins[p, m]) in_bins[p][m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (stored[c, e, m]) begin
      stored[c][e][m] = comca_ref_pkg::rand_coef();
      @(negedge clk);
      wr_en = 1; wr_core = 3'(c); wr_entry = 2'(e); wr_lane = 2'(m);
      wr_coef = stored[c][e][m];
    end
    @(negedge clk); wr_en = 0;
    for (int s = 0; s < SPECTRA; s++) begin
      foreach (spec[k, m]) spec[k][m] = comca_ref_pkg::rand_bin(24);
      compute_expected();
      foreach (hits[k]) hits[k] = 0;
      n_bad_slot = 0;
      first_out = -1;
      @(negedge clk);
      start_cycle = cycle;
      for (int t = 0; t < D; t++) begin
        in_valid = 1; in_idx = 2'(t);
        for (int p = 0; p < P; p++)
          for (int m = 0; m < M; m++) in_bins[p][m] = spec[t * P + p][m];
        @(negedge clk);
      end
      in_valid = 0;
      repeat (LAT + 2) @(negedge clk);
      check(first_out - start_cycle == LAT + 1, $sformatf("latency %0d", first_out - start_cycle - 1));
      for (int k = 0; k < N / 2; k++)
        check(hits[k] == ((k % NP == NP / 2) ? 0 : 1), $sformatf("spectrum %0d channel %0d delivered %0d times", s, k, hits[k]));
      check(n_bad_slot == M / 2, "flagged slots per spectrum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
