// mismatch_meter_tb -- self-checking test of the mismatch measurement
// (M = 3, P = 2, 4 stream positions). Random spectra are streamed
// continuously; a start pulse arrives mid-spectrum, so the meter must wait for
// the next spectrum start, integrate exactly num_spectra spectra of
// a_m * conj(a_0) and raise done. Every sum is read back and compared with
// the testbench's own integration. A second run checks that the first spectrum
// of a new measurement overwrites the old sums.
module mismatch_meter_tb;
  import comca_pkg::*;
  localparam int M = 3, P = 2, B = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0;
  logic [1:0] in_idx = '0;
  bin_t in_bins [P][M];
  logic start = 0;
  logic [15:0] num_spectra = '0;
  logic busy, done;
  logic rd_en = 0;
  logic [0:0] rd_par = '0;
  logic [1:0] rd_idx = '0;
  logic [1:0] rd_lane = '0;
  acc_t rd_data;

  mismatch_meter #(.LANES(M), .PAR(P), .BINS(B)) dut (.*);

  longint ref_re [P][M][B], ref_im [P][M][B];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one spectrum of random bins; accumulate into the reference if asked
  task automatic stream_spectrum(bit integrate, bit first);
    for (int t = 0; t < B; t++) begin
      @(negedge clk);
      in_valid = 1; in_idx = 2'(t);
      for (int p = 0; p < P; p++) begin
        for (int m = 0; m < M; m++) in_bins[p][m] = comca_ref_pkg::rand_bin(28);
        for (int m = 0; m < M; m++) if (integrate) begin
          longint xr, xi;
          xr = longint'(in_bins[p][m].re) * in_bins[p][0].re
             + longint'(in_bins[p][m].im) * in_bins[p][0].im;
          xi = longint'(in_bins[p][m].im) * in_bins[p][0].re
             - longint'(in_bins[p][m].re) * in_bins[p][0].im;
          ref_re[p][m][t] = (first ? 0 : ref_re[p][m][t]) + xr;
          ref_im[p][m][t] = (first ? 0 : ref_im[p][m][t]) + xi;
        end
      end
    end
    @(negedge clk); in_valid = 0;   // one idle clock between spectra
  endtask

  task automatic read_all(string tag);
    for (int p = 0; p < P; p++)
      for (int m = 0; m < M; m++)
        for (int t = 0; t < B; t++) begin
          @(negedge clk);
          rd_en = 1; rd_par = 1'(p); rd_lane = 2'(m); rd_idx = 2'(t);
          @(negedge clk);
          rd_en = 0;
          check(rd_data.re == ref_re[p][m][t] && rd_data.im == ref_im[p][m][t],
                $sformatf("%s p=%0d m=%0d t=%0d", tag, p, m, t));
          if (m == 0) check(rd_data.im == 0, "lane 0 holds |a0|^2 (real)");
        end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (in_bins[p, m]) in_bins[p][m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !done, "idle after reset");
    // start in the middle of a spectrum: that spectrum is not integrated
    @(negedge clk);
    in_valid = 1; in_idx = 2'd0;
    @(negedge clk);
    in_idx = 2'd1; start = 1; num_spectra = 16'd3;
    @(negedge clk);
    start = 0; in_idx = 2'd2;
    @(negedge clk);
    in_idx = 2'd3;
    @(negedge clk);
    in_valid = 0;
    check(busy && !done, "armed");
    stream_spectrum(1, 1);
    stream_spectrum(1, 0);
    check(busy, "still integrating after two spectra");
    stream_spectrum(1, 0);
    @(negedge clk);
    check(done && !busy, "done after three spectra");
    stream_spectrum(0, 0);   // ignored
    read_all("run 1");
    // second run of one spectrum overwrites the sums
    @(negedge clk); start = 1; num_spectra = 16'd1;
    @(negedge clk); start = 0;
    stream_spectrum(1, 1);
    @(negedge clk);
    check(done, "done after one spectrum");
    read_all("run 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
