// comca_top_interp_tb -- the interpolation workloads at full size: 16k
// output channels per input (N = 32768, M = 8, P = 2) corrected with
// coefficients stored for every channel (I = 1) and for every second channel
// (I = 2), the two settings besides the default I = 4 that are compared in
// practice. Each configuration is a complete comca_top_run (load, one
// spectrum checked channel by channel, a measurement read back); both run side
// by side, and the totals are reported when both are done. A watchdog ends
// the run with a failure if either hangs.
module comca_top_interp_tb;
  logic done1, done2;
  int   c1, f1, c2, f2;

  comca_top_run #(.I(1), .SPECTRA(1)) u_i1 (.done(done1), .n_checks(c1), .n_failures(f1));
  comca_top_run #(.I(2), .SPECTRA(1)) u_i2 (.done(done2), .n_checks(c2), .n_failures(f2));

  initial begin
    fork
      begin
        wait (done1 && done2);
        $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2);
      end
      begin
        #50ms;
        $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2 + 1);
      end
    join_any
    $finish;
  end
endmodule
