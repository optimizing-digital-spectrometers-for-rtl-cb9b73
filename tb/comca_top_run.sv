// comca_top_run -- one end-to-end run of a default-size comca_top (M = 8,
// P = 2, N = 32768, i.e. 16k channels per input) with the interpolation
// factor I given as a parameter. It runs the sequence of comca_top_body.svh
// (coefficient load over the 8-bit bus, SPECTRA corrected spectra checked
// channel by channel, one mismatch measurement read back) on its own clock
// and, instead of ending the simulation, reports its counts on the ports and
// raises done. Used by comca_top_interp_tb to run several configurations.
module comca_top_run #(
  parameter int I       = 1,
  parameter int SPECTRA = 1
) (
  output logic done,
  output int   n_checks,
  output int   n_failures
);
  localparam int M = 8, P = 2, N = 32768;
  `include "comca_top_body.svh"

  comca_top #(.INTERP(I)) dut (.*);

  initial begin
    done = 1'b0; n_checks = 0; n_failures = 0;
  end

  task automatic finish_run();
    $display("I = %0d: checks=%0d failures=%0d", I, checks, failures);
    n_checks = checks; n_failures = failures;
    done = 1'b1;
  endtask
endmodule
