// comca_top_full_tb -- end-to-end test of comca_top at its default size
// (M = 8 ADC cores, P = 2, N = 32768, i.e. 16k output channels, I = 4):
// full coefficient load over the 8-bit bus, two corrected spectra checked
// channel by channel, one two-spectrum mismatch measurement read back in full.
// See comca_top_body.svh for the sequence and the checks.
module comca_top_full_tb;
  localparam int M = 8, P = 2, N = 32768, I = 4, SPECTRA = 2;
  `include "comca_top_body.svh"

  comca_top dut (.*);

  task automatic finish_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
