// comca_top_tb -- end-to-end test of comca_top at reduced size (M = 8, P = 2,
// N = 256, I = 4, i.e. 16 COMCA cores with 8 stream positions each); see
// comca_top_body.svh for the sequence and the checks.
module comca_top_tb;
  localparam int M = 8, P = 2, N = 256, I = 4, SPECTRA = 3;
  `include "comca_top_body.svh"

  comca_top #(.LANES(M), .PAR(P), .NFFT(N), .INTERP(I)) dut (.*);

  task automatic finish_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
