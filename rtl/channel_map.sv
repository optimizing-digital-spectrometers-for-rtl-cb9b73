// channel_map -- output channel number of a COMCA core's result (the
// "flip and shift" reordering).
//
// Function (follows the source): FFT bin k' (0 <= k' < N'/2) of the per-ADC-core
// FFTs contributes to the output channels k = k' + N'*j and k = N' - k' + N'*j.
// The output spectrum (0 <= k < N/2) is cut into M blocks of N'/2 channels.
// Block b = 2j is produced in natural order: k = b*N'/2 + k'. Block b = 2j+1 is
// produced from the reconstructed bins in reverse order; flipping and shifting
// right by one gives k = b*N'/2 + (N'/2 - k') for k' > 0, while k' = 0 lands on
// the first slot of the block, k = b*N'/2 = N'/2 + N'*j, a channel that cannot
// be reconstructed (the Nyquist bin N'/2 of the per-core FFTs is not computed).
// chan_ok is low for that slot.
//
// Timing: purely combinational.
module channel_map
  import comca_pkg::*;
#(
  parameter int unsigned BLOCKS = 8,      // M
  parameter int unsigned NPRIME = 4096,   // N' = N/M, per-ADC-core FFT length
  localparam int unsigned BW = clog2_min1(BLOCKS),
  localparam int unsigned KPW = clog2_min1(NPRIME / 2),
  localparam int unsigned KW = clog2_min1(BLOCKS * NPRIME / 2)
) (
  input  logic [BW-1:0]  block,
  input  logic [KPW-1:0] kprime,
  output logic [KW-1:0]  chan,
  output logic           chan_ok
);
  localparam int unsigned HALF = NPRIME / 2;

  always_comb begin
    if (block[0] == 1'b0) begin
      chan    = KW'(block) * KW'(HALF) + KW'(kprime);
      chan_ok = 1'b1;
    end else if (kprime == '0) begin
      chan    = KW'(block) * KW'(HALF);
      chan_ok = 1'b0;
    end else begin
      chan    = KW'(block) * KW'(HALF) + KW'(HALF) - KW'(kprime);
      chan_ok = 1'b1;
    end
  end

endmodule
