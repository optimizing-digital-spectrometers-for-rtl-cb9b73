// comca -- the COMCA component: applies the frequency dependent TIADC
// calibration to the spectra of the M per-ADC-core FFTs.
//
// Function (follows the source): the component holds M*P independent COMCA
// cores. Every clock the M FFTs deliver P bins each (bins k' = P*t + p,
// p = 0..P-1, for stream position t); every core receives the bins of all M
// FFTs for its p (fan-out of the aggregate bus). Core (b, p) produces the
// output channels of block b (see channel_map); cores of odd blocks work on
// the conjugated (reconstructed) bins. Together the cores turn the M
// half-spectra of N'/2 bins into the corrected N/2-channel spectrum, M*P
// channels per clock, which equals the input bin rate.
// How the P parallel bins are assigned (consecutive bins, k' = P*t + p) and the
// core numbering (core = b*P + p, used by the coefficient loader) are this
// design's own choices.
//
// Interface: in_idx is the stream position t (0..N'/(2P)-1) of the current
// clock's bins. Outputs are per core: out_chan is the final channel number k
// (already reordered), out_ok is low for the channels that cannot be
// reconstructed. Coefficient writes come from coef_loader.
// Synthesis finds some out_chan bits constant: a core always serves the same
// block b, which fixes the high bits of its channel numbers (and, in even
// blocks, the stream p fixes bit 0). They are kept as outputs so every core
// has the same channel-number port.
//
// Timing: one spectrum every N'/(2P) valid clocks; latency comca_core's 4 clocks.
module comca
  import comca_pkg::*;
#(
  parameter int unsigned LANES  = 8,       // M
  parameter int unsigned PAR    = 2,       // P
  parameter int unsigned NFFT   = 32768,   // N
  parameter int unsigned INTERP = 4,       // I
  localparam int unsigned NPRIME  = NFFT / LANES,
  localparam int unsigned DEPTH   = NPRIME / (2 * PAR),
  localparam int unsigned ENTRIES = DEPTH / INTERP + 1,
  localparam int unsigned CORES   = LANES * PAR,
  localparam int unsigned AW = clog2_min1(DEPTH),
  localparam int unsigned EW = clog2_min1(ENTRIES),
  localparam int unsigned LW = clog2_min1(LANES),
  localparam int unsigned CW = clog2_min1(CORES),
  localparam int unsigned KW = clog2_min1(NFFT / 2)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [AW-1:0] in_idx,
  input  bin_t          in_bins [PAR][LANES],
  input  logic          wr_en,
  input  logic [CW-1:0] wr_core,
  input  logic [EW-1:0] wr_entry,
  input  logic [LW-1:0] wr_lane,
  input  coef_t         wr_coef,
  output logic          out_valid [CORES],
  output logic [KW-1:0] out_chan  [CORES],
  output logic          out_ok    [CORES],
  output obin_t         out_bin   [CORES]
);
  localparam int unsigned KPW = clog2_min1(NPRIME / 2);

  for (genvar b = 0; b < int'(LANES); b++) begin : g_blk
    for (genvar p = 0; p < int'(PAR); p++) begin : g_par
      localparam int unsigned C = b * PAR + p;
      logic [KPW-1:0] kprime;
      logic [KW-1:0]  chan;
      logic           ok;
      logic [KW:0]    otag;

      assign kprime = KPW'(in_idx) * KPW'(PAR) + KPW'(p);

      channel_map #(.BLOCKS(LANES), .NPRIME(NPRIME)) u_map (
        .block   (LW'(b)),
        .kprime  (kprime),
        .chan    (chan),
        .chan_ok (ok)
      );

      comca_core #(
        .LANES(LANES), .DEPTH(DEPTH), .INTERP(INTERP),
        .CONJ(b % 2 == 1), .TW(KW + 1)
      ) u_core (
        .clk       (clk),
        .rst_n     (rst_n),
        .in_valid  (in_valid),
        .in_addr   (in_idx),
        .in_tag    ({ok, chan}),
        .in_bins   (in_bins[p]),
        .wr_en     (wr_en && (wr_core == CW'(C))),
        .wr_entry  (wr_entry),
        .wr_lane   (wr_lane),
        .wr_coef   (wr_coef),
        .out_valid (out_valid[C]),
        .out_tag   (otag),
        .out_bin   (out_bin[C])
      );

      assign out_chan[C] = otag[KW-1:0];
      assign out_ok[C]   = otag[KW];
    end
  end

endmodule
