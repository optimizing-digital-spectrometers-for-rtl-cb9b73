// comca_top -- frequency dependent calibration of a time-interleaved ADC in the
// spectral domain, for one spectrometer input.
//
// Context: an input is sampled by a TIADC of M ADC cores. Each core has its own
// frequency dependent gain and phase, which creates mirror images of every
// signal at m*fs/M +- f. The spectrometer computes an N'-point FFT (N' = N/M)
// of every ADC core's samples separately (only the first half of each real
// spectrum, P bins per core and clock); those FFTs are outside this design and
// feed fft_* below. This top holds:
//   * comca          -- M*P COMCA cores; each multiplies the M bins of one FFT
//                       bin position with its coefficients c_{k,m} and sums
//                       them into one corrected channel of the N-point
//                       spectrum (channel number already reordered);
//   * coef_loader    -- fills the cores' coefficient BRAMs from the host's
//                       8-bit register bus (data ready / pointer reset);
//   * mismatch_meter -- integrates a_m * conj(a_0) over spectra for the
//                       measurement of the mismatches with a test tone;
//   * fix2float (2x) -- converts the integrated sums read by the host to float.
// In the source the measurement is a separate FPGA configuration and the
// integration into the standard one is proposed; here both share the FFT
// outputs and the measurement runs only when started (this design's choice).
// Power detection, integration and the network interface of the spectrometer
// follow cal_* and are outside this design.
//
// Synthesis finds some cal_chan bits constant: a core always serves the same
// block b, which fixes the high bits of its channel numbers (and, in even
// blocks, the stream p fixes bit 0). They are kept as outputs so every core
// has the same channel-number port.
//
// Timing: corrected channels appear 4 clocks after their FFT bins, M*P per
// clock. Meter reads return one clock after meas_rd_en plus one clock of
// conversion (meas_rd_valid).
module comca_top
  import comca_pkg::*;
#(
  parameter int unsigned LANES  = 8,       // M, ADC cores per input
  parameter int unsigned PAR    = 2,       // P, bins per ADC core and clock
  parameter int unsigned NFFT   = 32768,   // N, total FFT length (N/2 channels)
  parameter int unsigned INTERP = 4,       // I, coefficient interpolation factor
  localparam int unsigned NPRIME  = NFFT / LANES,
  localparam int unsigned DEPTH   = NPRIME / (2 * PAR),
  localparam int unsigned ENTRIES = DEPTH / INTERP + 1,
  localparam int unsigned CORES   = LANES * PAR,
  localparam int unsigned AW = clog2_min1(DEPTH),
  localparam int unsigned LW = clog2_min1(LANES),
  localparam int unsigned PW = clog2_min1(PAR),
  localparam int unsigned KW = clog2_min1(NFFT / 2)
) (
  input  logic          clk,
  input  logic          rst_n,
  // per-ADC-core FFT outputs: bins k' = PAR*fft_idx + p of all LANES cores
  input  logic          fft_valid,
  input  logic [AW-1:0] fft_idx,
  input  bin_t          fft_bins [PAR][LANES],
  // host coefficient register bus
  input  logic [7:0]    coef_data,
  input  logic          coef_ready,
  input  logic          coef_reset,
  output logic          coef_full,
  // corrected spectrum, one channel per core and clock
  output logic          cal_valid [CORES],
  output logic [KW-1:0] cal_chan  [CORES],
  output logic          cal_ok    [CORES],
  output obin_t         cal_bin   [CORES],
  // mismatch measurement
  input  logic          meas_start,
  input  logic [15:0]   meas_num_spectra,
  output logic          meas_busy,
  output logic          meas_done,
  input  logic          meas_rd_en,
  input  logic [PW-1:0] meas_rd_par,
  input  logic [AW-1:0] meas_rd_idx,
  input  logic [LW-1:0] meas_rd_lane,
  output logic          meas_rd_valid,
  output logic [31:0]   meas_rd_re,
  output logic [31:0]   meas_rd_im
);
  logic                             wr_en;
  logic [clog2_min1(CORES)-1:0]     wr_core;
  logic [clog2_min1(ENTRIES)-1:0]   wr_entry;
  logic [LW-1:0]                    wr_lane;
  coef_t                            wr_coef;
  acc_t                             rd_data;
  logic                             rd_v1;

  coef_loader #(.CORES(CORES), .ENTRIES(ENTRIES), .LANES(LANES)) u_loader (
    .clk       (clk),
    .rst_n     (rst_n),
    .bus_data  (coef_data),
    .bus_ready (coef_ready),
    .bus_reset (coef_reset),
    .wr_en     (wr_en),
    .wr_core   (wr_core),
    .wr_entry  (wr_entry),
    .wr_lane   (wr_lane),
    .wr_coef   (wr_coef),
    .full      (coef_full)
  );

  comca #(.LANES(LANES), .PAR(PAR), .NFFT(NFFT), .INTERP(INTERP)) u_comca (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (fft_valid),
    .in_idx    (fft_idx),
    .in_bins   (fft_bins),
    .wr_en     (wr_en),
    .wr_core   (wr_core),
    .wr_entry  (wr_entry),
    .wr_lane   (wr_lane),
    .wr_coef   (wr_coef),
    .out_valid (cal_valid),
    .out_chan  (cal_chan),
    .out_ok    (cal_ok),
    .out_bin   (cal_bin)
  );

  mismatch_meter #(.LANES(LANES), .PAR(PAR), .BINS(DEPTH)) u_meter (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (fft_valid),
    .in_idx      (fft_idx),
    .in_bins     (fft_bins),
    .start       (meas_start),
    .num_spectra (meas_num_spectra),
    .busy        (meas_busy),
    .done        (meas_done),
    .rd_en       (meas_rd_en),
    .rd_par      (meas_rd_par),
    .rd_idx      (meas_rd_idx),
    .rd_lane     (meas_rd_lane),
    .rd_data     (rd_data)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) rd_v1 <= 1'b0;
    else        rd_v1 <= meas_rd_en;
  end

  logic re_valid, im_valid;
  assign meas_rd_valid = re_valid & im_valid;

  fix2float #(.W(ACC_W)) u_f2f_re (
    .clk (clk), .in_valid (rd_v1), .in (rd_data.re),
    .out_valid (re_valid), .out (meas_rd_re)
  );

  fix2float #(.W(ACC_W)) u_f2f_im (
    .clk (clk), .in_valid (rd_v1), .in (rd_data.im),
    .out_valid (im_valid), .out (meas_rd_im)
  );

endmodule
