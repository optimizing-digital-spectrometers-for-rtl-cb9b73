// mismatch_meter -- in-FPGA measurement of the ADC-core mismatches.
//
// Function (follows the source): each ADC core's samples go through their own
// FFT; for every bin the spectrum of ADC core 0 is complex conjugated and
// multiplied with the spectra of all cores,
//   h''_{m,n} = a_{m,n} * conj(a_{0,n})  (4 real multiplications, no division),
// and these products are summed while the spectrometer integrates. The phase
// of the test tone differs from FFT to FFT, so the raw spectra cannot be
// integrated; the cross products with core 0 can. Lane m = 0 yields
// |a_0|^2, which the host needs to normalise h''_{m,n} / h''_{0,n}.
// All sums are fixed point (ACC_W bits per part, this design's choice, with
// wrap-around on overflow); the conversion to floating point for the readout
// is done by fix2float.
//
// Control (this design's own choice, the source gives none): a start pulse
// arms the meter; it waits for the first bin (in_idx == 0) of the next
// spectrum, then integrates num_spectra complete spectra, the first one
// overwriting the old sums, and raises done. The sums are read through a
// registered port (rd_* -> rd_data one clock later) at any time.
//
// Timing: one pipeline stage for the products, then a two-stage
// read-modify-write of one memory word per lane and bin (each word is touched
// once per spectrum, so the pipelined read-modify-write has no hazard; bins
// with the same position must be at least 2 clocks apart, which holds for any
// spectrum of 2 or more positions). rd_data is valid one clock after rd_en
// (a registered read of every lane's memory, then a selection).
module mismatch_meter
  import comca_pkg::*;
#(
  parameter int unsigned LANES = 8,      // M
  parameter int unsigned PAR   = 2,      // P
  parameter int unsigned BINS  = 512,    // stream positions per spectrum (N'/(2P))
  localparam int unsigned AW = clog2_min1(BINS),
  localparam int unsigned LW = clog2_min1(LANES),
  localparam int unsigned PW = clog2_min1(PAR)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [AW-1:0] in_idx,
  input  bin_t          in_bins [PAR][LANES],
  input  logic          start,
  input  logic [15:0]   num_spectra,
  output logic          busy,
  output logic          done,
  input  logic          rd_en,
  input  logic [PW-1:0] rd_par,
  input  logic [AW-1:0] rd_idx,
  input  logic [LW-1:0] rd_lane,
  output acc_t          rd_data
);
  localparam int unsigned XW = 2 * DATA_W + 1;

  typedef enum logic [1:0] {S_IDLE, S_ARMED, S_ACC, S_DONE} state_t;
  state_t state;

  logic [15:0]   spec_cnt;
  logic          acc_en, first;
  logic          acc_en1, first1;
  logic [AW-1:0] idx1;
  logic signed [XW-1:0] x_re [PAR][LANES];
  logic signed [XW-1:0] x_im [PAR][LANES];

  // the clock's bins belong to an integrated spectrum
  always_comb begin
    acc_en = 1'b0;
    first  = 1'b0;
    if (in_valid) begin
      if (state == S_ARMED && in_idx == '0) begin
        acc_en = 1'b1;
        first  = 1'b1;
      end else if (state == S_ACC) begin
        acc_en = 1'b1;
        first  = (spec_cnt == '0);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      spec_cnt <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: if (start) state <= S_ARMED;
        S_ARMED: begin
          spec_cnt <= '0;
          if (in_valid && in_idx == '0) state <= S_ACC;
        end
        S_ACC: ;
        default: state <= S_IDLE;
      endcase
      // end of an integrated spectrum
      if (acc_en && in_idx == AW'(BINS - 1)) begin
        if (spec_cnt + 16'd1 >= num_spectra) begin
          state    <= S_DONE;
          spec_cnt <= '0;
        end else begin
          spec_cnt <= spec_cnt + 16'd1;
        end
      end
    end
  end

  assign busy = (state == S_ARMED) || (state == S_ACC);
  assign done = (state == S_DONE);

  // stage 1: cross products with conj(a_0)
  always_ff @(posedge clk) begin
    if (!rst_n) acc_en1 <= 1'b0;
    else        acc_en1 <= acc_en;
    first1 <= first;
    idx1   <= in_idx;
    for (int p = 0; p < int'(PAR); p++) begin
      for (int m = 0; m < int'(LANES); m++) begin
        x_re[p][m] <= XW'(in_bins[p][m].re * in_bins[p][0].re)
                    + XW'(in_bins[p][m].im * in_bins[p][0].im);
        x_im[p][m] <= XW'(in_bins[p][m].im * in_bins[p][0].re)
                    - XW'(in_bins[p][m].re * in_bins[p][0].im);
      end
    end
  end

  // stage 2: read the running sums; stage 3: write back the new sums.
  // Each (p, m) has its own memory with one write port and two read ports
  // (integration and readout).
  logic          acc_en2, first2;
  logic [AW-1:0] idx2;
  logic signed [XW-1:0] x2_re [PAR][LANES];
  logic signed [XW-1:0] x2_im [PAR][LANES];
  acc_t          rd_lanes [PAR][LANES];

  always_ff @(posedge clk) begin
    if (!rst_n) acc_en2 <= 1'b0;
    else        acc_en2 <= acc_en1;
    first2 <= first1;
    idx2   <= idx1;
    x2_re  <= x_re;
    x2_im  <= x_im;
  end

  for (genvar p = 0; p < int'(PAR); p++) begin : g_par
    for (genvar m = 0; m < int'(LANES); m++) begin : g_lane
      acc_t acc_mem [BINS];
      acc_t old_sum;

      always_ff @(posedge clk) begin
        if (acc_en1) old_sum <= acc_mem[idx1];
      end

      always_ff @(posedge clk) begin
        if (acc_en2) begin
          if (first2) begin
            acc_mem[idx2].re <= ACC_W'(x2_re[p][m]);
            acc_mem[idx2].im <= ACC_W'(x2_im[p][m]);
          end else begin
            acc_mem[idx2].re <= old_sum.re + ACC_W'(x2_re[p][m]);
            acc_mem[idx2].im <= old_sum.im + ACC_W'(x2_im[p][m]);
          end
        end
      end

      always_ff @(posedge clk) begin
        if (rd_en) rd_lanes[p][m] <= acc_mem[rd_idx];
      end
    end
  end

  // readout select, registered one clock after rd_en
  logic [PW-1:0] rd_par_q;
  logic [LW-1:0] rd_lane_q;
  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_par_q  <= rd_par;
      rd_lane_q <= rd_lane;
    end
  end
  assign rd_data = rd_lanes[rd_par_q][rd_lane_q];

endmodule
