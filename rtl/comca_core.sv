// comca_core -- one COMCA core: corrects one output spectral channel per clock.
//
// Function (follows the source): the core receives, for the current FFT bin
// k', the complex bins a_{k',m} of all M ADC-core FFTs. It fetches the M
// complex coefficients c_{k,m} = H_{k,m} * exp(-2*pi*i*m*k/N) of the output
// channel k it produces from its own coefficient BRAM, multiplies each bin with
// its coefficient and adds the M products:
//   b_k = sum_m a_{k mod N', m} * c_{k,m}.
// Cores that serve the mirrored half of a block of channels (CONJ = 1) use the
// reconstructed bins a_{N'-k',m} = conj(a_{k',m}), because the FFTs compute
// only the first half of each real-input spectrum.
// The coefficient memory may hold only every I-th coefficient (INTERP = I);
// the missing ones are linearly interpolated (coef_store, coef_interp).
//
// Arithmetic (this design's choice): coefficients are Q2.14, the M products are
// summed at full precision, then rounded (half up) back by COEF_FRAC bits and
// saturated to OUT_W bits.
//
// Interface: in_addr is the core-local coefficient address of the bin (its
// position in the core's input stream); in_tag is carried unchanged to out_tag
// (used for the output channel number). Coefficients are written through wr_*.
// Timing: fully pipelined, one channel per clock, latency LATENCY = 4 clocks
// (BRAM read, interpolation, multiplication, adder tree + rounding).
module comca_core
  import comca_pkg::*;
#(
  parameter int unsigned LANES  = 8,
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned INTERP = 4,
  parameter bit          CONJ   = 1'b0,
  parameter int unsigned TW     = 16,
  localparam int unsigned ENTRIES = DEPTH / INTERP + 1,
  localparam int unsigned AW = clog2_min1(DEPTH),
  localparam int unsigned EW = clog2_min1(ENTRIES),
  localparam int unsigned LW = clog2_min1(LANES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [AW-1:0] in_addr,
  input  logic [TW-1:0] in_tag,
  input  bin_t          in_bins [LANES],
  input  logic          wr_en,
  input  logic [EW-1:0] wr_entry,
  input  logic [LW-1:0] wr_lane,
  input  coef_t         wr_coef,
  output logic          out_valid,
  output logic [TW-1:0] out_tag,
  output obin_t         out_bin
);
  localparam int unsigned KW  = $clog2(INTERP) + 1;
  localparam int unsigned PW  = DATA_W + COEF_W + 1;
  localparam int unsigned SW  = PW + $clog2(LANES) + 1;

  // stage 1: bins registered while the coefficients are read
  bin_t          bins1 [LANES];
  bin_t          bins2 [LANES];
  logic [TW-1:0] tag1, tag2, tag3;
  logic          v1, v3;
  logic          v2;
  coef_t         c0 [LANES];
  coef_t         c1 [LANES];
  logic [KW-1:0] kp;
  coef_t         cc [LANES];
  logic signed [PW-1:0] p_re [LANES];
  logic signed [PW-1:0] p_im [LANES];
  logic signed [SW-1:0] s_re, s_im;

  coef_store #(.LANES(LANES), .DEPTH(DEPTH), .INTERP(INTERP)) u_store (
    .clk      (clk),
    .wr_en    (wr_en),
    .wr_entry (wr_entry),
    .wr_lane  (wr_lane),
    .wr_coef  (wr_coef),
    .rd_en    (in_valid),
    .rd_addr  (in_addr),
    .rd_c0    (c0),
    .rd_c1    (c1),
    .rd_kp    (kp)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0;
    end else begin
      v1 <= in_valid;
    end
    tag1 <= in_tag;
    for (int m = 0; m < int'(LANES); m++)
      bins1[m] <= CONJ ? conj_bin(in_bins[m]) : in_bins[m];
  end

  // stage 2: interpolated coefficients
  coef_interp #(.LANES(LANES), .INTERP(INTERP)) u_interp (
    .clk       (clk),
    .in_valid  (v1),
    .in_c0     (c0),
    .in_c1     (c1),
    .in_kp     (kp),
    .out_valid (v2),
    .out_c     (cc)
  );

  always_ff @(posedge clk) begin
    bins2 <= bins1;
    tag2  <= tag1;
  end

  // stage 3: M complex products
  for (genvar m = 0; m < int'(LANES); m++) begin : g_mul
    cplx_mult u_mul (
      .clk  (clk),
      .a    (bins2[m]),
      .c    (cc[m]),
      .p_re (p_re[m]),
      .p_im (p_im[m])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) v3 <= 1'b0;
    else        v3 <= v2;
    tag3 <= tag2;
  end

  // stage 4: sum, round, saturate
  always_comb begin
    s_re = '0;
    s_im = '0;
    for (int m = 0; m < int'(LANES); m++) begin
      s_re = s_re + SW'(p_re[m]);
      s_im = s_im + SW'(p_im[m]);
    end
  end

  function automatic logic signed [OUT_W-1:0] round_sat(logic signed [SW-1:0] s);
    logic signed [SW-1:0] r;
    logic signed [SW-1:0] hi, lo;
    r  = (s + (SW'(1) <<< (COEF_FRAC - 1))) >>> COEF_FRAC;
    hi = SW'({1'b0, {(OUT_W-1){1'b1}}});
    lo = -hi - SW'(1);
    if (r > hi)      return {1'b0, {(OUT_W-1){1'b1}}};
    else if (r < lo) return {1'b1, {(OUT_W-1){1'b0}}};
    else             return OUT_W'(r);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v3;
    out_tag    <= tag3;
    out_bin.re <= round_sat(s_re);
    out_bin.im <= round_sat(s_im);
  end

endmodule
