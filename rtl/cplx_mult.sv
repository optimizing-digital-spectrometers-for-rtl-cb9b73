// cplx_mult -- registered full-precision complex multiplication of an FFT bin
// by a calibration coefficient, with four real multiplications:
//   re = a.re*c.re - a.im*c.im,  im = a.re*c.im + a.im*c.re.
// No bits are dropped; the product is DATA_W + COEF_W + 1 bits wide per part.
// (The source counts 4 real multiplications per complex product, or 3 at the
// cost of more additions; this design uses the 4-multiplication form.)
// Timing: one register stage.
module cplx_mult
  import comca_pkg::*;
#(
  localparam int unsigned PW = DATA_W + COEF_W + 1
) (
  input  logic                 clk,
  input  bin_t                 a,
  input  coef_t                c,
  output logic signed [PW-1:0] p_re,
  output logic signed [PW-1:0] p_im
);
  always_ff @(posedge clk) begin
    p_re <= PW'(a.re * c.re) - PW'(a.im * c.im);
    p_im <= PW'(a.re * c.im) + PW'(a.im * c.re);
  end
endmodule
