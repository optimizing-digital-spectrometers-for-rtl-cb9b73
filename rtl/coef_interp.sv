// coef_interp -- linear interpolation between two stored calibration
// coefficients, for all M lanes of a COMCA core in parallel.
//
// Function (follows the source): c' = (K' * c_k0 + K'' * c_k1) / I with
// K'' = I - K'. I is a power of two, so the division is an arithmetic right
// shift (rounding toward minus infinity, this design's choice). K' never
// exceeds I, so each product is a narrow multiplication that needs no DSP
// slice. With I = 1 the output equals c_k0 (K' = 1) or c_k1 (K' = 0) exactly.
// Real and imaginary parts are interpolated independently.
//
// Timing: one register stage; out_* follow in_* by one clock.
module coef_interp
  import comca_pkg::*;
#(
  parameter int unsigned LANES  = 8,
  parameter int unsigned INTERP = 4,
  localparam int unsigned KW = $clog2(INTERP) + 1
) (
  input  logic          clk,
  input  logic          in_valid,
  input  coef_t         in_c0 [LANES],
  input  coef_t         in_c1 [LANES],
  input  logic [KW-1:0] in_kp,
  output logic          out_valid,
  output coef_t         out_c [LANES]
);
  localparam int unsigned SH = $clog2(INTERP);
  localparam int unsigned PW = COEF_W + KW + 2;

  function automatic logic signed [COEF_W-1:0] lerp(
      logic signed [COEF_W-1:0] a, logic signed [COEF_W-1:0] b, logic [KW-1:0] wa);
    logic signed [PW-1:0] wa_s, wb_s, sum;
    wa_s = PW'(wa);
    wb_s = PW'(INTERP) - wa_s;
    sum  = wa_s * PW'(a) + wb_s * PW'(b);
    return COEF_W'(sum >>> SH);
  endfunction

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    for (int m = 0; m < int'(LANES); m++) begin
      out_c[m].re <= lerp(in_c0[m].re, in_c1[m].re, in_kp);
      out_c[m].im <= lerp(in_c0[m].im, in_c1[m].im, in_kp);
    end
  end

endmodule
