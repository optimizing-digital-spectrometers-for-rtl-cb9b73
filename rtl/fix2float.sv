// fix2float -- converts a signed fixed-point integer to an IEEE-754 single
// precision number.
//
// Function: the source converts the integrated fixed-point sums to floating
// point before the host reads them; it does not say how. This converter finds
// the leading one of |x|, makes it the hidden bit, keeps the next 23 bits as
// the mantissa and truncates the rest (round toward zero, this design's
// choice). Zero maps to +0.0. The input is an integer (binary point below
// bit 0), so the exponent is 127 + position of the leading one.
//
// Only bits W-2..W-24 of the normalised magnitude become the mantissa; the
// hidden bit and the truncated low bits are left unused on purpose, which
// lint reports as unused bits of 'norm'.
//
// Timing: one register stage; out follows in_valid/in by one clock.
module fix2float #(
  parameter int unsigned W = 64    // input width, at least 24
) (
  input  logic                clk,
  input  logic                in_valid,
  input  logic signed [W-1:0] in,
  output logic                out_valid,
  output logic [31:0]         out
);
  localparam int unsigned PW = $clog2(W) + 1;

  logic [W-1:0]  mag;
  logic [W-1:0]  norm;
  logic [PW-1:0] lead;
  logic          nz;
  logic [31:0]   f;

  always_comb begin
    mag  = in[W-1] ? W'(-in) : W'(in);
    lead = '0;
    nz   = 1'b0;
    for (int i = 0; i < int'(W); i++) begin
      if (mag[i]) begin
        lead = PW'(i);
        nz   = 1'b1;
      end
    end
    norm = mag << (PW'(W - 1) - lead);    // leading one now at bit W-1
    if (!nz) begin
      f = 32'h0000_0000;
    end else begin
      f[31]    = in[W-1];
      f[30:23] = 8'(127 + int'(lead));
      f[22:0]  = norm[W-2 -: 23];
    end
  end

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    out       <= f;
  end

endmodule
