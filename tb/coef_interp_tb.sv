// coef_interp_tb -- self-checking test of the linear coefficient interpolation
// for I = 4 and I = 1 with random coefficients and every weight K' = 0..I,
// against floor((K'*c0 + (I-K')*c1)/I) computed in the testbench, including
// the one-clock latency.
module coef_interp_tb;
  import comca_pkg::*;
  localparam int LANES = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic v_in = 0, v4, v1;
  coef_t c0 [LANES], c1 [LANES], o4 [LANES], o1 [LANES];
  logic [2:0] kp4 = '0;
  logic [0:0] kp1 = '0;

  coef_interp #(.LANES(LANES), .INTERP(4)) dut4 (
    .clk(clk), .in_valid(v_in), .in_c0(c0), .in_c1(c1), .in_kp(kp4),
    .out_valid(v4), .out_c(o4));
  coef_interp #(.LANES(LANES), .INTERP(1)) dut1 (
    .clk(clk), .in_valid(v_in), .in_c0(c0), .in_c1(c1), .in_kp(kp1),
    .out_valid(v1), .out_c(o1));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      foreach (c0[m]) begin
        c0[m] = comca_ref_pkg::rand_coef();
        c1[m] = comca_ref_pkg::rand_coef();
      end
      kp4 = 3'(it % 5);
      kp1 = 1'(it % 2);
      v_in = 1'b1;
      @(posedge clk); #1;
      check(v4 && v1, "valid follows by one clock");
      for (int m = 0; m < LANES; m++) begin
        check(longint'(o4[m].re) == comca_ref_pkg::lerp(c0[m].re, c1[m].re, int'(kp4), 4),
              $sformatf("I=4 re it=%0d", it));
        check(longint'(o4[m].im) == comca_ref_pkg::lerp(c0[m].im, c1[m].im, int'(kp4), 4),
              $sformatf("I=4 im it=%0d", it));
        check(o1[m] == (kp1 ? c0[m] : c1[m]), $sformatf("I=1 it=%0d", it));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
