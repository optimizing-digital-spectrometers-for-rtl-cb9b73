// comca_core_tb -- self-checking test of one COMCA core (plain and conjugating
// variant, M = 8, 16 addresses, I = 2). Random coefficients are written, random
// bins are streamed back to back, and every output is compared with
// sum_m a_m * c'_m computed in the testbench (c' interpolated from the stored
// points by the source's formulas, a conjugated for the mirrored variant,
// rounded from Q2.14 and saturated to 32 bits). The latency of 4 clocks and the
// rate of one channel per clock are checked; a full-scale block forces
// saturation.
module comca_core_tb;
  import comca_pkg::*;
  localparam int LANES = 8, DEPTH = 16, I = 2, ENT = DEPTH / I + 1, LAT = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_out = 0, n_sat = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  logic in_valid = 0;
  logic [3:0] in_addr = '0;
  logic [15:0] in_tag = '0;
  bin_t in_bins [LANES];
  logic wr_en = 0;
  logic [3:0] wr_entry = '0;
  logic [2:0] wr_lane = '0;
  coef_t wr_coef = '0;
  logic ov [2];
  logic [15:0] ot [2];
  obin_t ob [2];
  coef_t stored [ENT][LANES];

  comca_core #(.LANES(LANES), .DEPTH(DEPTH), .INTERP(I), .CONJ(1'b0), .TW(16)) dut0 (
    .clk, .rst_n, .in_valid, .in_addr, .in_tag, .in_bins, .wr_en, .wr_entry,
    .wr_lane, .wr_coef, .out_valid(ov[0]), .out_tag(ot[0]), .out_bin(ob[0]));
  comca_core #(.LANES(LANES), .DEPTH(DEPTH), .INTERP(I), .CONJ(1'b1), .TW(16)) dut1 (
    .clk, .rst_n, .in_valid, .in_addr, .in_tag, .in_bins, .wr_en, .wr_entry,
    .wr_lane, .wr_coef, .out_valid(ov[1]), .out_tag(ot[1]), .out_bin(ob[1]));

  typedef struct { longint re; longint im; int cyc; int tag; } exp_t;
  exp_t q [2][$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic exp_t expect_out(int t, bit conj);
    int k0, k1, kp;
    longint sre, sim, cre, cim, are, aim;
    exp_t e;
    comca_ref_pkg::interp_idx(t, I, k0, k1, kp);
    sre = 0; sim = 0;
    for (int m = 0; m < LANES; m++) begin
      cre = comca_ref_pkg::lerp(stored[k0 / I][m].re, stored[k1 / I][m].re, kp, I);
      cim = comca_ref_pkg::lerp(stored[k0 / I][m].im, stored[k1 / I][m].im, kp, I);
      are = in_bins[m].re;
      aim = conj ? -longint'(in_bins[m].im) : longint'(in_bins[m].im);
      sre += are * cre - aim * cim;
      sim += are * cim + aim * cre;
    end
    e.re = comca_ref_pkg::round_sat32(sre);
    e.im = comca_ref_pkg::round_sat32(sim);
    if (e.re != comca_ref_pkg::floor_div(sre + 8192, 16384) ||
        e.im != comca_ref_pkg::floor_div(sim + 8192, 16384)) n_sat++;
    e.tag = t;
    return e;
  endfunction

  always @(posedge clk) begin
    for (int d = 0; d < 2; d++) begin
      if (ov[d]) begin
        exp_t e;
        n_out++;
        if (q[d].size() == 0) begin
          check(0, "output without input");
        end else begin
          e = q[d].pop_front();
          check(cycle - e.cyc == LAT, $sformatf("latency %0d", cycle - e.cyc));
          check(int'(ot[d]) == e.tag, "tag carried through");
          check(longint'(ob[d].re) == e.re && longint'(ob[d].im) == e.im,
                $sformatf("core%0d t=%0d got %0d,%0d exp %0d,%0d", d, e.tag,
                          ob[d].re, ob[d].im, e.re, e.im));
        end
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (in_bins[m]) in_bins[m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (stored[e, m]) begin
      stored[e][m] = comca_ref_pkg::rand_coef();
      if (e == 0) stored[e][m] = '{re: 16'sh7fff, im: -16'sh8000};  // extreme point
      @(negedge clk);
      wr_en = 1; wr_entry = 4'(e); wr_lane = 3'(m); wr_coef = stored[e][m];
    end
    @(negedge clk); wr_en = 0;
    for (int rep = 0; rep < 4; rep++) begin
      for (int t = 0; t < DEPTH; t++) begin
        @(negedge clk);
        in_valid = 1; in_addr = 4'(t); in_tag = 16'(t);
        foreach (in_bins[m]) begin
          in_bins[m] = comca_ref_pkg::rand_bin(rep == 3 ? 28 : 20);
          if (rep == 3 && t < 4) begin
            in_bins[m].re = 28'sh7ffffff;
            in_bins[m].im = (t % 2) ? 28'sh7ffffff : -28'sh7ffffff;
          end
        end
        q[0].push_back(expect_out(t, 1'b0));
        q[1].push_back(expect_out(t, 1'b1));
        q[0][$].cyc = cycle + 1;
        q[1][$].cyc = cycle + 1;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    check(n_out == 2 * 4 * DEPTH, $sformatf("%0d outputs", n_out));
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
