// coef_store_tb -- self-checking test of the even/odd coefficient banks.
// With I = 4 every read is compared with the source's indexing table (k0, k1,
// K' for k = 0..15, copied below); with I = 1 every read must return the exact
// stored coefficient with weight 1 (even k) or 0 (odd k). The read latency of
// one clock is checked as well.
module coef_store_tb;
  import comca_pkg::*;
  localparam int LANES = 2;
  localparam int D4 = 16, I4 = 4, E4 = D4 / I4 + 1;
  localparam int D1 = 8,  I1 = 1, E1 = D1 / I1 + 1;
  // indexing table for I = 4 (k = 0..15)
  localparam int T_K0 [16] = '{0,0,0,0,8,8,8,8,8,8,8,8,16,16,16,16};
  localparam int T_K1 [16] = '{4,4,4,4,4,4,4,4,12,12,12,12,12,12,12,12};
  localparam int T_KP [16] = '{4,3,2,1,0,1,2,3,4,3,2,1,0,1,2,3};

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr4 = 0, rd4 = 0, wr1 = 0, rd1 = 0;
  logic [2:0] we4; logic [3:0] we1;
  logic [0:0] wl4, wl1;
  coef_t wc4, wc1;
  logic [3:0] ra4; logic [2:0] ra1;
  coef_t c0_4 [LANES], c1_4 [LANES], c0_1 [LANES], c1_1 [LANES];
  logic [2:0] kp4; logic [0:0] kp1;
  coef_t mem4 [E4][LANES];
  coef_t mem1 [E1][LANES];

  coef_store #(.LANES(LANES), .DEPTH(D4), .INTERP(I4)) dut4 (
    .clk(clk), .wr_en(wr4), .wr_entry(we4), .wr_lane(wl4), .wr_coef(wc4),
    .rd_en(rd4), .rd_addr(ra4), .rd_c0(c0_4), .rd_c1(c1_4), .rd_kp(kp4));
  coef_store #(.LANES(LANES), .DEPTH(D1), .INTERP(I1)) dut1 (
    .clk(clk), .wr_en(wr1), .wr_entry(we1), .wr_lane(wl1), .wr_coef(wc1),
    .rd_en(rd1), .rd_addr(ra1), .rd_c0(c0_1), .rd_c1(c1_1), .rd_kp(kp1));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (mem4[e, m]) mem4[e][m] = comca_ref_pkg::rand_coef();
    foreach (mem1[e, m]) mem1[e][m] = comca_ref_pkg::rand_coef();
    for (int e = 0; e < E4; e++)
      for (int m = 0; m < LANES; m++) begin
        @(negedge clk);
        wr4 = 1; we4 = 3'(e); wl4 = 1'(m); wc4 = mem4[e][m];
      end
    for (int e = 0; e < E1; e++)
      for (int m = 0; m < LANES; m++) begin
        @(negedge clk);
        wr4 = 0;
        wr1 = 1; we1 = 4'(e); wl1 = 1'(m); wc1 = mem1[e][m];
      end
    @(negedge clk); wr1 = 0;
    for (int k = 0; k < D4; k++) begin
      @(negedge clk); rd4 = 1; ra4 = 4'(k);
      @(negedge clk); rd4 = 0; ra4 = 4'(k + 5);   // address change after the read
      for (int m = 0; m < LANES; m++) begin
        check(c0_4[m] == mem4[T_K0[k] / I4][m], $sformatf("I=4 k=%0d c_k0 lane %0d", k, m));
        check(c1_4[m] == mem4[T_K1[k] / I4][m], $sformatf("I=4 k=%0d c_k1 lane %0d", k, m));
      end
      check(int'(kp4) == T_KP[k], $sformatf("I=4 k=%0d K'=%0d", k, kp4));
    end
    for (int k = 0; k < D1; k++) begin
      @(negedge clk); rd1 = 1; ra1 = 3'(k);
      @(negedge clk); rd1 = 0;
      for (int m = 0; m < LANES; m++)
        check(((k % 2 == 0) ? c0_1[m] : c1_1[m]) == mem1[k][m],
              $sformatf("I=1 k=%0d lane %0d exact", k, m));
      check(int'(kp1) == ((k % 2 == 0) ? 1 : 0), $sformatf("I=1 k=%0d weight", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
