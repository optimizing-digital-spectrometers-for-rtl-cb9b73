// fix2float_tb -- self-checking test of the integer to IEEE-754 single
// conversion (round toward zero). Expected words are built from the double
// precision bits of the same value (exact below 2^53): sign, exponent rebiased
// from 1023 to 127, the top 23 of the 52 mantissa bits. Also checks zero, the
// most negative 64-bit value and the one-clock latency.
module fix2float_tb;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic iv = 0, ov;
  logic signed [63:0] x = '0;
  logic [31:0] y;

  fix2float #(.W(64)) dut (.clk(clk), .in_valid(iv), .in(x), .out_valid(ov), .out(y));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] ref_f(longint v);
    logic [63:0] d;
    if (v == 0) return 32'h0;
    d = $realtobits(real'(v));
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  task automatic one(longint v, logic [31:0] e);
    @(negedge clk);
    x = v; iv = 1;
    @(posedge clk); #1;
    iv = 0;
    check(ov == 1'b1, "valid after one clock");
    check(y == e, $sformatf("%0d -> %h, expected %h", v, y, e));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    one(0, 32'h0000_0000);
    one(1, 32'h3f80_0000);
    one(-1, 32'hbf80_0000);
    one(3, 32'h4040_0000);
    one(-64'sh8000_0000_0000_0000, 32'hdf00_0000);
    one(64'sh7fff_ffff_ffff_ffff, 32'h5eff_ffff);   // truncated, not rounded up
    one(16777217, 32'h4b80_0000);                   // 2^24 + 1 truncates to 2^24
    for (int i = 0; i < 500; i++) begin
      longint v;
      v = longint'({$urandom, $urandom}) >>> ($urandom_range(11, 62));
      one(v, ref_f(v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
