// channel_map_tb -- self-checking test of the flip-and-shift channel mapping.
// Small case N = 32, N' = 8, M = 4 against the source's reordering table
// (rows k' and "flipped and shifted", copied below; -1 marks a channel that
// cannot be reconstructed). Default case M = 8, N' = 4096 against the inverse
// mapping k -> (block, k') for every output channel.
module channel_map_tb;
  import comca_pkg::*;
  localparam int T_KPRIME [16] = '{0,1,2,3,-1,3,2,1,0,1,2,3,-1,3,2,1};
  localparam int T_FS     [16] = '{0,1,2,3,0,3,2,1,0,1,2,3,0,3,2,1};

  int checks = 0, failures = 0;
  logic [1:0] b_s; logic [1:0] kp_s; logic [3:0] ch_s; logic ok_s;
  logic [2:0] b_l; logic [10:0] kp_l; logic [13:0] ch_l; logic ok_l;

  channel_map #(.BLOCKS(4), .NPRIME(8)) dut_s (
    .block(b_s), .kprime(kp_s), .chan(ch_s), .chan_ok(ok_s));
  channel_map #(.BLOCKS(8), .NPRIME(4096)) dut_l (
    .block(b_l), .kprime(kp_l), .chan(ch_l), .chan_ok(ok_l));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hits [16];
    foreach (hits[i]) hits[i] = 0;
    for (int b = 0; b < 4; b++)
      for (int k = 0; k < 4; k++) begin
        b_s = 2'(b); kp_s = 2'(k); #1;
        check(int'(ch_s) / 4 == b, $sformatf("block %0d k'=%0d stays in its block", b, k));
        check(T_FS[ch_s] == k, $sformatf("block %0d k'=%0d -> k=%0d matches the table", b, k, ch_s));
        check(ok_s == (T_KPRIME[ch_s] != -1), $sformatf("block %0d k'=%0d validity", b, k));
        if (ok_s) check(T_KPRIME[ch_s] == k, $sformatf("k=%0d holds k'=%0d", ch_s, k));
        hits[ch_s]++;
      end
    foreach (hits[i]) check(hits[i] == 1, $sformatf("slot %0d filled once", i));
    for (int k = 0; k < 16384; k++) begin
      int b, kp;
      bit ok;
      comca_ref_pkg::place(k, 4096, b, kp, ok);
      b_l = 3'(b); kp_l = 11'(kp); #1;
      check(ok_l == ok, $sformatf("default size k=%0d validity", k));
      if (ok) check(int'(ch_l) == k, $sformatf("default size k=%0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
