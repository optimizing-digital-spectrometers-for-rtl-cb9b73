// coef_loader_tb -- self-checking test of the coefficient loader: streams
// bytes over the 8-bit bus and checks every resulting write (core, entry,
// lane, value and its timing), the pointer reset and the full flag.
module coef_loader_tb;
  import comca_pkg::*;
  localparam int CORES = 3, ENTRIES = 5, LANES = 2;
  localparam int WORDS = CORES * ENTRIES * LANES;

  logic clk = 0, rst_n = 0;
  logic [7:0] bus_data = '0;
  logic bus_ready = 0, bus_reset = 0;
  logic wr_en, full;
  logic [1:0] wr_core;
  logic [2:0] wr_entry;
  logic [0:0] wr_lane;
  coef_t wr_coef;
  int checks = 0, failures = 0;
  coef_t words [WORDS];
  int nwr = 0;

  always #5 clk = ~clk;

  coef_loader #(.CORES(CORES), .ENTRIES(ENTRIES), .LANES(LANES)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic send_byte(logic [7:0] b);
    @(negedge clk);
    bus_data = b; bus_ready = 1;
    @(negedge clk);
    bus_ready = 0;
  endtask

  // byte order: re low, re high, im low, im high
  task automatic send_word(coef_t c);
    send_byte(c.re[7:0]);
    send_byte(c.re[15:8]);
    send_byte(c.im[7:0]);
    @(negedge clk);
    bus_data = c.im[15:8]; bus_ready = 1;
    @(posedge clk); #1;
    bus_ready = 0;
    check(wr_en == 1'b1, "write one clock after last byte");
  endtask

  // monitor: every write must be the next expected word
  always @(posedge clk) begin
    if (rst_n && wr_en) begin
      int w;
      w = (int'(wr_core) * ENTRIES + int'(wr_entry)) * LANES + int'(wr_lane);
      check(w == nwr, $sformatf("write %0d went to word %0d", nwr, w));
      check(wr_coef == words[nwr % WORDS], $sformatf("value of word %0d", nwr));
      nwr++;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (words[i]) begin
      words[i].re = 16'($urandom);
      words[i].im = 16'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // first three words, then a pointer reset and the whole memory
    for (int i = 0; i < 3; i++) send_word(words[i]);
    repeat (2) @(posedge clk); #1;
    check(nwr == 3, "three writes before the reset");
    // half a word then reset: the partial word must be dropped
    send_byte(8'hAA);
    @(negedge clk); bus_reset = 1; @(negedge clk); bus_reset = 0;
    nwr = 0;
    for (int i = 0; i < WORDS; i++) begin
      check(full == 1'b0, "not full before the last word");
      send_word(words[i]);
    end
    repeat (2) @(posedge clk); #1;
    check(full == 1'b1, "full after the last word");
    check(nwr == WORDS, "all words written");
    // further bytes are ignored
    for (int i = 0; i < 8; i++) send_byte(8'h55);
    repeat (3) @(posedge clk);
    check(nwr == WORDS, "no write after full");
    // reset clears full and restarts at word 0
    @(negedge clk); bus_reset = 1; @(negedge clk); bus_reset = 0;
    check(full == 1'b0, "reset clears full");
    nwr = 0;
    send_word(words[0]);
    repeat (2) @(posedge clk); #1;
    check(nwr == 1, "write after reset goes to word 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
