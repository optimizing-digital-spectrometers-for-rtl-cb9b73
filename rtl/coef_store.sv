// coef_store -- coefficient memory of one COMCA core, split into an even and
// an odd bank so that the two neighbours needed for linear interpolation are
// read in the same clock.
//
// Function (follows the source): with interpolation factor I only every I-th
// coefficient is stored. The stored points are numbered e = 0, 1, 2, ...
// (point e belongs to channel address e*I). Even-numbered points live in one
// BRAM, odd-numbered points in another, which doubles the effective read width.
// For a requested channel address k the core needs the points
//   k0 = 2I*floor(k/2I + 1/2)   (always an even point, nearest multiple of 2I)
//   k1 = 2I*floor(k/2I) + I     (always an odd point)
// and the weight K' = |I - (k mod 2I)|; the weight of k1 is I - K'.
// With I = 1 the same formulas select the exact coefficient (weight I or 0).
// Each bank holds LANES (M) coefficients per point, one per ADC core, written
// lane by lane.
//
// Here "channel address" is the core's local address (the position of the bin
// in the core's input stream, 0..DEPTH-1); interpolating per core over its
// local address, with DEPTH/I + 1 points per core, is this design's own
// choice: the source interpolates over the final channel index.
//
// Timing: one write port (wr_*) and one read port. rd_c0/rd_c1/rd_kp are valid
// one clock after rd_en (registered read, as a BRAM).
module coef_store
  import comca_pkg::*;
#(
  parameter int unsigned LANES  = 8,     // M
  parameter int unsigned DEPTH  = 1024,  // channel addresses served by the core
  parameter int unsigned INTERP = 4,     // I, a power of two
  localparam int unsigned ENTRIES = DEPTH / INTERP + 1,
  localparam int unsigned ODD_D   = ENTRIES / 2,
  localparam int unsigned EVEN_D  = ENTRIES - ODD_D,
  localparam int unsigned AW      = clog2_min1(DEPTH),
  localparam int unsigned EW      = clog2_min1(ENTRIES),
  localparam int unsigned LW      = clog2_min1(LANES),
  localparam int unsigned KW      = $clog2(INTERP) + 1,
  localparam int unsigned XEW     = clog2_min1(EVEN_D),
  localparam int unsigned XOW     = clog2_min1(ODD_D)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [EW-1:0] wr_entry,
  input  logic [LW-1:0] wr_lane,
  input  coef_t         wr_coef,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output coef_t         rd_c0 [LANES],   // coefficient at point k0 (even bank)
  output coef_t         rd_c1 [LANES],   // coefficient at point k1 (odd bank)
  output logic [KW-1:0] rd_kp            // K', the weight of rd_c0
);
  localparam int unsigned SH = $clog2(INTERP) + 1;   // log2(2I)

  logic [XEW-1:0] x0;
  logic [XOW-1:0] x1;
  logic [AW:0]    addr_plus;
  logic [KW-1:0]  kp;
  logic [SH-1:0]  kmod;

  always_comb begin
    addr_plus = {1'b0, rd_addr} + (AW+1)'(INTERP);
    x0   = XEW'(addr_plus >> SH);           // k0 / 2I
    x1   = XOW'(rd_addr >> SH);             // (k1 - I) / 2I
    kmod = rd_addr[SH-1:0];                 // k mod 2I
    kp   = (kmod >= SH'(INTERP)) ? KW'(kmod - SH'(INTERP)) : KW'(SH'(INTERP) - kmod);
  end

  // one even and one odd bank per lane, each a simple dual-port memory
  for (genvar m = 0; m < int'(LANES); m++) begin : g_lane
    coef_t even_mem [EVEN_D];
    coef_t odd_mem  [ODD_D];
    logic  we;

    assign we = wr_en && (wr_lane == LW'(m));

    always_ff @(posedge clk) begin
      if (we && wr_entry[0] == 1'b0) even_mem[XEW'(wr_entry >> 1)] <= wr_coef;
      if (we && wr_entry[0] == 1'b1) odd_mem[XOW'(wr_entry >> 1)]  <= wr_coef;
    end

    always_ff @(posedge clk) begin
      if (rd_en) begin
        rd_c0[m] <= even_mem[x0];
        rd_c1[m] <= odd_mem[x1];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_kp <= kp;
  end

endmodule
