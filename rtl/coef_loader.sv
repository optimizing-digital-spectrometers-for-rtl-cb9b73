// coef_loader -- writes calibration coefficients from an 8-bit host register
// into the coefficient memories of all COMCA cores.
//
// Function (follows the source): the host writes coefficient bytes into an
// 8-bit register. Inside the FPGA the register drives an 8-bit data bus with a
// "data ready" strobe and a "reset" strobe. Each data-ready stores the byte at
// the memory's current pointer position and advances the pointer; reset moves
// the pointer back to the start of the memory.
//
// How it works: the pointer is kept as nested counters (byte within word,
// ADC-core lane m, coefficient entry, COMCA core), so no division is needed.
// Bytes are gathered into one complex coefficient; when its last byte
// arrives a one-cycle write is issued to core wr_core, entry wr_entry, lane
// wr_lane. Bytes beyond the last coefficient are ignored and `full` is held.
// The source gives the bus but not the layout of the stream; this design's
// layout is: word order core, entry, lane (lane fastest); byte order within a
// word re[7:0], re[15:8], im[7:0], im[15:8] (little-endian, real part first).
//
// Timing: wr_en rises one clock after the data_ready of the last byte of a
// coefficient. rst_n is an active-low synchronous reset.
module coef_loader
  import comca_pkg::*;
#(
  parameter int unsigned CORES   = 16,   // M*P COMCA cores
  parameter int unsigned ENTRIES = 257,  // stored coefficient entries per core and lane
  parameter int unsigned LANES   = 8     // M ADC cores
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  bus_data,
  input  logic        bus_ready,   // "data ready": bus_data holds a new byte
  input  logic        bus_reset,   // "reset": pointer back to the start
  output logic        wr_en,
  output logic [clog2_min1(CORES)-1:0]   wr_core,
  output logic [clog2_min1(ENTRIES)-1:0] wr_entry,
  output logic [clog2_min1(LANES)-1:0]   wr_lane,
  output coef_t       wr_coef,
  output logic        full         // every coefficient has been written
);
  localparam int unsigned NBYTES = $bits(coef_t) / 8;
  localparam int unsigned BW = clog2_min1(NBYTES);

  logic [BW-1:0]                    byte_cnt;
  logic [clog2_min1(LANES)-1:0]     lane_cnt;
  logic [clog2_min1(ENTRIES)-1:0]   entry_cnt;
  logic [clog2_min1(CORES)-1:0]     core_cnt;
  logic [$bits(coef_t)-1:0]         shreg;
  logic [$bits(coef_t)-1:0]         word_next;

  // Place the new byte into its slot of the word being gathered. The struct is
  // {re, im}: byte 0 is re[7:0], so it lands at bit offset COEF_W.
  always_comb begin
    word_next = shreg;
    for (int b = 0; b < int'(NBYTES); b++) begin
      if (int'(byte_cnt) == b) begin
        if (b < int'(NBYTES/2))
          word_next[COEF_W + 8*b +: 8] = bus_data;
        else
          word_next[8*(b - int'(NBYTES/2)) +: 8] = bus_data;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      byte_cnt  <= '0;
      lane_cnt  <= '0;
      entry_cnt <= '0;
      core_cnt  <= '0;
      shreg     <= '0;
      full      <= 1'b0;
      wr_en     <= 1'b0;
      wr_core   <= '0;
      wr_entry  <= '0;
      wr_lane   <= '0;
      wr_coef   <= '0;
    end else begin
      wr_en <= 1'b0;
      if (bus_reset) begin
        byte_cnt  <= '0;
        lane_cnt  <= '0;
        entry_cnt <= '0;
        core_cnt  <= '0;
        full      <= 1'b0;
      end else if (bus_ready && !full) begin
        shreg <= word_next;
        if (int'(byte_cnt) == int'(NBYTES) - 1) begin
          byte_cnt <= '0;
          wr_en    <= 1'b1;
          wr_core  <= core_cnt;
          wr_entry <= entry_cnt;
          wr_lane  <= lane_cnt;
          wr_coef  <= coef_t'(word_next);
          if (int'(lane_cnt) == int'(LANES) - 1) begin
            lane_cnt <= '0;
            if (int'(entry_cnt) == int'(ENTRIES) - 1) begin
              entry_cnt <= '0;
              if (int'(core_cnt) == int'(CORES) - 1) begin
                core_cnt <= '0;
                full     <= 1'b1;
              end else begin
                core_cnt <= core_cnt + 1'b1;
              end
            end else begin
              entry_cnt <= entry_cnt + 1'b1;
            end
          end else begin
            lane_cnt <= lane_cnt + 1'b1;
          end
        end else begin
          byte_cnt <= byte_cnt + 1'b1;
        end
      end
    end
  end

endmodule
