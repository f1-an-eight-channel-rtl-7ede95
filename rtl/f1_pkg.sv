// f1_pkg: constants and types shared by the eight-channel TDC.
// Widths follow the block diagram of the chip: 19 delay taps, 38 bins per
// coarse tick, 17-bit current/reference time, 16-bit relative hit time,
// 11-bit trigger time, 6-bit trigger counter, 17-bit readout-buffer words and
// 24-bit interface words. The register map and the word formats are this
// design's own choice; the chip's actual map is not published.
package f1_pkg;
  localparam int unsigned NCH       = 8;   // time measurement channels
  localparam int unsigned NTAPS     = 19;  // delay elements in the ring
  localparam int unsigned FINE_BINS = 38;  // bins per coarse-counter tick
  localparam int unsigned CUR_W     = 17;  // current / reference time width
  localparam int unsigned TIME_W    = 16;  // relative (hit) time width
  localparam int unsigned TRIG_W    = 11;  // trigger time width (LSB = 32 bins)
  localparam int unsigned EVT_W     = 6;   // trigger counter width
  localparam int unsigned RO_W      = 17;  // readout buffer word
  localparam int unsigned IF_W      = 24;  // interface FIFO word

  typedef enum logic [1:0] {
    MODE_STD   = 2'd0,  // 8 channels, 1 LSB
    MODE_HIRES = 2'd1,  // 4 channel pairs, 1/2 LSB
    MODE_LATCH = 2'd2   // 32 wires, 4 per channel
  } mode_e;

  // Command broadcast from the trigger unit to every matching unit.
  typedef struct packed {
    logic              fake;   // internal clean-up trigger, no data copied
    logic [EVT_W-1:0]  evt;    // trigger counter value of this trigger
    logic [TIME_W-1:0] start;  // window start in hit-time units
    logic [TIME_W-1:0] limit;  // hit - start >= limit: hit older than start
  } trig_cmd_t;

  // Readout buffer word: hit time, or end-of-event marker carrying evt.
  typedef struct packed {
    logic              marker;
    logic [TIME_W-1:0] data;
  } ro_word_t;

  // Setup register addresses (4-bit register field of the setup frame).
  localparam logic [3:0] REG_CTRL     = 4'd0;  // [1:0] mode, [2] 8-bit readout,
                                               // [3] leading, [4] trailing edges,
                                               // [5] fake triggers enabled
  localparam logic [3:0] REG_OFFSET   = 4'd1;  // trigger latency, hit LSBs
  localparam logic [3:0] REG_WINDOW   = 4'd2;  // trigger window, hit-time units
  localparam logic [3:0] REG_FAKE     = 4'd3;  // fake trigger interval, clk cycles
  localparam logic [3:0] REG_STROBE   = 4'd4;  // [5:0] latch strobe length - 1
  localparam logic [3:0] REG_DELAY    = 4'd5;  // [5:0] sub-LSB input delay step
  localparam logic [3:0] REG_SKEW     = 4'd6;  // [3:0] HOTLink bus clock skew
  localparam logic [3:0] REG_DAC0     = 4'd8;  // 8..11: two DAC bytes each
  localparam logic [3:0] REG_DAC_LOAD = 4'd12; // any write starts a DAC download
endpackage
