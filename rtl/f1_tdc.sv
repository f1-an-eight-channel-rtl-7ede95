// f1_tdc: the eight-channel time-to-digital converter, digital part.
// Every channel latches the 19 taps of a PLL-stabilised ring oscillator at a
// hit edge; with the coarse counter this gives a 16-bit time stamp relative
// to the reference time (channel_input). Stamps wait in a 16-word hit buffer
// per channel. Triggers are stamped the same way, corrected by the latency
// and queued (trigger_unit); for each one, the eight trigger matching units
// search their hit buffers in parallel and copy the hits inside the trigger
// window to their 8-word readout buffers. The interface FIFO gathers the
// eight buffers into 24-bit words with chip ID and channel, and the I/O
// interface sends them under a circulating token, 24 or 8 bits wide. A serial
// setup port fills the registers and the eight DAC threshold bytes, which the
// DAC interface sends to an AD8842.
// Modes (setup register 0): standard (8 channels), high resolution (4 pairs,
// half-bin time, alternate storage in both buffers of a pair, two matching
// units per pair) and latch (32 wires, 4 per channel).
// Outside this RTL: the ring oscillator and PLL, the input receivers and
// delay line, the bus clock skew. Their signals are ports: the latched taps
// come in already synchronised to clk, the coarse-counter clock, one pulse
// per edge; the delay and skew settings go out.
// Everything runs on clk; the separate setup and bus clocks of the chip are
// replaced by the sample enable and by clk. The chip address doubles as the
// TDC ID of the output words.
module f1_tdc
  import f1_pkg::*;
#(
  parameter int unsigned HIT_DEPTH  = 16,
  parameter int unsigned RO_DEPTH   = 8,
  parameter int unsigned IF_DEPTH   = 16,
  parameter int unsigned TRIG_DEPTH = 4,
  parameter int unsigned DAC_HALF   = 4,
  parameter int unsigned MARGIN     = 4096  // hit-time units a hit may follow its trigger
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // hits: per channel one pulse per edge with the latched taps
  input  logic [NCH-1:0]                hit_stb,
  input  logic [NCH-1:0]                hit_edge,    // 1 = leading
  input  logic [NCH-1:0][NTAPS-1:0]     hit_taps,
  input  logic [4*NCH-1:0]              latch_in,    // latch mode wires
  // trigger and time reference
  input  logic                          trig_stb,
  input  logic [NTAPS-1:0]              trig_taps,
  input  logic                          synch_reset,
  input  logic                          common_stb,
  input  logic [NTAPS-1:0]              common_taps,
  // setup
  input  logic                          setup_sample_en,
  input  logic                          setup_in,
  input  logic [2:0]                    chip_addr,
  // readout bus
  input  logic                          token_in,
  output logic                          token_out,
  output logic [IF_W-1:0]               data_out,
  output logic                          bus_we,
  output logic                          data_ready,
  // DAC
  output logic                          dac_sdi,
  output logic                          dac_clk,
  output logic                          dac_ld,
  // settings for the analog parts, and status
  output logic [5:0]                    input_delay,
  output logic [3:0]                    bus_skew,
  output logic [EVT_W-1:0]              trig_count,
  output logic [7:0]                    trig_lost,
  output logic [NCH-1:0][7:0]           hits_lost,
  output logic                          setup_err
);
  localparam int unsigned HAW = $clog2(HIT_DEPTH);

  logic [15:0]       regs [16];
  logic              wr_stb;
  logic [3:0]        wr_addr;
  logic [15:0]       wr_data;
  mode_e             mode;
  logic [CUR_W-1:0]  base, ref_time;
  logic              cmd_valid;
  trig_cmd_t         cmd;
  logic [NCH-1:0]    idle;
  logic              ro_empty [NCH];
  ro_word_t          ro_rdata [NCH];
  logic              ro_rd    [NCH];
  logic              if_rd, if_empty;
  logic [IF_W-1:0]   if_rdata;
  logic [7:0]        dac_val [8];
  logic              dac_busy;

  assign mode        = mode_e'(regs[REG_CTRL][1:0]);
  assign input_delay = regs[REG_DELAY][5:0];
  assign bus_skew    = regs[REG_SKEW][3:0];

  setup_interface u_setup (
    .clk, .rst_n, .sample_en(setup_sample_en), .sdi(setup_in), .chip_addr,
    .regs, .wr_stb, .wr_addr, .wr_data, .frame_err(setup_err)
  );

  dac_interface #(.HALF(DAC_HALF)) u_dac (
    .clk, .rst_n, .wr_stb, .wr_addr, .wr_data, .dac_val,
    .dac_sdi, .dac_clk, .dac_ld, .busy(dac_busy)
  );

  time_base u_time (
    .clk, .rst_n, .synch_reset, .common_stb, .common_taps, .base, .ref_time
  );

  trigger_unit #(.FIFO_DEPTH(TRIG_DEPTH), .MARGIN(MARGIN)) u_trig (
    .clk, .rst_n, .mode, .base, .ref_time, .trig_stb, .trig_taps,
    .offset(regs[REG_OFFSET]), .fake_en(regs[REG_CTRL][5]),
    .fake_interval(regs[REG_FAKE]), .all_idle(&idle),
    .cmd_valid, .cmd, .trig_count, .lost(trig_lost)
  );

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic              hb_wr, ssp_load, hb_full, ro_wr, ro_full;
    logic [TIME_W-1:0] hb_wdata, hb_rdata;
    logic [HAW:0]      rd_ptr, wp, ssp, ssp_next;
    ro_word_t          ro_wdata;
    logic [$clog2(RO_DEPTH):0] ro_events;

    channel_input #(.IS_ODD(c % 2 == 1)) u_in (
      .clk, .rst_n, .mode, .edge_en(regs[REG_CTRL][4:3]),
      .strobe_len(regs[REG_STROBE][5:0]), .base, .ref_time,
      .hit_stb(hit_stb[c]), .hit_edge(hit_edge[c]), .hit_taps(hit_taps[c]),
      .pair_stb(hit_stb[c ^ 1]), .pair_taps(hit_taps[c ^ 1]),
      .wires(latch_in[4*c +: 4]), .wr_en(hb_wr), .wr_data(hb_wdata)
    );

    hit_buffer #(.DEPTH(HIT_DEPTH)) u_hb (
      .clk, .rst_n, .wr_en(hb_wr), .wr_data(hb_wdata), .rd_ptr,
      .rd_data(hb_rdata), .ssp_load, .ssp_next, .wp, .ssp, .full(hb_full),
      .lost(hits_lost[c])
    );

    trigger_matching #(.AW(HAW)) u_match (
      .clk, .rst_n, .latch_mode(mode == MODE_LATCH),
      .window(regs[REG_WINDOW]), .start(cmd_valid), .cmd, .idle(idle[c]),
      .rd_ptr, .rd_data(hb_rdata), .wp, .ssp, .ssp_load, .ssp_next,
      .ro_wr, .ro_data(ro_wdata), .ro_full
    );

    readout_buffer #(.DEPTH(RO_DEPTH)) u_ro (
      .clk, .rst_n, .wr(ro_wr), .wdata(ro_wdata), .full(ro_full),
      .rd(ro_rd[c]), .rdata(ro_rdata[c]), .empty(ro_empty[c]),
      .events(ro_events)
    );
  end

  interface_fifo #(.DEPTH(IF_DEPTH)) u_if (
    .clk, .rst_n, .tdc_id(chip_addr), .ro_empty, .ro_rdata, .ro_rd,
    .rd(if_rd), .rdata(if_rdata), .empty(if_empty), .data_ready
  );

  io_interface u_io (
    .clk, .rst_n, .mode8(regs[REG_CTRL][2]), .token_in, .token_out,
    .data_ready, .empty(if_empty), .rdata(if_rdata), .rd(if_rd),
    .data_out, .bus_we
  );
endmodule
