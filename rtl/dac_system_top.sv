// dac_system_top: programmable-logic part of a 16-channel, +/-50 V DAC
// system for moving trapped ions.
//
// Structure (as published): one output lane per AD3542R two-channel DAC,
// NUM_DAC = 8 lanes for 16 analog channels, plus one more lane whose
// waveform drives general-purpose outputs. Each lane is a block RAM (the
// wave pattern storage) read by its own waveform sequencer (mawg); a DAC
// lane feeds the sequencer's samples to a dual SPI master that writes the
// DAC. The DAC board (DACs and x10.2 amplifiers) and the processor that
// loads the memories are outside this module.
//
// This design's own choices: lane NUM_DAC is the GPIO lane and its latest
// sample is held on gpio_out. One shared update timer gives all sequencers
// the same sample strobe, one strobe every update_period clock cycles
// (values below 3 count as 3), so all channels move in step. Samples carry
// {channel 1 code, channel 0 code}. If a new sample arrives while the SPI
// master of that lane is still sending the previous one, the sample is
// dropped and the lane's sticky overrun flag is set (cleared by
// overrun_clr); update_period must cover a whole SPI frame (43 cycles for
// 16-bit codes, 35 for 12-bit codes at the default SPI timing) to avoid it.
// res12 selects 12-bit DAC frames for all lanes.
//
// Processor side: two shared write buses load the memories of the lane
// selected by *_lane: bram_* writes one wave sample, chunk_* writes one
// chunk table entry {chunk_repetition, chunk_length, chunk_offset}. Each
// lane has its own kick, force_stop, repetition and ctrl_length inputs and
// busy output; kicking several lanes in the same cycle starts them together.
// rst_n is active low and synchronous.
module dac_system_top #(
  parameter int unsigned NUM_DAC     = dac_pkg::NUM_DAC,
  parameter int unsigned DAC_BITS    = dac_pkg::DAC_BITS,
  parameter int unsigned WAVE_DEPTH  = dac_pkg::WAVE_DEPTH,
  parameter int unsigned CTRL_DEPTH  = dac_pkg::CTRL_DEPTH,
  parameter int unsigned REP_W       = dac_pkg::REP_W,
  parameter int unsigned CHUNK_REP_W = dac_pkg::CHUNK_REP_W,
  parameter int unsigned PERIOD_W    = dac_pkg::PERIOD_W,
  localparam int unsigned WAVE_W     = 2 * DAC_BITS,
  localparam int unsigned ENTRY_W    = CHUNK_REP_W + 2 * WAVE_DEPTH,
  localparam int unsigned NL         = NUM_DAC + 1,           // lanes incl. GPIO
  localparam int unsigned LANE_W     = $clog2(NL)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // wave pattern memory load
  input  logic                             bram_we,
  input  logic [LANE_W-1:0]                bram_lane,
  input  logic [WAVE_DEPTH-1:0]            bram_addr,
  input  logic [WAVE_W-1:0]                bram_data,
  // chunk table load
  input  logic                             chunk_we,
  input  logic [LANE_W-1:0]                chunk_lane,
  input  logic [CTRL_DEPTH-1:0]            chunk_addr,
  input  logic [ENTRY_W-1:0]               chunk_data,
  // per-lane run control
  input  logic [NL-1:0]                    kick,
  input  logic [NL-1:0]                    force_stop,
  input  logic [NL-1:0][REP_W-1:0]         repetition,
  input  logic [NL-1:0][CTRL_DEPTH:0]      ctrl_length,
  output logic [NL-1:0]                    busy,
  // output timing and format
  input  logic [PERIOD_W-1:0]              update_period,
  input  logic                             res12,
  // DAC dual SPI links
  output logic [NUM_DAC-1:0]               dac_cs_n,
  output logic [NUM_DAC-1:0]               dac_sclk,
  output logic [NUM_DAC-1:0][1:0]          dac_sdio,
  // general-purpose outputs
  output logic [WAVE_W-1:0]                gpio_out,
  // status
  output logic [NUM_DAC-1:0]               overrun,
  input  logic                             overrun_clr
);

  // ---------------------------------------------------------------- timer
  logic [PERIOD_W-1:0] tcnt;
  logic [PERIOD_W-1:0] period_m1;
  logic                tick;

  always_comb begin
    period_m1 = (update_period < PERIOD_W'(3)) ? PERIOD_W'(2) : update_period - 1'b1;
    tick      = (tcnt >= period_m1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || tick) tcnt <= '0;
    else                tcnt <= tcnt + 1'b1;
  end

  // ---------------------------------------------------------------- lanes
  logic [NL-1:0][WAVE_DEPTH-1:0] wave_addr;
  logic [NL-1:0][WAVE_W-1:0]     wave_data;
  logic [NL-1:0]                 wave_valid;
  logic [NL-1:0][WAVE_W-1:0]     wave_out;

  for (genvar l = 0; l < NL; l++) begin : g_lane
    wave_pattern_storage #(
      .ADDR_W(WAVE_DEPTH),
      .DATA_W(WAVE_W)
    ) bram_i (
      .clk    (clk),
      .wr_en  (bram_we && (bram_lane == LANE_W'(l))),
      .wr_addr(bram_addr),
      .wr_data(bram_data),
      .rd_addr(wave_addr[l]),
      .rd_data(wave_data[l])
    );

    mawg #(
      .WAVE_DEPTH (WAVE_DEPTH),
      .WAVE_W     (WAVE_W),
      .CTRL_DEPTH (CTRL_DEPTH),
      .REP_W      (REP_W),
      .CHUNK_REP_W(CHUNK_REP_W)
    ) seq_i (
      .clk        (clk),
      .rst_n      (rst_n),
      .kick       (kick[l]),
      .busy       (busy[l]),
      .force_stop (force_stop[l]),
      .repetition (repetition[l]),
      .ctrl_length(ctrl_length[l]),
      .tick       (tick),
      .wave_addr  (wave_addr[l]),
      .wave_data  (wave_data[l]),
      .ctrl_addr  (chunk_addr),
      .ctrl_data  (chunk_data),
      .ctrl_we    (chunk_we && (chunk_lane == LANE_W'(l))),
      .wave_valid (wave_valid[l]),
      .wave_out   (wave_out[l])
    );
  end

  // ------------------------------------------------------------ DAC links
  for (genvar d = 0; d < NUM_DAC; d++) begin : g_dac
    logic spi_ready;
    logic spi_done;

    dual_spi_master #(
      .DAC_BITS(DAC_BITS)
    ) spi_i (
      .clk     (clk),
      .rst_n   (rst_n),
      .start   (wave_valid[d]),
      .res12   (res12),
      .ch0_code(wave_out[d][DAC_BITS-1:0]),
      .ch1_code(wave_out[d][WAVE_W-1:DAC_BITS]),
      .ready   (spi_ready),
      .done    (spi_done),
      .cs_n    (dac_cs_n[d]),
      .sclk    (dac_sclk[d]),
      .sdio    (dac_sdio[d])
    );

    always_ff @(posedge clk) begin
      if (!rst_n || overrun_clr)            overrun[d] <= 1'b0;
      else if (wave_valid[d] && !spi_ready) overrun[d] <= 1'b1;
    end

    // spi_done only marks frame ends; nothing in the top waits for it.
    logic unused_done;
    assign unused_done = spi_done;
  end

  // ----------------------------------------------------------------- GPIO
  always_ff @(posedge clk) begin
    if (!rst_n)               gpio_out <= '0;
    else if (wave_valid[NUM_DAC]) gpio_out <= wave_out[NUM_DAC];
  end

endmodule
