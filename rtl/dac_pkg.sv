// dac_pkg: sizes and state types shared by the waveform sequencer, its
// memories, the dual SPI master and the system top.
//
// The sequencer description (kick/busy/force_stop handshake, chunk table with
// chunk_repetition, chunk_length and chunk_offset fields, ctrl_length and
// repetition) follows the published architecture. The 16-bit width of
// chunk_repetition, the 16 analog channels on 8 two-channel DACs and the
// 16/12-bit resolution are published numbers. Every other size below
// (memory depths, the width of the sequence repetition counter) is a
// choice of this design, picked to fit comfortably in a Zynq-7020.
package dac_pkg;

  // Number of two-channel DACs (16 analog channels in total).
  localparam int unsigned NUM_DAC      = 8;
  // DAC resolution in bits (the DAC can also run at 12 bits, see res12).
  localparam int unsigned DAC_BITS     = 16;
  // One wave sample carries one code for each of the two DAC channels.
  localparam int unsigned WAVE_W       = 2 * DAC_BITS;
  // Address width of the wave pattern memory (WAVE_DEPTH in the chunk entry).
  localparam int unsigned WAVE_DEPTH   = 12;
  // Address width of the chunk table.
  localparam int unsigned CTRL_DEPTH   = 8;
  // Width of the per-chunk repetition count.
  localparam int unsigned CHUNK_REP_W  = 16;
  // Width of the sequence repetition count.
  localparam int unsigned REP_W        = 16;
  // Width of the update period register of the system top.
  localparam int unsigned PERIOD_W     = 16;

  // Sequencer controller states.
  typedef enum logic [1:0] {
    SEQ_IDLE,    // waiting for kick
    SEQ_CHECK,   // look at the current chunk entry, skip empty ones
    SEQ_RUN,     // emit one sample per update tick
    SEQ_FINISH   // last sample issued, let the read pipeline drain
  } seq_state_e;

  // Dual SPI master states.
  typedef enum logic [1:0] {
    SPI_IDLE,    // chip select high, waiting for a sample
    SPI_XFER,    // chip select low, shifting two bits per SCLK period
    SPI_GAP      // chip select high for the minimum deselect time
  } spi_state_e;

endpackage
