// chunk_storage: the chunk table of the waveform sequencer.
//
// Each entry describes one chunk of the output waveform: where it starts in
// the wave pattern memory (chunk_offset), how many samples it has
// (chunk_length) and how often it is played back to back (chunk_repetition).
// The entry is packed as {chunk_repetition, chunk_length, chunk_offset},
// most significant field first, which is the left-to-right order of the
// published entry layout; the 16-bit repetition field is published, the
// WAVE_DEPTH-bit length and offset fields follow the same layout.
//
// Interface: one synchronous write port (ctrl_we, ctrl_addr, ctrl_data),
// written by the processor, and one asynchronous read port (rd_addr ->
// rd_entry) used by the sequencer controller, as a register file would
// offer. The entries are not reset (this lets the table map onto
// distributed RAM); software writes every entry it uses before a kick.
module chunk_storage #(
  parameter int unsigned CTRL_DEPTH  = dac_pkg::CTRL_DEPTH,
  parameter int unsigned WAVE_DEPTH  = dac_pkg::WAVE_DEPTH,
  parameter int unsigned CHUNK_REP_W = dac_pkg::CHUNK_REP_W,
  localparam int unsigned ENTRY_W    = CHUNK_REP_W + 2 * WAVE_DEPTH
) (
  input  logic                   clk,
  input  logic                   ctrl_we,
  input  logic [CTRL_DEPTH-1:0]  ctrl_addr,
  input  logic [ENTRY_W-1:0]     ctrl_data,
  input  logic [CTRL_DEPTH-1:0]  rd_addr,
  output logic [CHUNK_REP_W-1:0] rd_repetition,
  output logic [WAVE_DEPTH-1:0]  rd_length,
  output logic [WAVE_DEPTH-1:0]  rd_offset
);

  logic [ENTRY_W-1:0] regs [2**CTRL_DEPTH];

  always_ff @(posedge clk) begin
    if (ctrl_we) regs[ctrl_addr] <= ctrl_data;
  end

  always_comb begin
    {rd_repetition, rd_length, rd_offset} = regs[rd_addr];
  end

endmodule
