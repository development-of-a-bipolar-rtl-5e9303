// wave_pattern_storage: the block RAM that holds the wave samples of one
// sequencer.
//
// Simple dual-port memory: the processor writes samples through port A
// (wr_en, wr_addr, wr_data); the sequencer reads through port B. A read
// returns mem[rd_addr] one clock after the address is presented (rd_data is
// registered, as in an FPGA block RAM), every cycle. A sample holds the two
// DAC codes {channel 1, channel 0}. The memory is described as an array and
// is not initialised: software loads the patterns before it starts a
// sequencer. The depth (2**ADDR_W words) is a choice of this design.
module wave_pattern_storage #(
  parameter int unsigned ADDR_W = dac_pkg::WAVE_DEPTH,
  parameter int unsigned DATA_W = dac_pkg::WAVE_W
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [DATA_W-1:0] wr_data,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [DATA_W-1:0] rd_data
);

  logic [DATA_W-1:0] mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    rd_data <= mem[rd_addr];
  end

endmodule
