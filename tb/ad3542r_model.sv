// ad3542r_model: behavioural model of one AD3542R two-channel DAC as seen
// from its dual SPI port, for testbenches only (not synthesizable).
//
// It samples sdio[1] then sdio[0] on each rising SCLK edge while cs_n is
// low. When cs_n rises it decodes the frame written by dual_spi_master: an
// instruction byte (write bit, 7-bit register address) and two channel
// codes, 16 bits each for a 40-bit frame or 12 bits each (upper bits of a
// 16-bit code) for a 32-bit frame. For a well-formed write frame it counts
// the frame, updates both outputs and pulses frame_done for one time step.
// Outputs are offset binary over an assumed -5 V .. +5 V span:
// vout = code / 65536 * 10 V - 5 V. Frames of any other length, or with the
// read bit set, are counted in bad_frames and ignored.
module ad3542r_model (
  input  logic        cs_n,
  input  logic        sclk,
  input  logic [1:0]  sdio,
  output logic        frame_done,
  output logic [6:0]  last_addr,
  output logic [15:0] code0,
  output logic [15:0] code1,
  output int          frames,
  output int          bad_frames,
  output int          last_bits,
  output real         vout0,
  output real         vout1
);
  logic [63:0] sh;
  int          n;

  initial begin
    frame_done = 0; frames = 0; bad_frames = 0; n = 0; sh = 0; last_bits = 0;
    code0 = 16'h8000; code1 = 16'h8000; last_addr = 0;
    vout0 = 0.0; vout1 = 0.0;
  end

  always @(negedge cs_n) begin
    n  = 0;
    sh = 0;
  end

  always @(posedge sclk) begin
    if (!cs_n) begin
      sh = {sh[61:0], sdio[1], sdio[0]};
      n  = n + 2;
    end
  end

  always @(posedge cs_n) begin
    bit ok;
    ok = 1'b0;
    last_bits = n;
    if (n == 40 && sh[39] == 1'b0) begin
      last_addr = sh[38:32];
      code0     = sh[31:16];
      code1     = sh[15:0];
      ok        = 1'b1;
    end else if (n == 32 && sh[31] == 1'b0) begin
      last_addr = sh[30:24];
      code0     = {sh[23:12], 4'h0};
      code1     = {sh[11:0], 4'h0};
      ok        = 1'b1;
    end else if (n != 0) begin
      bad_frames++;
    end
    if (ok) begin
      frames++;
      vout0 = real'(code0) / 65536.0 * 10.0 - 5.0;
      vout1 = real'(code1) / 65536.0 * 10.0 - 5.0;
      frame_done = 1;
      #1 frame_done = 0;
    end
  end
endmodule
