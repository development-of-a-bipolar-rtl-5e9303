// dual_spi_master: writes one two-channel update to an AD3542R DAC over a
// dual SPI link.
//
// The published system talks to each DAC over dual SPI; the frame below is
// this design's own, kept to the plainest form of such a write. A frame is
// an instruction byte (bit 7 = 0 for a write, bits 6:0 = REG_ADDR, the DAC
// register that takes the two channel codes) followed by the channel 0 code
// and the channel 1 code, each most significant bit first. Two bits move
// per SCLK period: the earlier bit of each pair on sdio[1], the later on
// sdio[0]. SCLK idles low; data change on the falling edge and are stable
// around the rising edge, where the DAC samples them (SPI mode 0).
//
// Resolution: with res12 low each code is DAC_BITS (16) wide and a frame is
// 8 + 2*16 = 40 bits, 20 SCLK periods. With res12 high the upper 12 bits of
// each code are sent, 8 + 2*12 = 32 bits, 16 SCLK periods, for a shorter
// frame and a higher update rate. The published system offers 16-bit and
// 12-bit output resolution; how it selects them is not described.
//
// Timing: a `start` pulse while `ready` is high captures the codes and res12.
// Chip select falls on the next cycle and stays low for
// NCLK * 2 * SCLK_HALF cycles (NCLK = 20 or 16), then stays high for CS_GAP
// cycles; `done` pulses in the cycle chip select rises, and `ready` returns
// when the gap is over. A start pulse while not ready is ignored (the
// system top counts this as an overrun). Period between back-to-back
// starts: 1 + NCLK*2*SCLK_HALF + CS_GAP cycles (43 at the defaults, 2.3
// million updates per second per DAC from a 100 MHz clock).
// rst_n is active low and synchronous.
module dual_spi_master #(
  parameter int unsigned DAC_BITS  = dac_pkg::DAC_BITS,
  parameter int unsigned SCLK_HALF = 1,        // clock cycles per SCLK half period
  parameter int unsigned CS_GAP    = 2,        // chip select high time, cycles
  parameter logic [6:0]  REG_ADDR  = 7'h2A     // DAC register written by a frame
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                res12,
  input  logic [DAC_BITS-1:0] ch0_code,
  input  logic [DAC_BITS-1:0] ch1_code,
  output logic                ready,
  output logic                done,
  output logic                cs_n,
  output logic                sclk,
  output logic [1:0]          sdio
);

  import dac_pkg::*;

  localparam int unsigned FRAME_W = 8 + 2 * DAC_BITS;
  localparam int unsigned NCLK_W  = $clog2(FRAME_W / 2 + 1);
  localparam int unsigned DIV_W   = (SCLK_HALF > 1) ? $clog2(SCLK_HALF) : 1;
  localparam int unsigned GAP_W   = $clog2(CS_GAP + 2);
  localparam int unsigned LOW12   = DAC_BITS - 12;

  spi_state_e          state;
  logic [FRAME_W-1:0]  sreg;
  logic [NCLK_W-1:0]   clk_left;     // SCLK periods still to send
  logic [DIV_W-1:0]    div;
  logic [GAP_W-1:0]    gap;

  // Frame image, left aligned in the shift register.
  logic [FRAME_W-1:0]  frame;
  always_comb begin
    if (res12)
      frame = {1'b0, REG_ADDR, ch0_code[DAC_BITS-1 -: 12], ch1_code[DAC_BITS-1 -: 12],
               {(2 * LOW12){1'b0}}};
    else
      frame = {1'b0, REG_ADDR, ch0_code, ch1_code};
  end

  assign sdio  = sreg[FRAME_W-1 -: 2];
  assign ready = (state == SPI_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= SPI_IDLE;
      sreg     <= '0;
      clk_left <= '0;
      div      <= '0;
      gap      <= '0;
      cs_n     <= 1'b1;
      sclk     <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        SPI_IDLE: begin
          if (start) begin
            sreg     <= frame;
            clk_left <= res12 ? NCLK_W'((8 + 24) / 2) : NCLK_W'(FRAME_W / 2);
            div      <= '0;
            cs_n     <= 1'b0;
            sclk     <= 1'b0;
            state    <= SPI_XFER;
          end
        end
        SPI_XFER: begin
          if (div == DIV_W'(SCLK_HALF - 1)) begin
            div <= '0;
            if (!sclk) begin
              sclk <= 1'b1;                 // rising edge: DAC samples sdio
            end else begin
              sclk     <= 1'b0;             // falling edge: next bit pair
              sreg     <= sreg << 2;
              clk_left <= clk_left - 1'b1;
              if (clk_left == NCLK_W'(1)) begin
                cs_n  <= 1'b1;
                done  <= 1'b1;
                gap   <= '0;
                state <= SPI_GAP;
              end
            end
          end else begin
            div <= div + 1'b1;
          end
        end
        SPI_GAP: begin
          if (gap >= GAP_W'(CS_GAP - 1)) state <= SPI_IDLE;
          else                          gap   <= gap + 1'b1;
        end
        default: state <= SPI_IDLE;
      endcase
    end
  end

  // Chip select is low exactly while a frame is being shifted.
  a_cs_framing: assert property (@(posedge clk) disable iff (!rst_n)
    (state == SPI_XFER) == !cs_n);

endmodule
