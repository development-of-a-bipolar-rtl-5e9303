// tb_dual_spi_master: self-checking test of the dual SPI frame writer.
//
// Two instances are tested side by side: one with the default timing
// (SCLK = clk/2, 2-cycle chip select gap) and one with SCLK_HALF = 3 and
// CS_GAP = 4. A receiver in the testbench samples sdio[1] then sdio[0] on
// every rising SCLK edge while chip select is low and rebuilds the frame.
// For random codes in 16-bit and 12-bit mode it checks the instruction byte
// (write bit 0, register address), both channel codes, the number of bits
// per frame, SCLK idling low, the chip select low time
// (NCLK * 2 * SCLK_HALF cycles), the start-to-ready period
// (1 + NCLK*2*SCLK_HALF + CS_GAP cycles), the done pulse, and that a start
// while busy is ignored.
module tb_dual_spi_master;
  localparam int unsigned DAC_BITS = 16;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic                start [2];
  logic                res12;
  logic [DAC_BITS-1:0] ch0, ch1;
  logic                ready [2], done [2], cs_n [2], sclk [2];
  logic [1:0]          sdio [2];

  dual_spi_master dut0 (
    .clk(clk), .rst_n(rst_n), .start(start[0]), .res12(res12), .ch0_code(ch0), .ch1_code(ch1),
    .ready(ready[0]), .done(done[0]), .cs_n(cs_n[0]), .sclk(sclk[0]), .sdio(sdio[0]));

  dual_spi_master #(.SCLK_HALF(3), .CS_GAP(4), .REG_ADDR(7'h15)) dut1 (
    .clk(clk), .rst_n(rst_n), .start(start[1]), .res12(res12), .ch0_code(ch0), .ch1_code(ch1),
    .ready(ready[1]), .done(done[1]), .cs_n(cs_n[1]), .sclk(sclk[1]), .sdio(sdio[1]));

  localparam int HALF [2] = '{1, 3};
  localparam int GAP  [2] = '{2, 4};
  localparam logic [6:0] ADDR [2] = '{7'h2A, 7'h15};

  // receivers
  logic [63:0] rx_bits [2];
  int          rx_n    [2];
  int          cs_low  [2];
  int          dones   [2];
  logic        sclk_d  [2];

  for (genvar i = 0; i < 2; i++) begin : g_rx
    always @(posedge clk) begin
      sclk_d[i] <= sclk[i];
      if (done[i]) dones[i]++;
      if (!cs_n[i]) cs_low[i]++;
      if (!cs_n[i] && sclk[i] && !sclk_d[i]) begin
        rx_bits[i] = {rx_bits[i][61:0], sdio[i][1], sdio[i][0]};
        rx_n[i]    += 2;
      end
      if (cs_n[i] && sclk[i] && rst_n) begin
        failures++;
        $display("FAIL dut%0d: SCLK high while deselected", i);
      end
    end
  end

  task automatic frame(input int i, input bit r12);
    int  t0, t1, nclk, nbits;
    logic [63:0] want;
    ch0 = DAC_BITS'($urandom);
    ch1 = DAC_BITS'($urandom);
    res12 = r12;
    rx_n[i] = 0; rx_bits[i] = 0; cs_low[i] = 0; dones[i] = 0;
    nbits = r12 ? 32 : 40;
    nclk  = nbits / 2;
    want  = r12 ? 64'({1'b0, ADDR[i], ch0[15:4], ch1[15:4]}) : 64'({1'b0, ADDR[i], ch0, ch1});
    @(negedge clk);
    start[i] = 1;
    t0 = cyc;
    @(negedge clk);
    start[i] = 0;
    // a start in the middle of the frame must be ignored
    repeat (3) @(negedge clk);
    start[i] = 1;
    @(negedge clk);
    start[i] = 0;
    while (!ready[i]) @(negedge clk);
    t1 = cyc;
    checks++;
    if (rx_n[i] != nbits || rx_bits[i] != want) begin
      failures++;
      $display("FAIL dut%0d res12=%0d: %0d bits %h, want %0d bits %h", i, r12, rx_n[i],
               rx_bits[i], nbits, want);
    end
    checks++;
    if (cs_low[i] != nclk * 2 * HALF[i]) begin
      failures++;
      $display("FAIL dut%0d: chip select low %0d cycles, want %0d", i, cs_low[i],
               nclk * 2 * HALF[i]);
    end
    checks++;
    if ((t1 - t0) != 1 + nclk * 2 * HALF[i] + GAP[i]) begin
      failures++;
      $display("FAIL dut%0d: period %0d cycles, want %0d", i, (t1 - t0),
               1 + nclk * 2 * HALF[i] + GAP[i]);
    end
    checks++;
    if (dones[i] != 1) begin failures++; $display("FAIL dut%0d: %0d done pulses", i, dones[i]); end
    // after the ignored start no second frame may follow
    repeat (5) @(negedge clk);
    checks++;
    if (!cs_n[i]) begin failures++; $display("FAIL dut%0d: ignored start sent a frame", i); end
  endtask

  initial begin
    rst_n = 0; start[0] = 0; start[1] = 0; res12 = 0; ch0 = 0; ch1 = 0;
    for (int i = 0; i < 2; i++) begin rx_n[i] = 0; cs_low[i] = 0; dones[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 40; k++) begin
      frame(0, k[0]);
      frame(1, k[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
