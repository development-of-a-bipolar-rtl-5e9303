// tb_dac_system_top: end-to-end test of the whole DAC controller at its
// default size (8 DACs, 16 channels, one GPIO lane).
//
// Every DAC link drives a behavioural AD3542R model and each DAC output an
// amplifier model (gain 10.2), so the test follows a sample from the block
// RAM to the +/-50 V outputs. Expected DAC codes are worked out in the
// testbench from the chunk tables it writes. Phases:
//   A  ion transport: 11 voltage sets (steps 0..10 of a sin^2 profile) on
//      all 16 channels, each step held for 200 updates of 500 ns (100 us
//      steps), all lanes kicked together; codes, output voltages, the
//      update period, the step duration and the GPIO step marker are
//      checked;
//   B  the same transport played three times (sequence repetition) with a
//      short hold;
//   C  a compressed pattern on one lane: a repeated multi-sample chunk,
//      skipped empty entries and two sequence passes;
//   D  force_stop of one lane while the others keep running;
//   E  overrun: an update period shorter than an SPI frame;
//   F  12-bit mode: 32-bit frames, upper 12 bits of each code.
// Each mechanism is counted; one that never happened is a failure.
module tb_dac_system_top;
  import dac_pkg::*;

  localparam int ND      = NUM_DAC;
  localparam int NL      = ND + 1;
  localparam int LANE_W  = $clog2(NL);
  localparam int ENTRY_W = CHUNK_REP_W + 2 * WAVE_DEPTH;
  localparam real GAIN   = 1.0 + 47.0 / 5.1;
  localparam int NSTEP   = 11;          // steps 0..N with N = 10

  logic clk = 1'b0;
  always #5 clk = ~clk;                 // 100 MHz
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic                          rst_n;
  logic                          bram_we;
  logic [LANE_W-1:0]             bram_lane;
  logic [WAVE_DEPTH-1:0]         bram_addr;
  logic [WAVE_W-1:0]             bram_data;
  logic                          chunk_we;
  logic [LANE_W-1:0]             chunk_lane;
  logic [CTRL_DEPTH-1:0]         chunk_addr;
  logic [ENTRY_W-1:0]            chunk_data;
  logic [NL-1:0]                 kick, force_stop, busy;
  logic [NL-1:0][REP_W-1:0]      repetition;
  logic [NL-1:0][CTRL_DEPTH:0]   ctrl_length;
  logic [PERIOD_W-1:0]           update_period;
  logic                          res12;
  logic [ND-1:0]                 dac_cs_n, dac_sclk;
  logic [ND-1:0][1:0]            dac_sdio;
  logic [WAVE_W-1:0]             gpio_out;
  logic [ND-1:0]                 overrun;
  logic                          overrun_clr;

  dac_system_top dut (.*);

  // ------------------------------------------------------------ DAC board
  logic       frame_done [ND];
  logic [6:0] last_addr  [ND];
  logic [15:0] code0 [ND], code1 [ND];
  int         frames [ND], bad_frames [ND], last_bits [ND];
  real        vdac0 [ND], vdac1 [ND], vout0 [ND], vout1 [ND];

  for (genvar d = 0; d < ND; d++) begin : g_board
    ad3542r_model dac_m (
      .cs_n(dac_cs_n[d]), .sclk(dac_sclk[d]), .sdio(dac_sdio[d]),
      .frame_done(frame_done[d]), .last_addr(last_addr[d]), .code0(code0[d]), .code1(code1[d]),
      .frames(frames[d]), .bad_frames(bad_frames[d]), .last_bits(last_bits[d]),
      .vout0(vdac0[d]), .vout1(vdac1[d]));
    output_amp_model amp0 (.vin(vdac0[d]), .vout(vout0[d]));
    output_amp_model amp1 (.vin(vdac1[d]), .vout(vout1[d]));
  end

  int checks = 0, failures = 0;
  int n_seq_rep = 0, n_chunk_rep = 0, n_skip = 0, n_force_stop = 0;
  int n_overrun = 0, n_res12 = 0, n_gpio = 0, n_transport = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  // ------------------------------------------------------- code arithmetic
  function automatic logic [15:0] v2code(input real v);
    real c;
    c = (v / GAIN + 5.0) / 10.0 * 65536.0 + 0.5;
    if (c < 0.0) c = 0.0;
    if (c > 65535.0) c = 65535.0;
    return 16'(int'($floor(c)));
  endfunction

  // voltage of channel e (0..15) at transport step k: sin^2 profile between
  // a start and an end value inside +/-50 V
  function automatic real step_v(input int e, input int k);
    real vs, ve, s;
    vs = -45.0 + 6.0 * e;
    ve =  45.0 - 5.5 * e;
    s  = $sin(3.14159265358979 * k / (2.0 * (NSTEP - 1)));
    return vs + (ve - vs) * s * s;
  endfunction

  // ------------------------------------------------------- expected codes
  logic [31:0] exp_q [ND][$];
  real         expv_q [ND][$];
  bit          cmp_en = 0;
  bit          mask12 = 0;
  int          last_frame_cyc [ND];
  int          period_errs = 0, period_checks = 0;
  int          expect_period = 0;

  for (genvar d = 0; d < ND; d++) begin : g_cmp
    always @(posedge frame_done[d]) begin
      logic [31:0] w;
      logic [15:0] m;
      m = mask12 ? 16'hFFF0 : 16'hFFFF;
      if (cmp_en) begin
        if (exp_q[d].size() == 0) begin
          check(0, $sformatf("DAC %0d: unexpected frame", d));
        end else begin
          w = exp_q[d].pop_front();
          check(code0[d] == (w[15:0] & m) && code1[d] == (w[31:16] & m),
                $sformatf("DAC %0d codes %h %h, want %h", d, code1[d], code0[d], w));
          check(last_addr[d] == 7'h2A, $sformatf("DAC %0d register %h", d, last_addr[d]));
          if (expv_q[d].size() != 0) begin
            real v;
            v = expv_q[d].pop_front();
            check(vout0[d] - v < 0.005 && v - vout0[d] < 0.005,
                  $sformatf("DAC %0d ch0 output %f V, want %f V", d, vout0[d], v));
          end
        end
        if (expect_period != 0 && last_frame_cyc[d] != 0) begin
          period_checks++;
          if (cyc - last_frame_cyc[d] != expect_period) period_errs++;
        end
        last_frame_cyc[d] = cyc;
      end
    end
  end

  // GPIO: record every change
  logic [31:0] gpio_prev;
  int          gpio_log[$];
  always @(posedge clk) begin
    gpio_prev <= gpio_out;
    if (rst_n && gpio_out != gpio_prev) gpio_log.push_back(int'(gpio_out));
  end

  // ------------------------------------------------------------- helpers
  task automatic bram_write(input int lane, input int addr, input logic [31:0] data);
    @(negedge clk);
    bram_we = 1; bram_lane = LANE_W'(lane); bram_addr = WAVE_DEPTH'(addr); bram_data = data;
    @(negedge clk);
    bram_we = 0;
  endtask

  task automatic chunk_write(input int lane, input int idx, input int rep, input int len,
                             input int off);
    @(negedge clk);
    chunk_we = 1; chunk_lane = LANE_W'(lane); chunk_addr = CTRL_DEPTH'(idx);
    chunk_data = {CHUNK_REP_W'(rep), WAVE_DEPTH'(len), WAVE_DEPTH'(off)};
    @(negedge clk);
    chunk_we = 0;
  endtask

  task automatic kick_lanes(input logic [NL-1:0] lanes, input int rep, input int clen);
    @(negedge clk);
    for (int l = 0; l < NL; l++) begin
      repetition[l]  = REP_W'(rep);
      ctrl_length[l] = (CTRL_DEPTH + 1)'(clen);
    end
    kick = lanes;
    @(negedge clk);
    kick = '0;
  endtask

  task automatic wait_idle(input int limit);
    int t = 0;
    @(negedge clk);
    while (busy != '0 && t < limit) begin @(negedge clk); t++; end
    // let the last SPI frames finish
    repeat (80) @(negedge clk);
    check(busy == '0, "lanes still busy");
  endtask

  task automatic clear_expect();
    for (int d = 0; d < ND; d++) begin
      exp_q[d].delete(); expv_q[d].delete(); last_frame_cyc[d] = 0;
    end
  endtask

  // load the transport voltage sets into every DAC lane and step markers
  // into the GPIO lane; one length-1 chunk per step, held `hold` updates
  task automatic load_transport(input int hold);
    for (int d = 0; d < ND; d++)
      for (int k = 0; k < NSTEP; k++)
        bram_write(d, k, {v2code(step_v(2 * d + 1, k)), v2code(step_v(2 * d, k))});
    for (int k = 0; k < NSTEP; k++) bram_write(ND, k, 32'(k + 1));
    for (int l = 0; l < NL; l++)
      for (int k = 0; k < NSTEP; k++) chunk_write(l, k, hold, 1, k);
  endtask

  task automatic expect_transport(input int hold, input int rep, input bit volts);
    clear_expect();
    for (int r = 0; r < rep; r++)
      for (int k = 0; k < NSTEP; k++)
        for (int h = 0; h < hold; h++)
          for (int d = 0; d < ND; d++) begin
            exp_q[d].push_back({v2code(step_v(2 * d + 1, k)), v2code(step_v(2 * d, k))});
            if (volts) expv_q[d].push_back(GAIN * (real'(v2code(step_v(2 * d, k))) / 65536.0
                                                   * 10.0 - 5.0));
          end
  endtask

  task automatic check_drained(input string what);
    for (int d = 0; d < ND; d++)
      check(exp_q[d].size() == 0, $sformatf("%s: DAC %0d missed %0d frames", what, d,
                                            exp_q[d].size()));
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    int f_before [ND];
    rst_n = 0; bram_we = 0; bram_lane = 0; bram_addr = 0; bram_data = 0;
    chunk_we = 0; chunk_lane = 0; chunk_addr = 0; chunk_data = 0;
    kick = '0; force_stop = '0; repetition = '0; ctrl_length = '0;
    update_period = 16'd50; res12 = 0; overrun_clr = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;

    // full scale of the output stage: codes 0 and FFFF give about -/+51 V
    check(GAIN * (real'(16'h0000) / 65536.0 * 10.0 - 5.0) < -50.0, "negative full scale");
    check(GAIN * (real'(16'hFFFF) / 65536.0 * 10.0 - 5.0) > 50.0, "positive full scale");

    // ---------------- A: one transport, 100 us per step at 500 ns updates
    load_transport(200);
    expect_transport(200, 1, 1);
    cmp_en = 1; expect_period = 50;
    gpio_log.delete();
    kick_lanes({NL{1'b1}}, 1, NSTEP);
    wait_idle(200000);
    check_drained("transport");
    check(period_errs == 0 && period_checks > 1000,
          $sformatf("update period: %0d of %0d wrong", period_errs, period_checks));
    for (int d = 1; d < ND; d++) check(frames[d] == frames[0], "lanes out of step");
    check(gpio_log.size() == NSTEP, $sformatf("GPIO showed %0d steps", gpio_log.size()));
    for (int k = 0; k < NSTEP && k < gpio_log.size(); k++)
      check(gpio_log[k] == k + 1, $sformatf("GPIO step %0d shows %0d", k, gpio_log[k]));
    if (gpio_log.size() == NSTEP) n_gpio++;
    // one step lasts 200 updates of 50 cycles: 10000 cycles = 100 us
    check(frames[0] == NSTEP * 200, $sformatf("DAC 0 got %0d frames", frames[0]));
    for (int d = 0; d < ND; d++) check(bad_frames[d] == 0, "malformed frame");
    check(overrun == '0, "overrun in transport");
    if (failures == 0) n_transport++;
    expect_period = 0;

    // ---------------- B: three passes of the sequence, short hold
    for (int l = 0; l < NL; l++)
      for (int k = 0; k < NSTEP; k++) chunk_write(l, k, 2, 1, k);
    expect_transport(2, 3, 0);
    kick_lanes({NL{1'b1}}, 3, NSTEP);
    wait_idle(20000);
    check_drained("repeated transport");
    if (exp_q[0].size() == 0) n_seq_rep++;

    // ---------------- C: compressed pattern on lane 0
    for (int a = 0; a < 8; a++) bram_write(0, 100 + a, {16'(a), 16'(16'h1000 + a)});
    chunk_write(0, 0, 3, 4, 100);   // 4 samples, 3 times
    chunk_write(0, 1, 0, 2, 104);   // zero repetition: skipped
    chunk_write(0, 2, 2, 0, 104);   // zero length: skipped
    chunk_write(0, 3, 1, 2, 106);   // 2 samples once
    clear_expect();
    for (int s = 0; s < 2; s++) begin
      for (int r = 0; r < 3; r++)
        for (int a = 0; a < 4; a++) exp_q[0].push_back({16'(a), 16'(16'h1000 + a)});
      for (int a = 6; a < 8; a++) exp_q[0].push_back({16'(a), 16'(16'h1000 + a)});
    end
    kick_lanes(NL'(1), 2, 4);
    wait_idle(20000);
    check_drained("compressed pattern");
    if (exp_q[0].size() == 0) begin n_chunk_rep++; n_skip++; n_seq_rep++; end

    // ---------------- D: force_stop on lane 3 only
    cmp_en = 0;
    for (int l = 0; l < NL; l++) chunk_write(l, 0, 60000, 4, 0);
    kick_lanes({NL{1'b1}}, 1, 1);
    repeat (2000) @(negedge clk);
    force_stop[3] = 1;
    @(negedge clk);
    force_stop[3] = 0;
    repeat (100) @(negedge clk);
    for (int d = 0; d < ND; d++) f_before[d] = frames[d];
    check(!busy[3] && busy[0], "force_stop stopped the wrong lanes");
    repeat (3000) @(negedge clk);
    check(frames[3] == f_before[3], "stopped lane kept sending");
    check(frames[0] > f_before[0] + 50, "other lanes stalled");
    if (frames[3] == f_before[3] && frames[0] > f_before[0]) n_force_stop++;
    @(negedge clk);
    force_stop = '1;
    @(negedge clk);
    force_stop = '0;
    repeat (100) @(negedge clk);
    check(busy == '0, "global force_stop");

    // ---------------- E: overrun with an update period below a frame
    update_period = 16'd20;
    chunk_write(0, 0, 10, 1, 0);
    kick_lanes(NL'(1), 1, 1);
    wait_idle(5000);
    check(overrun[0] && overrun[ND-1:1] == '0, "overrun flag");
    if (overrun[0]) n_overrun++;
    @(negedge clk) overrun_clr = 1;
    @(negedge clk) overrun_clr = 0;
    check(overrun == '0, "overrun clear");

    // ---------------- F: 12-bit frames
    update_period = 16'd36;             // 1 + 16*2 + 2 = 35 cycles per frame
    res12 = 1; mask12 = 1; cmp_en = 1;
    for (int l = 0; l < NL; l++)
      for (int k = 0; k < NSTEP; k++) chunk_write(l, k, 3, 1, k);
    expect_transport(3, 1, 0);
    expect_period = 36;
    period_errs = 0; period_checks = 0;
    kick_lanes({NL{1'b1}}, 1, NSTEP);
    wait_idle(20000);
    check_drained("12-bit transport");
    check(last_bits[0] == 32, $sformatf("12-bit frame has %0d bits", last_bits[0]));
    check(period_errs == 0 && period_checks > 0, "12-bit update period");
    check(overrun == '0, "overrun in 12-bit mode");
    if (last_bits[0] == 32 && exp_q[0].size() == 0) n_res12++;

    // ---------------- mechanisms
    check(n_transport > 0, "transport never ran cleanly");
    check(n_gpio > 0, "GPIO lane never checked");
    check(n_seq_rep > 0, "sequence repetition never happened");
    check(n_chunk_rep > 0, "chunk repetition never happened");
    check(n_skip > 0, "empty chunk skip never happened");
    check(n_force_stop > 0, "force_stop never happened");
    check(n_overrun > 0, "overrun never happened");
    check(n_res12 > 0, "12-bit mode never happened");
    $display("mechanisms: transport=%0d gpio=%0d seq_rep=%0d chunk_rep=%0d skip=%0d force_stop=%0d overrun=%0d res12=%0d",
             n_transport, n_gpio, n_seq_rep, n_chunk_rep, n_skip, n_force_stop, n_overrun, n_res12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
