// tb_shuttle_workload: the repeated ion-shuttling workload on the full
// default-size controller.
//
// The reference experiment moves one ion over 200 um in N = 10 steps of
// 100 us and repeats the shuttle 10 000 times. Here the eleven voltage sets
// are synthetic (the published sets are only plotted): end electrodes
// V1..V10 on channels 0..9 start from the typical trapping set
// [0,0,10,10,0,0,10,10,0,0] V and move on a sin^2 profile to
// [10,10,0,0,10,10,0,0,0,0] V, pairs kept equal; the centre electrode
// (channel 10) stays at 3 V and channels 11..15 at 0 V. One sequence is an
// out-and-back shuttle, 21 chunk entries (steps 0..10, then 9..0), each a
// one-sample chunk held 200 updates of 500 ns (100 us). The sequence is run
// REPS = 50 times (the 10 000 of the experiment would take hours to
// simulate; only the repetition count differs). Every DAC frame of every
// channel is compared with the expected code, and the total number of
// frames and the run time in clock cycles are checked.
module tb_shuttle_workload;
  import dac_pkg::*;

  localparam int ND      = NUM_DAC;
  localparam int NL      = ND + 1;
  localparam int LANE_W  = $clog2(NL);
  localparam int ENTRY_W = CHUNK_REP_W + 2 * WAVE_DEPTH;
  localparam real GAIN   = 1.0 + 47.0 / 5.1;
  localparam int NSTEP   = 11;
  localparam int NENT    = 2 * NSTEP - 1;
  localparam int HOLD    = 200;
  localparam int PERIOD  = 50;
  localparam int REPS    = 50;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  longint cyc = 0;
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

  logic        frame_done [ND];
  logic [6:0]  last_addr  [ND];
  logic [15:0] code0 [ND], code1 [ND];
  int          frames [ND], bad_frames [ND], last_bits [ND];
  real         vdac0 [ND], vdac1 [ND], vout0 [ND], vout1 [ND];

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
  int code_errs = 0, volt_errs = 0;

  function automatic logic [15:0] v2code(input real v);
    real c;
    c = (v / GAIN + 5.0) / 10.0 * 65536.0 + 0.5;
    if (c < 0.0) c = 0.0;
    if (c > 65535.0) c = 65535.0;
    return 16'(int'($floor(c)));
  endfunction

  // channel e voltage at step k
  function automatic real ch_v(input int e, input int k);
    real a, b, s;
    if (e == 10) return 3.0;
    if (e > 10) return 0.0;
    a = ((e / 2) % 2 == 1) ? 10.0 : 0.0;          // [0,0,10,10,0,0,10,10,0,0]
    b = (e < 8 && (e / 2) % 2 == 0) ? 10.0 : 0.0; // [10,10,0,0,10,10,0,0,0,0]
    s = $sin(3.14159265358979 * k / (2.0 * (NSTEP - 1)));
    return a + (b - a) * s * s;
  endfunction

  // step played at entry j of the out-and-back sequence
  function automatic int entry_step(input int j);
    return (j < NSTEP) ? j : 2 * (NSTEP - 1) - j;
  endfunction

  // compare every frame with the step it belongs to
  for (genvar d = 0; d < ND; d++) begin : g_cmp
    always @(posedge frame_done[d]) begin
      int idx, k;
      real v;
      idx = frames[d] - 1;                       // frames counted by the model
      k   = entry_step((idx / HOLD) % NENT);
      if (code0[d] != v2code(ch_v(2 * d, k)) || code1[d] != v2code(ch_v(2 * d + 1, k)))
        code_errs++;
      v = ch_v(2 * d, k);
      if (vout0[d] - v > 0.01 || v - vout0[d] > 0.01) volt_errs++;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    longint t0, t1;
    rst_n = 0; bram_we = 0; bram_lane = 0; bram_addr = 0; bram_data = 0;
    chunk_we = 0; chunk_lane = 0; chunk_addr = 0; chunk_data = 0;
    kick = '0; force_stop = '0; repetition = '0; ctrl_length = '0;
    update_period = PERIOD_W'(PERIOD); res12 = 0; overrun_clr = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int d = 0; d < ND; d++)
      for (int k = 0; k < NSTEP; k++) begin
        @(negedge clk);
        bram_we = 1; bram_lane = LANE_W'(d); bram_addr = WAVE_DEPTH'(k);
        bram_data = {v2code(ch_v(2 * d + 1, k)), v2code(ch_v(2 * d, k))};
      end
    @(negedge clk) bram_we = 0;
    for (int d = 0; d < ND; d++)
      for (int j = 0; j < NENT; j++) begin
        @(negedge clk);
        chunk_we = 1; chunk_lane = LANE_W'(d); chunk_addr = CTRL_DEPTH'(j);
        chunk_data = {CHUNK_REP_W'(HOLD), WAVE_DEPTH'(1), WAVE_DEPTH'(entry_step(j))};
      end
    @(negedge clk) chunk_we = 0;
    for (int l = 0; l < NL; l++) begin
      repetition[l] = REP_W'(REPS); ctrl_length[l] = (CTRL_DEPTH + 1)'(NENT);
    end
    kick = {1'b0, {ND{1'b1}}};
    t0 = cyc;
    @(negedge clk) kick = '0;
    while (busy != '0) @(negedge clk);
    t1 = cyc;
    repeat (80) @(negedge clk);
    for (int d = 0; d < ND; d++) begin
      check(frames[d] == REPS * NENT * HOLD,
            $sformatf("DAC %0d: %0d frames, want %0d", d, frames[d], REPS * NENT * HOLD));
      check(bad_frames[d] == 0, "malformed frames");
    end
    check(code_errs == 0, $sformatf("%0d frames with wrong codes", code_errs));
    check(volt_errs == 0, $sformatf("%0d frames with wrong output voltage", volt_errs));
    // one shuttle (21 steps of 100 us) = 2.1 ms = 210 000 cycles at 100 MHz
    // the first update comes at the next timer strobe after the kick
    check((t1 - t0) >= longint'(REPS * NENT * HOLD - 1) * PERIOD &&
          (t1 - t0) <= longint'(REPS * NENT * HOLD) * PERIOD + 4,
          $sformatf("run took %0d cycles", t1 - t0));
    check(overrun == '0, "overrun");
    $display("shuttles=%0d frames/DAC=%0d cycles=%0d", REPS, frames[0], t1 - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (REPS * NENT * HOLD * PERIOD + 100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
