// tb_mawg: self-checking test of the waveform sequencer.
//
// A behavioural memory returns f(addr) one cycle after wave_addr, like the
// block RAM of the system. For each test the testbench writes a chunk
// table, kicks the sequencer and expands the same table itself (chunks of
// chunk_length samples from chunk_offset, each played chunk_repetition
// times, ctrl_length entries per sequence, `repetition` sequences) into the
// list of expected samples. Every wave_valid sample is compared with that
// list, the sample count is checked, and the timing is checked: a sample
// inside a chunk appears exactly 2 cycles after its tick, the first sample
// of a chunk at most 2 + (entries stepped over) cycles after it. Also
// checked: entries with zero length or zero repetition are skipped, a kick
// with zero repetition or zero ctrl_length does not start, a kick while busy
// is ignored, force_stop ends the output at once, and busy covers the run.
module tb_mawg;
  localparam int unsigned WAVE_DEPTH  = 12;
  localparam int unsigned WAVE_W      = 32;
  localparam int unsigned CTRL_DEPTH  = 8;
  localparam int unsigned REP_W       = 16;
  localparam int unsigned CHUNK_REP_W = 16;
  localparam int unsigned ENTRY_W     = CHUNK_REP_W + 2 * WAVE_DEPTH;

  logic                  clk = 1'b0;
  logic                  rst_n;
  logic                  kick, busy, force_stop, tick;
  logic [REP_W-1:0]      repetition;
  logic [CTRL_DEPTH:0]   ctrl_length;
  logic [WAVE_DEPTH-1:0] wave_addr;
  logic [WAVE_W-1:0]     wave_data;
  logic [CTRL_DEPTH-1:0] ctrl_addr;
  logic [ENTRY_W-1:0]    ctrl_data;
  logic                  ctrl_we;
  logic                  wave_valid;
  logic [WAVE_W-1:0]     wave_out;

  int checks = 0, failures = 0;

  mawg dut (.*);

  always #5 clk = ~clk;

  function automatic logic [WAVE_W-1:0] f(input logic [WAVE_DEPTH-1:0] a);
    return {4'hA, a, 4'h5, ~a};
  endfunction

  always_ff @(posedge clk) wave_data <= f(wave_addr);

  // reference chunk table
  int t_rep [256];
  int t_len [256];
  int t_off [256];

  typedef struct { int addr; bit first; int gap; } exp_t;
  exp_t exp_q[$];

  int  cyc = 0;
  int  period = 4;
  bit  tick_en = 0;
  int  tick_q[$];
  int  got = 0;
  bit  stop_seen = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // tick generator, driven between edges
  always @(negedge clk) begin
    tick = tick_en && (cyc % period == 0);
  end

  // record ticks, compare samples
  always @(posedge clk) begin
    if (tick && busy && !force_stop) tick_q.push_back(cyc);
    if (wave_valid && rst_n) begin
      exp_t e;
      int   tc;
      got++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected sample %h at cycle %0d", wave_out, cyc);
      end else begin
        e = exp_q.pop_front();
        if (wave_out !== f(WAVE_DEPTH'(e.addr))) begin
          failures++;
          $display("FAIL sample %0d: got %h want %h (addr %0d)", got, wave_out,
                   f(WAVE_DEPTH'(e.addr)), e.addr);
        end
        checks++;
        if (tick_q.size() == 0) begin
          failures++;
          $display("FAIL sample without tick at cycle %0d", cyc);
        end else begin
          tc = tick_q.pop_front();
          if (e.first ? (cyc - tc < 2 || cyc - tc > 2 + e.gap) : (cyc - tc != 2)) begin
            failures++;
            $display("FAIL latency %0d (first=%0d gap=%0d) at cycle %0d", cyc - tc,
                     e.first, e.gap, cyc);
          end
        end
      end
    end
  end

  task automatic write_entry(input int a, input int rep, input int len, input int off);
    @(negedge clk);
    ctrl_we   = 1;
    ctrl_addr = CTRL_DEPTH'(a);
    ctrl_data = {CHUNK_REP_W'(rep), WAVE_DEPTH'(len), WAVE_DEPTH'(off)};
    t_rep[a] = rep; t_len[a] = len; t_off[a] = off;
    @(negedge clk);
    ctrl_we = 0;
  endtask

  // expand the table into expected samples
  task automatic build_expect(input int nent, input int nrep);
    int gap = 1;
    exp_q.delete();
    for (int s = 0; s < nrep; s++)
      for (int c = 0; c < nent; c++) begin
        if (t_len[c] == 0 || t_rep[c] == 0) begin
          gap++;
          continue;
        end
        for (int r = 0; r < t_rep[c]; r++)
          for (int p = 0; p < t_len[c]; p++) begin
            exp_t e;
            e.addr  = (t_off[c] + p) % (2**WAVE_DEPTH);
            e.first = (r == 0 && p == 0);
            e.gap   = gap;
            exp_q.push_back(e);
          end
        gap = 1;
      end
  endtask

  task automatic run(input int nent, input int nrep, input int per);
    int n;
    period = per;
    build_expect(nent, nrep);
    n = exp_q.size();
    got = 0;
    tick_q.delete();
    @(negedge clk);
    tick_en     = 1;
    repetition  = REP_W'(nrep);
    ctrl_length = (CTRL_DEPTH + 1)'(nent);
    kick        = 1;
    @(negedge clk);
    kick = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy did not rise"); end
    // a second kick while busy must change nothing
    @(negedge clk);
    repetition = 1; ctrl_length = 1; kick = 1;
    @(negedge clk);
    kick = 0;
    while (busy) @(negedge clk);
    tick_en = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (got != n || exp_q.size() != 0) begin
      failures++;
      $display("FAIL run of %0d entries x %0d: got %0d samples, want %0d", nent, nrep, got, n);
    end
  endtask

  initial begin
    rst_n = 0; kick = 0; force_stop = 0; tick = 0; repetition = 0; ctrl_length = 0;
    ctrl_addr = 0; ctrl_data = 0; ctrl_we = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1: hand-made table with a skipped empty entry and a zero-repetition entry
    write_entry(0, 3, 4, 100);   // 4 samples from 100, three times
    write_entry(1, 0, 5, 300);   // zero repetitions: skipped
    write_entry(2, 1, 1, 7);     // a single held sample
    write_entry(3, 2, 0, 50);    // zero length: skipped
    write_entry(4, 5, 1, 4095);  // hold one sample for 5 updates
    write_entry(5, 1, 3, 4094);  // wraps around the memory end
    run(6, 2, 5);
    run(6, 1, 3);

    // 2: random tables
    for (int t = 0; t < 12; t++) begin
      automatic int nent = $urandom_range(1, 10);
      for (int c = 0; c < nent; c++)
        write_entry(c, $urandom_range(0, 4), $urandom_range(0, 6), $urandom_range(0, 4095));
      run(nent, $urandom_range(1, 3), $urandom_range(8, 12));
    end

    // 3: zero repetition or zero ctrl_length does not start
    @(negedge clk);
    repetition = 0; ctrl_length = 3; kick = 1;
    @(negedge clk); kick = 0;
    checks++;
    if (busy) begin failures++; $display("FAIL started with repetition 0"); end
    repetition = 2; ctrl_length = 0; kick = 1;
    @(negedge clk); kick = 0;
    checks++;
    if (busy) begin failures++; $display("FAIL started with ctrl_length 0"); end

    // 4: force_stop in the middle of a long run
    write_entry(0, 1000, 4, 0);
    build_expect(1, 1);
    tick_q.delete();
    period = 3;
    @(negedge clk);
    tick_en = 1; repetition = 1; ctrl_length = 1; kick = 1;
    @(negedge clk); kick = 0;
    repeat (60) @(negedge clk);
    force_stop = 1;
    @(negedge clk);
    force_stop = 0;
    got = 0;
    repeat (30) @(negedge clk);
    checks++;
    if (busy || got != 0) begin
      failures++;
      $display("FAIL force_stop: busy=%0d, %0d samples after stop", busy, got);
    end
    tick_en = 0;
    // the sequencer restarts normally after a stop
    write_entry(0, 2, 3, 10);
    run(1, 2, 4);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
