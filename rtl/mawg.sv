// mawg: the waveform sequencer of one output lane.
//
// The sequencer builds a long waveform out of short pieces stored once in
// the wave pattern memory. A chunk is chunk_length consecutive samples
// starting at chunk_offset, played chunk_repetition times back to back. The
// chunk table (chunk_storage, inside this module) lists the chunks; the
// first ctrl_length entries form one sequence, and the sequence is played
// `repetition` times. Holding one electrode voltage for a long step is thus
// a one-sample chunk with a large repetition count.
//
// Control: a kick pulse while idle latches repetition and ctrl_length and
// starts the run; busy is high from the cycle after the kick until the last
// sample has left wave_out. force_stop aborts at any time: the controller
// returns to idle at once and no further wave_valid is produced. A kick
// while busy is ignored. A count of zero (repetition, ctrl_length,
// chunk_length or chunk_repetition) means "play nothing": a kick with a zero
// repetition or ctrl_length does not start, and an entry with a zero length
// or repetition is skipped. These rules are this design's choice.
//
// Timing: samples leave at the output update rate, one per `tick` pulse
// (the update strobe of the system top). The sample for a tick seen in
// cycle T appears on wave_out with wave_valid high in cycle T+2: the
// address goes to the wave pattern memory in cycle T (wave_addr is the
// address of the next sample at all times), the memory answers in T+1 and
// wave_out is registered. One tick arriving while the controller steps over
// a chunk boundary is held and served one cycle later; ticks must be at
// least three cycles apart. The tick input itself is this design's choice:
// the published block diagram shows no rate input.
//
// Reset: rst_n is active low and synchronous.
//
// Chunk table writes (ctrl_we, ctrl_addr, ctrl_data) are taken at any time;
// software writes the table while the sequencer is idle.
module mawg #(
  parameter int unsigned WAVE_DEPTH  = dac_pkg::WAVE_DEPTH,
  parameter int unsigned WAVE_W      = dac_pkg::WAVE_W,
  parameter int unsigned CTRL_DEPTH  = dac_pkg::CTRL_DEPTH,
  parameter int unsigned REP_W       = dac_pkg::REP_W,
  parameter int unsigned CHUNK_REP_W = dac_pkg::CHUNK_REP_W,
  localparam int unsigned ENTRY_W    = CHUNK_REP_W + 2 * WAVE_DEPTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // run control
  input  logic                  kick,
  output logic                  busy,
  input  logic                  force_stop,
  input  logic [REP_W-1:0]      repetition,
  input  logic [CTRL_DEPTH:0]   ctrl_length,
  input  logic                  tick,
  // wave pattern memory read port (one cycle read latency)
  output logic [WAVE_DEPTH-1:0] wave_addr,
  input  logic [WAVE_W-1:0]     wave_data,
  // chunk table write port
  input  logic [CTRL_DEPTH-1:0] ctrl_addr,
  input  logic [ENTRY_W-1:0]    ctrl_data,
  input  logic                  ctrl_we,
  // generated waveform
  output logic                  wave_valid,
  output logic [WAVE_W-1:0]     wave_out
);

  import dac_pkg::*;

  seq_state_e              state;
  logic [REP_W-1:0]        rep_q;        // latched sequence repetition
  logic [CTRL_DEPTH:0]     len_q;        // latched ctrl_length
  logic [REP_W-1:0]        seq_cnt;      // sequences completed
  logic [CTRL_DEPTH-1:0]   chunk_idx;    // current chunk table entry
  logic [WAVE_DEPTH-1:0]   pos;          // sample index inside the chunk
  logic [CHUNK_REP_W-1:0]  crep;         // repetitions of the chunk done
  logic                    tick_pend;    // tick seen while not in SEQ_RUN
  logic                    rd_pend;      // memory read in flight

  logic [CHUNK_REP_W-1:0]  e_rep;
  logic [WAVE_DEPTH-1:0]   e_len;
  logic [WAVE_DEPTH-1:0]   e_off;

  chunk_storage #(
    .CTRL_DEPTH (CTRL_DEPTH),
    .WAVE_DEPTH (WAVE_DEPTH),
    .CHUNK_REP_W(CHUNK_REP_W)
  ) regfile_i (
    .clk          (clk),
    .ctrl_we      (ctrl_we),
    .ctrl_addr    (ctrl_addr),
    .ctrl_data    (ctrl_data),
    .rd_addr      (chunk_idx),
    .rd_repetition(e_rep),
    .rd_length    (e_len),
    .rd_offset    (e_off)
  );

  // Address of the next sample to emit.
  assign wave_addr = e_off + pos;

  logic consume;
  logic last_sample;   // last sample of the current chunk pass
  logic last_pass;     // last repetition of the current chunk
  logic last_chunk;    // last entry of the sequence
  logic last_seq;      // last repetition of the sequence
  logic empty_chunk;

  always_comb begin
    consume     = (state == SEQ_RUN) && (tick || tick_pend);
    last_sample = ({1'b0, pos} + 1'b1) == {1'b0, e_len};
    last_pass   = ({1'b0, crep} + 1'b1) == {1'b0, e_rep};
    last_chunk  = ({1'b0, chunk_idx} + 1'b1) == len_q;
    last_seq    = ({1'b0, seq_cnt} + 1'b1) == {1'b0, rep_q};
    empty_chunk = (e_len == '0) || (e_rep == '0);
  end

  // Where the controller goes after the current chunk: the next chunk
  // entry, the first entry of the next sequence pass, or the end.
  seq_state_e            nc_state;
  logic [CTRL_DEPTH-1:0] nc_idx;
  logic [REP_W-1:0]      nc_seq;

  always_comb begin
    nc_state = SEQ_CHECK;
    nc_idx   = chunk_idx + 1'b1;
    nc_seq   = seq_cnt;
    if (last_chunk) begin
      nc_idx = '0;
      if (last_seq) nc_state = SEQ_FINISH;
      else          nc_seq   = seq_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= SEQ_IDLE;
      rep_q     <= '0;
      len_q     <= '0;
      seq_cnt   <= '0;
      chunk_idx <= '0;
      pos       <= '0;
      crep      <= '0;
      tick_pend <= 1'b0;
      rd_pend   <= 1'b0;
    end else if (force_stop) begin
      state     <= SEQ_IDLE;
      tick_pend <= 1'b0;
      rd_pend   <= 1'b0;
    end else begin
      rd_pend <= consume;
      unique case (state)
        SEQ_IDLE: begin
          if (kick) begin
            rep_q     <= repetition;
            len_q     <= ctrl_length;
            seq_cnt   <= '0;
            chunk_idx <= '0;
            tick_pend <= 1'b0;
            if (repetition != '0 && ctrl_length != '0) state <= SEQ_CHECK;
          end
        end
        SEQ_CHECK: begin
          if (tick) tick_pend <= 1'b1;
          pos  <= '0;
          crep <= '0;
          if (empty_chunk) begin
            state     <= nc_state;
            chunk_idx <= nc_idx;
            seq_cnt   <= nc_seq;
          end else begin
            state <= SEQ_RUN;
          end
        end
        SEQ_RUN: begin
          if (consume) begin
            tick_pend <= 1'b0;
            if (last_sample) begin
              pos <= '0;
              if (last_pass) begin
                crep      <= '0;
                state     <= nc_state;
                chunk_idx <= nc_idx;
                seq_cnt   <= nc_seq;
              end else begin
                crep <= crep + 1'b1;
              end
            end else begin
              pos <= pos + 1'b1;
            end
          end
        end
        SEQ_FINISH: begin
          state <= SEQ_IDLE;
        end
        default: state <= SEQ_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wave_valid <= 1'b0;
      wave_out   <= '0;
    end else begin
      wave_valid <= rd_pend && !force_stop;
      if (rd_pend) wave_out <= wave_data;
    end
  end

  assign busy = (state != SEQ_IDLE) || rd_pend || wave_valid;

  // A kick is only acted on when idle; the run then shows up as busy.
  property p_kick_starts;
    @(posedge clk) disable iff (!rst_n)
      (state == SEQ_IDLE && kick && !force_stop && repetition != '0 && ctrl_length != '0)
        |=> busy;
  endproperty
  a_kick_starts: assert property (p_kick_starts);

  // No sample is produced while the controller is idle and nothing is in flight.
  a_valid_needs_read: assert property (
    @(posedge clk) disable iff (!rst_n) wave_valid |-> $past(rd_pend));

endmodule
