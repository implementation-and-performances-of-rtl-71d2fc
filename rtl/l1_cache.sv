// l1_cache: per-channel circular sample buffer with triggered packet readout.
//
// Every clock the current line of eight samples of each channel is written to
// that channel's circular buffer, DEPTH lines deep (4000 lines of 8 ns hold
// 32 us). A trigger names a timestamp and a channel mask. For each channel of
// the mask, in channel order, the module extracts WAVE_LEN samples starting at
// that timestamp and sends them, wrapped in header and trailer by
// event_packager, on the out_* stream.
//
// Trigger source: in external mode (self_trig = 0) only validated triggers
// from the back end (ext_*) are used; in self-triggering mode only the local
// triggers (loc_*). Triggers wait in a queue of TQ_DEPTH entries.
//
// Loss policy (this design's choice; the paper only reports that events are
// lost when the readout saturates): a trigger arriving on a full queue is
// dropped (drop_queue); a channel whose packet does not fit in the space
// downstream (room_words, in 16-bit words) is dropped (drop_room); a channel
// whose window has already been overwritten, or is not yet written, is dropped
// (drop_late). Because the writer runs one line per clock while a packet
// reads one line per 8 clocks, a window can only start if it is at most
// DEPTH - 8 - 7*125 - SLACK = 3101 lines (about 24.8 us) old for the default
// sizes; the consumer may stall the packet for at most SLACK clocks in total
// beyond that margin (the funnel FIFO never stalls it, since room is checked
// first). DEPTH must exceed HDR_WORDS + 7*WAVE_LINES + SLACK.
//
// The buffer depth, window length and the two trigger modes follow the paper.
// The line-wide storage, the queue, the loss rules and the cyclic 16-bit
// trigger count (one per trigger, shared by its channels) are this design's.
//
// Timing: a packet starts 3 clocks after the queue holds a trigger and the
// packager is idle, then streams one word per clock when out_ready is high.
// ts_now must be the timestamp of the line on adc in the same clock.
module l1_cache
  import gcu_pkg::*;
#(
  parameter int unsigned DEPTH    = 4000,          // lines, 8 ns each: 32 us
  parameter int unsigned WAVE_LEN = WAVE_SAMPLES,  // samples per packet
  parameter int unsigned TQ_DEPTH = 4,
  parameter int unsigned SLACK    = 16,            // lines of stall tolerated
  parameter logic [15:0] FW_VER   = FW_VERSION
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [NCH-1:0][SAMPLES_PER_CLK-1:0][ADC_BITS-1:0] adc,
  input  logic [TS_BITS-1:0] ts_now,
  // configuration
  input  logic               self_trig,
  input  logic [NCH-1:0]     ch_enable,
  input  logic [15:0]        gcu_id,
  // triggers
  input  logic               ext_valid,
  input  trig_t              ext_trig,
  input  logic               loc_valid,
  input  trig_t              loc_trig,
  // packet stream to the consumer
  input  logic [31:0]        room_words,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [15:0]        out_data,
  output logic               out_sop,
  output logic               out_eop,
  // statistics
  output logic [31:0]        pkt_count,
  output logic [31:0]        drop_queue,
  output logic [31:0]        drop_room,
  output logic [31:0]        drop_late
);

  localparam int unsigned AW         = $clog2(DEPTH);
  localparam int unsigned WAVE_LINES = (WAVE_LEN + SAMPLES_PER_CLK - 1) / SAMPLES_PER_CLK;
  localparam int unsigned LINE_W     = SAMPLES_PER_CLK * ADC_BITS;
  // Oldest start line whose whole packet can still be read before the writer
  // wraps onto it. Line k of the window is streamed about HDR_WORDS + 8k
  // clocks after the start, while the writer advances one line per clock, so
  // the reader loses 7 lines per line read; SLACK lines absorb downstream
  // stalls (out_ready low).
  localparam int unsigned MAX_AGE    = DEPTH - HDR_WORDS - (SAMPLES_PER_CLK - 1) * WAVE_LINES - SLACK;
  localparam int unsigned QW         = $clog2(TQ_DEPTH);

  // ---------------------------------------------------------------------
  // Circular buffers, one per channel
  // ---------------------------------------------------------------------
  logic [AW-1:0]     wa;
  logic [AW-1:0]     ra;
  logic [1:0]        rd_ch;
  logic [NCH-1:0][LINE_W-1:0] mem_q;

  always_ff @(posedge clk) begin
    if (rst) wa <= '0;
    else     wa <= (wa == AW'(DEPTH - 1)) ? '0 : wa + 1'b1;
  end

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic [LINE_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      mem[wa]  <= adc[c];
      mem_q[c] <= mem[ra];
    end
  end

  // ---------------------------------------------------------------------
  // Trigger queue
  // ---------------------------------------------------------------------
  trig_t           tq [TQ_DEPTH];
  logic [QW:0]     tq_wp, tq_rp;
  logic            tq_full, tq_empty, tq_push, tq_pop;
  trig_t           tq_in;

  assign tq_full  = (tq_wp[QW] != tq_rp[QW]) && (tq_wp[QW-1:0] == tq_rp[QW-1:0]);
  assign tq_empty = (tq_wp == tq_rp);
  always_comb begin
    tq_in        = self_trig ? loc_trig : ext_trig;
    tq_in.chmask = tq_in.chmask & ch_enable;
    tq_push      = (self_trig ? loc_valid : ext_valid) && (tq_in.chmask != '0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      tq_wp      <= '0;
      drop_queue <= '0;
    end else if (tq_push) begin
      if (tq_full) drop_queue <= drop_queue + 1'b1;
      else begin
        tq[tq_wp[QW-1:0]] <= tq_in;
        tq_wp             <= tq_wp + 1'b1;
      end
    end
  end

  // ---------------------------------------------------------------------
  // Readout sequencer
  // ---------------------------------------------------------------------
  typedef enum logic [2:0] {R_IDLE, R_NEXT, R_PRIME, R_STREAM, R_WAIT} rstate_t;
  rstate_t rstate;

  logic [NCH-1:0]     cur_mask;
  logic [TS_BITS-1:0] cur_ts;
  logic [15:0]        trig_cnt;
  logic [TS_BITS-1:0] age;
  logic [1:0]         next_ch;
  logic [AW-1:0]      start_addr;
  logic               pk_start;
  logic               pk_start_ready;
  logic [$clog2(WAVE_LINES+1)-1:0] lines_left;
  logic [LINE_W-1:0]  line_buf;
  logic [2:0]         widx;
  logic               line_valid;
  logic               wf_ready;
  logic [15:0]        wf_data;

  assign tq_pop = (rstate == R_IDLE) && !tq_empty;
  assign age    = ts_now - cur_ts;

  always_comb begin
    next_ch = '0;
    for (int c = NCH - 1; c >= 0; c--) if (cur_mask[c]) next_ch = 2'(c);
  end

  // Buffer address of the line with timestamp cur_ts: the line written in
  // this clock is at wa and has timestamp ts_now.
  always_comb begin
    logic [AW:0] diff;
    diff = {1'b0, wa} - (AW+1)'(age[AW-1:0]);
    start_addr = diff[AW] ? AW'(diff + (AW+1)'(DEPTH)) : diff[AW-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rstate     <= R_IDLE;
      tq_rp      <= '0;
      cur_mask   <= '0;
      cur_ts     <= '0;
      trig_cnt   <= '0;
      rd_ch      <= '0;
      ra         <= '0;
      pk_start   <= 1'b0;
      lines_left <= '0;
      line_buf   <= '0;
      widx       <= '0;
      line_valid <= 1'b0;
      pkt_count  <= '0;
      drop_room  <= '0;
      drop_late  <= '0;
    end else begin
      pk_start <= 1'b0;
      unique case (rstate)
        R_IDLE: if (tq_pop) begin
          cur_mask <= tq[tq_rp[QW-1:0]].chmask;
          cur_ts   <= tq[tq_rp[QW-1:0]].ts;
          tq_rp    <= tq_rp + 1'b1;
          trig_cnt <= trig_cnt + 1'b1;
          rstate   <= R_NEXT;
        end
        R_NEXT: begin
          if (cur_mask == '0) rstate <= R_IDLE;
          else if (pk_start_ready) begin
            cur_mask[next_ch] <= 1'b0;
            if (age == '0 || age > TS_BITS'(MAX_AGE)) begin
              drop_late <= drop_late + 1'b1;
            end else if (room_words < 32'(HDR_WORDS + WAVE_LEN + TRL_WORDS)) begin
              drop_room <= drop_room + 1'b1;
            end else begin
              rd_ch      <= next_ch;
              ra         <= start_addr;
              pk_start   <= 1'b1;
              lines_left <= ($clog2(WAVE_LINES+1))'(WAVE_LINES);
              pkt_count  <= pkt_count + 1'b1;
              rstate     <= R_PRIME;
            end
          end
        end
        // Two clocks for the first line to reach mem_q.
        R_PRIME: rstate <= R_STREAM;
        R_STREAM: begin
          if (!line_valid) begin
            line_buf   <= mem_q[rd_ch];
            line_valid <= 1'b1;
            widx       <= '0;
            ra         <= (ra == AW'(DEPTH - 1)) ? '0 : ra + 1'b1;
            lines_left <= lines_left - 1'b1;
          end else if (wf_ready) begin
            widx <= widx + 1'b1;
            if (widx == 3'(SAMPLES_PER_CLK - 1)) begin
              if (lines_left == '0) begin
                line_valid <= 1'b0;
                rstate     <= R_WAIT;
              end else begin
                line_buf   <= mem_q[rd_ch];
                ra         <= (ra == AW'(DEPTH - 1)) ? '0 : ra + 1'b1;
                lines_left <= lines_left - 1'b1;
              end
            end
          end
          // The packager has taken all WAVE_LEN samples (WAVE_LEN need not
          // fill the last line).
          if (pk_start_ready && !pk_start) begin
            line_valid <= 1'b0;
            rstate     <= R_NEXT;
          end
        end
        R_WAIT: if (pk_start_ready) rstate <= R_NEXT;
        default: rstate <= R_IDLE;
      endcase
    end
  end

  assign wf_data = 16'(line_buf[widx*ADC_BITS +: ADC_BITS]);

  event_packager #(.WAVE_LEN(WAVE_LEN), .FW_VER(FW_VER)) u_pkg (
    .clk, .rst,
    .start_valid    (pk_start),
    .start_ready    (pk_start_ready),
    .start_ch       (16'(rd_ch)),
    .start_ts       (cur_ts),
    .start_trig_cnt (trig_cnt),
    .gcu_id,
    .wf_valid       (line_valid && rstate == R_STREAM),
    .wf_ready,
    .wf_data,
    .out_valid, .out_ready, .out_data, .out_sop, .out_eop
  );

endmodule
