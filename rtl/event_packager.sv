// event_packager: wraps one waveform into a readout packet.
//
// The packet is a stream of 16-bit words:
//   header : 0x805a, channel number, packet size, trigger count,
//            firmware version, timestamp[47:32], [31:16], [15:0]
//   data   : WAVE_LEN waveform samples, as they arrive on the wf_* input
//   trailer: 0x55aa 0x0123 0x4567 0x89ab 0xcdef 0xff00, GCU ID, 0x0869
// The packet size field counts the whole packet in units of 8 words.
//
// The header and trailer contents follow the paper's packet format. The
// word order of the 48-bit timestamp (most significant word first, as in the
// paper's example) and the streaming interface are this design's choices.
//
// Interface: a packet starts with a start_valid/start_ready handshake that
// latches channel, timestamp, trigger count and GCU ID. The module then
// drives out_* (valid/ready, with out_sop on the first and out_eop on the
// last word) and pulls exactly WAVE_LEN words from wf_* between header and
// trailer; wf_ready is out_ready during the data phase. Timing: with out_ready
// held high a packet takes WAVE_LEN+16 clocks plus the waveform source's
// stalls; start_ready is high only while idle.
module event_packager
  import gcu_pkg::*;
#(
  parameter int unsigned   WAVE_LEN = WAVE_SAMPLES,
  parameter logic [15:0]   FW_VER   = FW_VERSION
) (
  input  logic               clk,
  input  logic               rst,
  // packet request
  input  logic               start_valid,
  output logic               start_ready,
  input  logic [15:0]        start_ch,
  input  logic [TS_BITS-1:0] start_ts,
  input  logic [15:0]        start_trig_cnt,
  input  logic [15:0]        gcu_id,
  // waveform in
  input  logic               wf_valid,
  output logic               wf_ready,
  input  logic [15:0]        wf_data,
  // packet out
  output logic               out_valid,
  input  logic               out_ready,
  output logic [15:0]        out_data,
  output logic               out_sop,
  output logic               out_eop
);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_WAVE, S_TRL} state_t;
  state_t state;

  logic [$clog2(WAVE_LEN+1)-1:0] cnt;
  logic [2:0]                    idx;
  logic [15:0]                   ch_q, tcnt_q, id_q;
  logic [TS_BITS-1:0]            ts_q;
  logic [15:0]                   hdr_word, trl_word;

  localparam logic [15:0] SIZE_FIELD = 16'((HDR_WORDS + WAVE_LEN + TRL_WORDS) / 8);

  always_comb begin
    unique case (idx)
      3'd0: hdr_word = HDR_START;
      3'd1: hdr_word = ch_q;
      3'd2: hdr_word = SIZE_FIELD;
      3'd3: hdr_word = tcnt_q;
      3'd4: hdr_word = FW_VER;
      3'd5: hdr_word = ts_q[47:32];
      3'd6: hdr_word = ts_q[31:16];
      default: hdr_word = ts_q[15:0];
    endcase
    unique case (idx)
      3'd0: trl_word = TRL_SEQ0;
      3'd1: trl_word = TRL_SEQ1;
      3'd2: trl_word = TRL_SEQ2;
      3'd3: trl_word = TRL_SEQ3;
      3'd4: trl_word = TRL_SEQ4;
      3'd5: trl_word = TRL_SEQ5;
      3'd6: trl_word = id_q;
      default: trl_word = TRL_END;
    endcase
  end

  always_comb begin
    start_ready = (state == S_IDLE);
    wf_ready    = (state == S_WAVE) && out_ready;
    out_valid   = 1'b0;
    out_data    = 16'h0;
    out_sop     = 1'b0;
    out_eop     = 1'b0;
    unique case (state)
      S_HDR:  begin out_valid = 1'b1;     out_data = hdr_word; out_sop = (idx == 3'd0); end
      S_WAVE: begin out_valid = wf_valid; out_data = wf_data;  end
      S_TRL:  begin out_valid = 1'b1;     out_data = trl_word; out_eop = (idx == 3'd7); end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= S_IDLE;
      idx    <= '0;
      cnt    <= '0;
      ch_q   <= '0;
      tcnt_q <= '0;
      id_q   <= '0;
      ts_q   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start_valid) begin
          ch_q   <= start_ch;
          ts_q   <= start_ts;
          tcnt_q <= start_trig_cnt;
          id_q   <= gcu_id;
          idx    <= '0;
          state  <= S_HDR;
        end
        S_HDR: if (out_ready) begin
          idx <= idx + 1'b1;
          if (idx == 3'd7) begin
            cnt   <= '0;
            state <= S_WAVE;
          end
        end
        S_WAVE: if (out_ready && wf_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == ($clog2(WAVE_LEN+1))'(WAVE_LEN - 1)) begin
            idx   <= '0;
            state <= S_TRL;
          end
        end
        S_TRL: if (out_ready) begin
          idx <= idx + 1'b1;
          if (idx == 3'd7) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A word offered on the output stays until it is taken.
  property p_hold;
    @(posedge clk) disable iff (rst)
      (out_valid && !out_ready && state != S_WAVE) |=> out_valid && $stable(out_data);
  endproperty
  assert property (p_hold);

endmodule
