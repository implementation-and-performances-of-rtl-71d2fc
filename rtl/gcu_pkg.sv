// gcu_pkg: constants and types shared by the GCU readout firmware.
//
// The event packet carried over the asynchronous link is a sequence of 16-bit
// words: an 8-word header, the waveform (1000 ADC samples, one word each) and
// an 8-word trailer. The fixed header and trailer words below are the ones the
// packet format defines; the firmware version default, the word order of the
// 48-bit timestamp (most significant word first) and the 14-bit sample held in
// the low bits of a 16-bit word are choices of this implementation.
//
// The IPbus slave interface is the usual IPbus one: the master drives address,
// write data, strobe and write; the slave answers with read data, ack and err.
// It is modelled here as two packed structs so it can cross module ports as a
// plain signal bundle.
//
// PKT_WORDS (1016) is the packet length for the default window; it is meant
// for the consumers of the packet stream. The RTL itself derives the length
// from its WAVE_LEN parameter, so lint reports PKT_WORDS as unused.
package gcu_pkg;

  // ---------------------------------------------------------------------
  // Sampling and timing
  // ---------------------------------------------------------------------
  localparam int unsigned NCH            = 3;     // PMT channels per GCU
  localparam int unsigned ADC_BITS       = 14;    // FADC resolution
  localparam int unsigned SAMPLES_PER_CLK = 8;    // 1 GS/s on a 125 MHz (8 ns) clock
  localparam int unsigned TS_BITS        = 48;    // timestamp width, units of 8 ns
  localparam int unsigned WORD_BITS      = 16;    // packet word
  localparam int unsigned LINE_BITS      = SAMPLES_PER_CLK * WORD_BITS; // 128

  // ---------------------------------------------------------------------
  // Packet format
  // ---------------------------------------------------------------------
  localparam int unsigned HDR_WORDS      = 8;
  localparam int unsigned TRL_WORDS      = 8;
  localparam int unsigned WAVE_SAMPLES   = 1000;  // 1 us at 1 GS/s
  localparam int unsigned PKT_WORDS      = HDR_WORDS + WAVE_SAMPLES + TRL_WORDS; // 1016

  localparam logic [15:0] HDR_START      = 16'h805a;
  localparam logic [15:0] FW_VERSION     = 16'h0022;
  localparam logic [15:0] TRL_SEQ0       = 16'h55aa;
  localparam logic [15:0] TRL_SEQ1       = 16'h0123;
  localparam logic [15:0] TRL_SEQ2       = 16'h4567;
  localparam logic [15:0] TRL_SEQ3       = 16'h89ab;
  localparam logic [15:0] TRL_SEQ4       = 16'hcdef;
  localparam logic [15:0] TRL_SEQ5       = 16'hff00;
  localparam logic [15:0] TRL_END        = 16'h0869;

  // Packet size field: whole packet in units of 8 words.
  function automatic logic [15:0] pkt_size_field(input int unsigned wave_samples);
    return 16'((HDR_WORDS + wave_samples + TRL_WORDS) / 8);
  endfunction

  // ---------------------------------------------------------------------
  // IPbus slave bus
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic [31:0] addr;
    logic [31:0] wdata;
    logic        strobe;
    logic        write;
  } ipb_wbus_t;

  typedef struct packed {
    logic [31:0] rdata;
    logic        ack;
    logic        err;
  } ipb_rbus_t;

  localparam ipb_rbus_t IPB_RBUS_NULL = '{rdata: 32'h0, ack: 1'b0, err: 1'b0};

  // ---------------------------------------------------------------------
  // Trigger
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic [NCH-1:0]     chmask;  // channels to read out
    logic [TS_BITS-1:0] ts;      // first sample of the window, 8 ns units
  } trig_t;

endpackage
