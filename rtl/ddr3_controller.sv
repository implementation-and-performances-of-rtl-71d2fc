// ddr3_controller: DDR3 circular buffer for self-triggered packets.
//
// Packets (16-bit words) from the DDR3 packager are packed eight at a time
// into 128-bit lines and written to consecutive line addresses of the DDR3,
// which is used as a circular buffer of LINES lines (2 GB by default). When
// the DAQ requests the content (rd_req_toggle changes), writing is blocked at
// the next packet boundary, the stored lines are read back in order and
// pushed into the readout FIFO of the DDR3 IPbus DAQ slave, and once the
// memory and that FIFO are both empty writing restarts by itself.
//
// The circular addressing, the blocking of writes during a readout and the
// automatic restart follow the paper. The paper does not say what happens
// when the buffer fills: here a new packet that does not fit is refused
// (room_words reads 0 while blocked, otherwise the free space in 16-bit
// words, and the packager drops what does not fit). The memory port is a
// simplified DDR3 controller user port in the style of a vendor memory
// interface: one command per clock when app_rdy (and, for writes,
// app_wdf_rdy) is high, write data given with the write command, read data
// returned in order with app_rd_data_valid after any latency.
//
// fifo_wr_data is app_rd_data passed straight through (the readout FIFO
// stores lines unchanged), so synthesis counts those outputs as wired to an
// input.
//
// Clocking: everything runs on clk. rd_req_toggle comes from the IPbus clock
// domain and is synchronised here; busy and the FIFO write port go back to
// the slave, whose own FIFO handles the crossing.
module ddr3_controller
  import gcu_pkg::*;
#(
  parameter int unsigned LINE_AW = 27,   // 2^27 lines x 16 bytes = 2 GB
  parameter int unsigned FIFO_AW = 9     // readout FIFO, lines
) (
  input  logic                 clk,
  input  logic                 rst,
  // packet stream in
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [15:0]          in_data,
  input  logic                 in_sop,
  input  logic                 in_eop,
  output logic [31:0]          room_words,
  // readout control
  input  logic                 rd_req_toggle,
  output logic                 busy,
  output logic                 fifo_wr_en,
  output logic [LINE_BITS-1:0] fifo_wr_data,
  input  logic [FIFO_AW:0]     fifo_wr_free,
  // memory user port
  output logic                 app_en,
  output logic                 app_cmd,      // 0 write, 1 read
  output logic [LINE_AW-1:0]   app_addr,
  input  logic                 app_rdy,
  output logic [LINE_BITS-1:0] app_wdf_data,
  output logic                 app_wdf_wren,
  input  logic                 app_wdf_rdy,
  input  logic [LINE_BITS-1:0] app_rd_data,
  input  logic                 app_rd_data_valid,
  // statistics
  output logic [31:0]          lines_used
);

  localparam logic [LINE_AW:0] LINES = (LINE_AW+1)'(1) << LINE_AW;

  logic [LINE_AW:0] wr_ptr, rd_ptr;       // one extra bit: full vs empty
  logic [LINE_AW:0] used;
  logic [2:0]       widx;
  logic [LINE_BITS-17:0] acc;      // words 0..6 of the line being built
  logic [LINE_BITS-1:0]  line_q;
  logic             line_pending;
  logic             in_pkt;
  logic             blocked;
  logic [FIFO_AW:0] outstanding;
  logic             req_s1, req_s2, req_s3;
  logic             issue_wr, issue_rd;
  logic             take;

  typedef enum logic [1:0] {M_WRITE, M_DRAIN, M_READ, M_FLUSH} mode_t;
  mode_t mode;

  assign used       = wr_ptr - rd_ptr;
  assign lines_used = 32'(used);
  assign busy       = (mode != M_WRITE);

  // Free space in words, counting the line being packed and a pending line.
  always_comb begin
    logic [LINE_AW+4:0] free_w;
    free_w = ((LINE_AW+5)'(LINES) - (LINE_AW+5)'(used) - (LINE_AW+5)'(line_pending)) * 8
             - (LINE_AW+5)'(widx);
    if (blocked)                   room_words = '0;
    else if (|(free_w >> 32))      room_words = 32'hffff_ffff;
    else                           room_words = 32'(free_w);
  end

  // ---------------- packing ----------------
  assign issue_wr = line_pending && app_rdy && app_wdf_rdy && mode != M_READ;
  assign in_ready = !(line_pending && widx == 3'd7 && !issue_wr);
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      widx         <= '0;
      acc          <= '0;
      line_q       <= '0;
      line_pending <= 1'b0;
      in_pkt       <= 1'b0;
    end else begin
      if (issue_wr) line_pending <= 1'b0;
      if (take) begin
        if (widx != 3'd7) acc[widx*16 +: 16] <= in_data;
        widx <= widx + 1'b1;
        if (in_sop) in_pkt <= 1'b1;
        if (in_eop) in_pkt <= 1'b0;
        if (widx == 3'd7) begin
          line_q       <= {in_data, acc};
          line_pending <= 1'b1;
        end
      end
    end
  end

  // ---------------- command issue ----------------
  assign issue_rd = (mode == M_READ) && app_rdy && (rd_ptr != wr_ptr)
                    && ((FIFO_AW+1)'(outstanding) < fifo_wr_free);

  always_comb begin
    app_en       = issue_wr || issue_rd;
    app_cmd      = issue_rd;
    app_addr     = issue_rd ? rd_ptr[LINE_AW-1:0] : wr_ptr[LINE_AW-1:0];
    app_wdf_data = line_q;
    app_wdf_wren = issue_wr;
  end

  assign fifo_wr_en   = app_rd_data_valid;
  assign fifo_wr_data = app_rd_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr      <= '0;
      rd_ptr      <= '0;
      mode        <= M_WRITE;
      blocked     <= 1'b0;
      outstanding <= '0;
      req_s1      <= 1'b0;
      req_s2      <= 1'b0;
      req_s3      <= 1'b0;
    end else begin
      req_s1 <= rd_req_toggle;
      req_s2 <= req_s1;
      req_s3 <= req_s2;
      if (issue_wr) wr_ptr <= wr_ptr + 1'b1;
      if (issue_rd) rd_ptr <= rd_ptr + 1'b1;
      outstanding <= outstanding + (FIFO_AW+1)'(issue_rd) - (FIFO_AW+1)'(app_rd_data_valid);
      unique case (mode)
        M_WRITE: if (req_s2 != req_s3) begin
          blocked <= 1'b1;
          mode    <= M_DRAIN;
        end
        // Let the packet in progress finish and its last line reach memory.
        M_DRAIN: if (!in_pkt && !(take && in_sop) && !line_pending && widx == 3'd0)
          mode <= M_READ;
        M_READ: if (rd_ptr == wr_ptr && outstanding == '0) mode <= M_FLUSH;
        // Restart once the readout FIFO has been emptied by the DAQ.
        M_FLUSH: if (fifo_wr_free == (FIFO_AW+1)'(1 << FIFO_AW)) begin
          blocked <= 1'b0;
          mode    <= M_WRITE;
        end
        default: mode <= M_WRITE;
      endcase
    end
  end

  // The circular buffer never holds more than LINES lines.
  assert property (@(posedge clk) disable iff (rst) used <= LINES);

endmodule
