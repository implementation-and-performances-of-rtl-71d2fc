// gcu_top: firmware of one Global Control Unit (three PMT channels).
//
// Kintex-7 part, on the 125 MHz system clock: the FADC lines of the three
// channels go at the same time to the trigger generator, to the L1 cache and
// to the DDR3 packager.
//  * The trigger generator tags every line with a 48-bit timestamp (8 ns)
//    and sends threshold-crossing requests to the back end (trig_req_*), to
//    the L1 cache (used in self-triggering mode) and to the DDR3 packager.
//  * The L1 cache keeps 32 us per channel. On a validated trigger from the
//    back end (ext_trig_*), or on a local one in self-triggering mode, it
//    packs 1 us of each requested channel into a packet and pushes it into
//    the IPbus DAQ funnel FIFO (2^13 bytes, all channels).
//  * The DDR3 packager (a second cache/packager instance, always
//    self-triggered, with a 16 us buffer) feeds the DDR3 controller, which
//    records packets in the external 2 GB DDR3 as a circular buffer until
//    the DAQ asks, over IPbus, for the content.
//  * An IPbus fabric gives the IPbus master access to three slaves:
//    select 0 trigger manager (settings), 1 IPbus DAQ, 2 DDR3 IPbus DAQ.
// Spartan-6 part, on its own IPbus clock: a second fabric with an I2C slave
// for the MAC-address EEPROM (select 0) and a virtual JTAG slave driving the
// Kintex-7 JTAG pins (select 1).
//
// Not inside this module, brought out as ports: the FADCs, the synchronous
// link to the back-end card (timestamp load, trigger requests, validated
// triggers), the IPbus protocol engines and Ethernet MACs that act as IPbus
// masters in each FPGA, the DDR3 memory controller's physical side, the
// EEPROM pins and the Kintex-7 JTAG pins.
//
// ddr3_lines_used is a 32-bit counter of a 2^27-line ring, so its top four
// bits are always zero.
//
// The IPbus address of a register is {select, offset}: select in bits 7:4,
// offset in bits 3:0. The block structure follows the paper; the address
// map, clocking and the DDR3 packager's buffer depth are this design's.
module gcu_top
  import gcu_pkg::*;
#(
  parameter int unsigned L1_DEPTH      = 4000,  // lines: 32 us
  parameter int unsigned DDR3_PK_DEPTH = 2048,  // lines: 16.4 us
  parameter int unsigned WAVE_LEN      = WAVE_SAMPLES,
  parameter int unsigned DAQ_FIFO_AW   = 11,    // 2048 x 32 bit = 2^13 bytes
  parameter int unsigned DDR3_LINE_AW  = 27,    // 2 GB in 16-byte lines
  parameter int unsigned DDR3_FIFO_AW  = 9,
  parameter logic [15:0] FW_VER        = FW_VERSION
) (
  // Kintex-7 clocks and resets
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 ipb_clk,
  input  logic                 ipb_rst,
  // FADC lines
  input  logic [NCH-1:0][SAMPLES_PER_CLK-1:0][ADC_BITS-1:0] adc,
  // synchronous link
  input  logic                 ts_load,
  input  logic [TS_BITS-1:0]   ts_load_value,
  output logic                 trig_req_valid,
  output trig_t                trig_req,
  input  logic                 ext_trig_valid,
  input  trig_t                ext_trig,
  // Kintex-7 IPbus master
  input  ipb_wbus_t            ipb_in,
  output ipb_rbus_t            ipb_out,
  // DDR3 user port
  output logic                 app_en,
  output logic                 app_cmd,
  output logic [DDR3_LINE_AW-1:0] app_addr,
  input  logic                 app_rdy,
  output logic [LINE_BITS-1:0] app_wdf_data,
  output logic                 app_wdf_wren,
  input  logic                 app_wdf_rdy,
  input  logic [LINE_BITS-1:0] app_rd_data,
  input  logic                 app_rd_data_valid,
  // Spartan-6 IPbus master
  input  logic                 s6_ipb_clk,
  input  logic                 s6_ipb_rst,
  input  ipb_wbus_t            s6_ipb_in,
  output ipb_rbus_t            s6_ipb_out,
  // EEPROM I2C, open drain
  output logic                 scl_oe,
  input  logic                 scl_i,
  output logic                 sda_oe,
  input  logic                 sda_i,
  // Kintex-7 JTAG
  output logic                 jtag_tck,
  output logic                 jtag_tms,
  output logic                 jtag_tdi,
  input  logic                 jtag_tdo,
  // statistics (system clock)
  output logic [31:0]          l1_pkt_count,
  output logic [31:0]          l1_drop_queue,
  output logic [31:0]          l1_drop_room,
  output logic [31:0]          l1_drop_late,
  output logic [31:0]          ddr3_pkt_count,
  output logic [31:0]          ddr3_drop_room,
  output logic [31:0]          ddr3_lines_used
);

  // ---------------------------------------------------------------------
  // IPbus fabric and settings
  // ---------------------------------------------------------------------
  ipb_wbus_t [2:0] k7_w;
  ipb_rbus_t [2:0] k7_r;

  ipbus_fabric #(.NSLV(3)) u_k7_fabric (
    .ipb_clk, .ipb_rst, .ipb_in, .ipb_out,
    .ipb_to_slaves (k7_w), .ipb_from_slaves (k7_r)
  );

  logic [TS_BITS-1:0]           ts_now;
  logic                         self_trig_i, ddr3_en_i, self_trig, ddr3_en;
  logic [NCH-1:0]               ch_en_i, ch_en;
  logic [NCH-1:0][ADC_BITS-1:0] thr_i, thr;
  logic [15:0]                  gcu_id_i, gcu_id;

  trigger_manager #(.FW_VER(FW_VER)) u_trig_mgr (
    .ipb_clk, .ipb_rst, .ipb_in (k7_w[0]), .ipb_out (k7_r[0]),
    .ts_now,
    .self_trig (self_trig_i), .ch_enable (ch_en_i), .ddr3_enable (ddr3_en_i),
    .threshold (thr_i), .gcu_id (gcu_id_i)
  );

  cdc_sync #(.WIDTH(2 + NCH + NCH*ADC_BITS + 16)) u_cfg_sync (
    .clk,
    .d ({self_trig_i, ddr3_en_i, ch_en_i, thr_i, gcu_id_i}),
    .q ({self_trig,   ddr3_en,   ch_en,   thr,   gcu_id})
  );

  // ---------------------------------------------------------------------
  // Trigger generator
  // ---------------------------------------------------------------------
  trigger_generator #(.HOLDOFF((WAVE_LEN + SAMPLES_PER_CLK - 1) / SAMPLES_PER_CLK)) u_trig_gen (
    .clk, .rst, .adc, .threshold (thr), .ch_enable (ch_en),
    .ts_load, .ts_load_value, .ts_now,
    .trig_valid (trig_req_valid), .trig (trig_req)
  );

  // ---------------------------------------------------------------------
  // L1 cache -> IPbus DAQ
  // ---------------------------------------------------------------------
  logic        l1_valid, l1_ready, l1_sop, l1_eop;
  logic [15:0] l1_data;
  logic [31:0] daq_room;

  l1_cache #(.DEPTH(L1_DEPTH), .WAVE_LEN(WAVE_LEN), .FW_VER(FW_VER)) u_l1 (
    .clk, .rst, .adc, .ts_now,
    .self_trig, .ch_enable (ch_en), .gcu_id,
    .ext_valid (ext_trig_valid), .ext_trig,
    .loc_valid (trig_req_valid), .loc_trig (trig_req),
    .room_words (daq_room),
    .out_valid (l1_valid), .out_ready (l1_ready), .out_data (l1_data),
    .out_sop (l1_sop), .out_eop (l1_eop),
    .pkt_count (l1_pkt_count), .drop_queue (l1_drop_queue),
    .drop_room (l1_drop_room), .drop_late (l1_drop_late)
  );

  ipbus_daq #(.AW(DAQ_FIFO_AW)) u_daq (
    .clk, .rst,
    .in_valid (l1_valid), .in_ready (l1_ready), .in_data (l1_data),
    .in_sop (l1_sop), .in_eop (l1_eop),
    .room_words (daq_room),
    .ipb_clk, .ipb_rst, .ipb_in (k7_w[1]), .ipb_out (k7_r[1])
  );

  // ---------------------------------------------------------------------
  // DDR3 packager -> DDR3 controller -> DDR3 IPbus DAQ
  // ---------------------------------------------------------------------
  logic        d3_valid, d3_ready, d3_sop, d3_eop;
  logic [15:0] d3_data;
  logic [31:0] d3_room;
  logic [31:0] d3_drop_queue_unused, d3_drop_late_unused;
  logic        d3_rd_req_toggle, d3_busy, d3_fifo_wr_en;
  logic [LINE_BITS-1:0] d3_fifo_wr_data;
  logic [DDR3_FIFO_AW:0] d3_fifo_wr_free;

  l1_cache #(.DEPTH(DDR3_PK_DEPTH), .WAVE_LEN(WAVE_LEN), .FW_VER(FW_VER)) u_ddr3_pk (
    .clk, .rst, .adc, .ts_now,
    .self_trig (1'b1), .ch_enable (ddr3_en ? ch_en : '0), .gcu_id,
    .ext_valid (1'b0), .ext_trig ('0),
    .loc_valid (trig_req_valid), .loc_trig (trig_req),
    .room_words (d3_room),
    .out_valid (d3_valid), .out_ready (d3_ready), .out_data (d3_data),
    .out_sop (d3_sop), .out_eop (d3_eop),
    .pkt_count (ddr3_pkt_count), .drop_queue (d3_drop_queue_unused),
    .drop_room (ddr3_drop_room), .drop_late (d3_drop_late_unused)
  );

  ddr3_controller #(.LINE_AW(DDR3_LINE_AW), .FIFO_AW(DDR3_FIFO_AW)) u_ddr3_ctrl (
    .clk, .rst,
    .in_valid (d3_valid), .in_ready (d3_ready), .in_data (d3_data),
    .in_sop (d3_sop), .in_eop (d3_eop), .room_words (d3_room),
    .rd_req_toggle (d3_rd_req_toggle), .busy (d3_busy),
    .fifo_wr_en (d3_fifo_wr_en), .fifo_wr_data (d3_fifo_wr_data),
    .fifo_wr_free (d3_fifo_wr_free),
    .app_en, .app_cmd, .app_addr, .app_rdy, .app_wdf_data, .app_wdf_wren,
    .app_wdf_rdy, .app_rd_data, .app_rd_data_valid,
    .lines_used (ddr3_lines_used)
  );

  ddr3_ipbus_daq #(.FIFO_AW(DDR3_FIFO_AW)) u_ddr3_daq (
    .clk, .rst,
    .fifo_wr_en (d3_fifo_wr_en), .fifo_wr_data (d3_fifo_wr_data),
    .fifo_wr_free (d3_fifo_wr_free),
    .rd_req_toggle (d3_rd_req_toggle), .busy (d3_busy),
    .ipb_clk, .ipb_rst, .ipb_in (k7_w[2]), .ipb_out (k7_r[2])
  );

  // ---------------------------------------------------------------------
  // Spartan-6: I2C EEPROM and virtual JTAG slaves
  // ---------------------------------------------------------------------
  ipb_wbus_t [1:0] s6_w;
  ipb_rbus_t [1:0] s6_r;

  ipbus_fabric #(.NSLV(2)) u_s6_fabric (
    .ipb_clk (s6_ipb_clk), .ipb_rst (s6_ipb_rst),
    .ipb_in (s6_ipb_in), .ipb_out (s6_ipb_out),
    .ipb_to_slaves (s6_w), .ipb_from_slaves (s6_r)
  );

  i2c_ipbus u_i2c (
    .ipb_clk (s6_ipb_clk), .ipb_rst (s6_ipb_rst),
    .ipb_in (s6_w[0]), .ipb_out (s6_r[0]),
    .scl_oe, .scl_i, .sda_oe, .sda_i
  );

  vjtag_ipbus u_vjtag (
    .ipb_clk (s6_ipb_clk), .ipb_rst (s6_ipb_rst),
    .ipb_in (s6_w[1]), .ipb_out (s6_r[1]),
    .tck (jtag_tck), .tms (jtag_tms), .tdi (jtag_tdi), .tdo (jtag_tdo)
  );

endmodule
