// trigger_manager: IPbus register slave holding the acquisition settings.
//
// Registers (word offsets):
//   0  CTRL       bit 0 L1 self-triggering mode (0 = external, validated
//                 triggers from the back end); bits 3:1 channel enables;
//                 bit 4 DDR3 self-triggered recording enable
//   1..3          local trigger threshold of channel 0..2 (14 bits)
//   4  GCU_ID     16-bit board identifier written into every trailer
//   5  FW_VER     firmware version (read only)
//   6  TS_LO      current timestamp bits 31:0 (read only, sampled)
//   7  TS_HI      current timestamp bits 47:32 (read only, sampled)
// Unused offsets and writes to read-only registers answer with err.
//
// That the trigger settings and the L1 mode are programmed over IPbus follows
// the paper; the register map and reset values are this design's (reset:
// external trigger mode, all channels and DDR3 recording enabled, thresholds
// at mid-scale, GCU ID 0).
//
// Clocking: registers live on the IPbus clock. The settings are static during
// a run and are re-timed into the system clock by the user (gcu_top) with a
// two-flop stage; ts_now is sampled from the system clock domain while it
// changes, so TS_LO/TS_HI are for monitoring only.
module trigger_manager
  import gcu_pkg::*;
#(
  parameter logic [15:0] FW_VER = FW_VERSION
) (
  input  logic                         ipb_clk,
  input  logic                         ipb_rst,
  input  ipb_wbus_t                    ipb_in,
  output ipb_rbus_t                    ipb_out,
  input  logic [TS_BITS-1:0]           ts_now,
  output logic                         self_trig,
  output logic [NCH-1:0]               ch_enable,
  output logic                         ddr3_enable,
  output logic [NCH-1:0][ADC_BITS-1:0] threshold,
  output logic [15:0]                  gcu_id
);

  logic        ack_q, err_q, new_tr;
  logic [31:0] rdata_q;
  logic [2:0]  a;

  assign new_tr = ipb_in.strobe && !ack_q && !err_q;
  assign a      = ipb_in.addr[2:0];

  always_ff @(posedge ipb_clk) begin
    if (ipb_rst) begin
      self_trig   <= 1'b0;
      ch_enable   <= '1;
      ddr3_enable <= 1'b1;
      threshold   <= {NCH{ADC_BITS'(1 << (ADC_BITS - 1))}};
      gcu_id      <= '0;
      ack_q       <= 1'b0;
      err_q       <= 1'b0;
      rdata_q     <= '0;
    end else begin
      ack_q <= 1'b0;
      err_q <= 1'b0;
      if (new_tr) begin
        ack_q <= 1'b1;
        if (ipb_in.write) begin
          unique case (a)
            3'd0: {ddr3_enable, ch_enable, self_trig} <= ipb_in.wdata[4:0];
            3'd1, 3'd2, 3'd3: threshold[a - 3'd1] <= ipb_in.wdata[ADC_BITS-1:0];
            3'd4: gcu_id <= ipb_in.wdata[15:0];
            default: begin ack_q <= 1'b0; err_q <= 1'b1; end
          endcase
        end else begin
          unique case (a)
            3'd0: rdata_q <= 32'({ddr3_enable, ch_enable, self_trig});
            3'd1, 3'd2, 3'd3: rdata_q <= 32'(threshold[a - 3'd1]);
            3'd4: rdata_q <= 32'(gcu_id);
            3'd5: rdata_q <= 32'(FW_VER);
            3'd6: rdata_q <= ts_now[31:0];
            default: rdata_q <= 32'(ts_now[47:32]);
          endcase
        end
      end
    end
  end

  assign ipb_out = '{rdata: rdata_q, ack: ack_q, err: err_q};

endmodule
