// vjtag_ipbus: virtual JTAG cable, an IPbus slave driving a JTAG port.
//
// The server packs JTAG activity as shift commands (a bit count and the TMS
// and TDI vectors, as the Xilinx Virtual Cable protocol does) and sends them
// over IPbus. This slave plays each command on the JTAG pins of the
// Kintex-7, one bit per TCK period, and records TDO, so that the FPGA can be
// debugged and reprogrammed over Ethernet without a JTAG cable.
//
// Registers (word offsets):
//   0  CTRL/STATUS  write: bits 5:0 = number of bits - 1 (1..32), bit 31 go
//                   read : bit 0 busy
//   1  TMS          TMS vector, bit 0 shifted first
//   2  TDI          TDI vector, bit 0 shifted first
//   3  TDO          TDO vector of the last command, bit 0 first (read only)
// A write to CTRL with go while busy answers err and is ignored.
//
// Per bit: TMS and TDI are set with TCK low, TCK rises after HALF clocks, and
// TDO is sampled on that rising edge (the target changes TDO on the falling
// edge); TCK falls HALF clocks later. A command of n bits thus takes 2*HALF*n
// IPbus clocks. The function (JTAG commands from the network onto a
// dedicated bus to the Kintex-7) follows the paper; the register map, the
// 32-bit command size and TCK timing are this design's.
module vjtag_ipbus
  import gcu_pkg::*;
#(
  parameter int unsigned HALF = 4     // IPbus clocks per TCK half period
) (
  input  logic      ipb_clk,
  input  logic      ipb_rst,
  input  ipb_wbus_t ipb_in,
  output ipb_rbus_t ipb_out,
  output logic      tck,
  output logic      tms,
  output logic      tdi,
  input  logic      tdo
);

  logic [31:0] tms_vec, tdi_vec, tdo_vec;
  logic [5:0]  nbits, bit_idx;
  logic        busy;
  logic [$clog2(HALF+1)-1:0] div;
  logic        ack_q, err_q, new_tr;
  logic [31:0] rdata_q;

  assign new_tr = ipb_in.strobe && !ack_q && !err_q;

  always_ff @(posedge ipb_clk) begin
    if (ipb_rst) begin
      tms_vec <= '0;
      tdi_vec <= '0;
      tdo_vec <= '0;
      nbits   <= '0;
      bit_idx <= '0;
      busy    <= 1'b0;
      div     <= '0;
      tck     <= 1'b0;
      tms     <= 1'b1;
      tdi     <= 1'b0;
      ack_q   <= 1'b0;
      err_q   <= 1'b0;
      rdata_q <= '0;
    end else begin
      ack_q <= 1'b0;
      err_q <= 1'b0;

      // ---- shift engine ----
      if (busy) begin
        if (div != '0) div <= div - 1'b1;
        else begin
          div <= ($clog2(HALF+1))'(HALF - 1);
          if (!tck) begin
            tck              <= 1'b1;
            tdo_vec[bit_idx[4:0]] <= tdo;
          end else begin
            tck <= 1'b0;
            if (bit_idx == nbits) busy <= 1'b0;
            else begin
              bit_idx <= bit_idx + 1'b1;
              tms     <= tms_vec[bit_idx[4:0] + 5'd1];
              tdi     <= tdi_vec[bit_idx[4:0] + 5'd1];
            end
          end
        end
      end

      // ---- IPbus ----
      if (new_tr) begin
        ack_q <= 1'b1;
        unique case (ipb_in.addr[1:0])
          2'd0: if (ipb_in.write) begin
                  if (ipb_in.wdata[31]) begin
                    if (busy) begin ack_q <= 1'b0; err_q <= 1'b1; end
                    else begin
                      nbits   <= ipb_in.wdata[5:0] & 6'h1f;
                      bit_idx <= '0;
                      busy    <= 1'b1;
                      div     <= ($clog2(HALF+1))'(HALF - 1);
                      tms     <= tms_vec[0];
                      tdi     <= tdi_vec[0];
                      tdo_vec <= '0;
                    end
                  end
                end else rdata_q <= 32'(busy);
          2'd1: if (ipb_in.write) tms_vec <= ipb_in.wdata; else rdata_q <= tms_vec;
          2'd2: if (ipb_in.write) tdi_vec <= ipb_in.wdata; else rdata_q <= tdi_vec;
          default: if (ipb_in.write) begin ack_q <= 1'b0; err_q <= 1'b1; end
                   else rdata_q <= tdo_vec;
        endcase
      end
    end
  end

  assign ipb_out = '{rdata: rdata_q, ack: ack_q, err: err_q};

endmodule
