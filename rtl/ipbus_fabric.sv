// ipbus_fabric: routes IPbus transactions from the bus master to its slaves.
//
// The address is split into a slave select field, SEL_BITS wide starting at
// bit SEL_LSB, and an offset inside the slave below it. The strobe is passed
// only to the selected slave; all slaves see address and data. The selected
// slave's read data, ack and err go back to the master. A select value with
// no slave behind it is answered by the fabric itself with err, one clock
// after the strobe, so the master never waits forever.
//
// The paper's firmware core contains a bus master serving several slaves
// whose addresses are defined in a map file; this fabric is the simplest
// decoder that does that, with a fixed field instead of a map file.
//
// Timing: combinational between master and slaves, apart from the err answer
// for unmapped addresses.
module ipbus_fabric
  import gcu_pkg::*;
#(
  parameter int unsigned NSLV     = 3,
  parameter int unsigned SEL_LSB  = 4,
  parameter int unsigned SEL_BITS = 4
) (
  input  logic                 ipb_clk,
  input  logic                 ipb_rst,
  input  ipb_wbus_t            ipb_in,
  output ipb_rbus_t            ipb_out,
  output ipb_wbus_t [NSLV-1:0] ipb_to_slaves,
  input  ipb_rbus_t [NSLV-1:0] ipb_from_slaves
);

  logic [SEL_BITS-1:0] sel;
  logic                hit;
  logic                miss_err;

  assign sel = ipb_in.addr[SEL_LSB +: SEL_BITS];
  assign hit = 32'(sel) < NSLV;

  always_comb begin
    for (int i = 0; i < NSLV; i++) begin
      ipb_to_slaves[i]        = ipb_in;
      ipb_to_slaves[i].strobe = ipb_in.strobe && hit && 32'(sel) == i;
    end
    ipb_out = IPB_RBUS_NULL;
    if (hit) ipb_out = ipb_from_slaves[sel];
    else     ipb_out.err = miss_err;
  end

  always_ff @(posedge ipb_clk) begin
    if (ipb_rst) miss_err <= 1'b0;
    else         miss_err <= ipb_in.strobe && !hit && !miss_err;
  end

endmodule
