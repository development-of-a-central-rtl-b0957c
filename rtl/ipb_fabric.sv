// ipb_fabric: IPBus address decoder connecting one master to the slaves of the test firmware.
//
// Address bits [7:6] select the slave; the slave sees the whole address and decodes the low
// bits itself. Only the selected slave sees the strobe, and its read bus is returned. A strobe
// to a slave number with no slave, or with any address bit above bit 7 set, is answered with
// err one cycle later. This is the usual IPBus fabric function, reduced to a fixed decode.
module ipb_fabric
  import ipbus_pkg::*;
#(
  parameter int unsigned NSLV = N_SLAVES
) (
  input  logic      clk,
  input  logic      rst,
  input  ipb_wbus_t ipb_in,
  output ipb_rbus_t ipb_out,
  output ipb_wbus_t ipb_to_slaves   [NSLV],
  input  ipb_rbus_t ipb_from_slaves [NSLV]
);

  logic [1:0] sel;
  logic       valid_sel, miss_q;

  assign sel       = ipb_in.ipb_addr[7:6];
  assign valid_sel = (32'(sel) < NSLV) && (ipb_in.ipb_addr[31:8] == '0);

  always_comb begin
    for (int s = 0; s < NSLV; s++) begin
      ipb_to_slaves[s]            = ipb_in;
      ipb_to_slaves[s].ipb_strobe = ipb_in.ipb_strobe && valid_sel && (32'(sel) == s);
    end
    ipb_out = IPB_RBUS_NULL;
    for (int s = 0; s < NSLV; s++)
      if (32'(sel) == s) ipb_out = ipb_from_slaves[s];
    if (!valid_sel) ipb_out = '{ipb_rdata: '0, ipb_ack: 1'b0, ipb_err: miss_q};
  end

  always_ff @(posedge clk) begin
    if (rst) miss_q <= 1'b0;
    else     miss_q <= ipb_in.ipb_strobe && !valid_sel && !miss_q;
  end

endmodule
