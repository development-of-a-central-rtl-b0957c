// ipb_master_bfm: IPBus master model for the testbenches, standing in for the IPBus protocol
// core and the host software behind it.
//
// write() and read() run one transaction: drive address, data, write and strobe after a
// falling clock edge, wait for ack or err (sampled at rising edges), then drop the strobe for
// one cycle. A transaction that sees neither within 100 cycles returns timeout. Transaction
// counts are kept for the testbenches' statistics.
module ipb_master_bfm
  import ipbus_pkg::*;
(
  input  logic      clk,
  output ipb_wbus_t ipb_out,
  input  ipb_rbus_t ipb_in
);
  int n_trans = 0, n_err = 0;

  initial ipb_out = '0;

  task automatic xfer(input logic [31:0] addr, input logic wr, input logic [31:0] wdata,
                      output logic [31:0] rdata, output bit err, output bit timeout);
    int guard = 0;
    @(negedge clk);
    ipb_out = '{ipb_addr: addr, ipb_wdata: wdata, ipb_strobe: 1'b1, ipb_write: wr};
    timeout = 0;
    forever begin
      @(posedge clk);
      if (ipb_in.ipb_ack || ipb_in.ipb_err) break;
      if (++guard > 100) begin timeout = 1; break; end
    end
    rdata = ipb_in.ipb_rdata;
    err   = ipb_in.ipb_err;
    n_trans++;
    if (err) n_err++;
    @(negedge clk);
    ipb_out.ipb_strobe = 1'b0;
  endtask

  task automatic write(input logic [31:0] addr, input logic [31:0] wdata, output bit err);
    logic [31:0] d;
    bit to;
    xfer(addr, 1'b1, wdata, d, err, to);
    if (to) err = 1;
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] rdata, output bit err);
    bit to;
    xfer(addr, 1'b0, 32'd0, rdata, err, to);
    if (to) err = 1;
  endtask
endmodule
