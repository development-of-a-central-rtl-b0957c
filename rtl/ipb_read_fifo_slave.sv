// ipb_read_fifo_slave: IPBus slave through which the host reads TDSCAN output frames.
//
// The head frame of the output FIFO is visible as 36 words at local addresses 0 .. 35 (word k
// holds bits 32k+31 .. 32k). Reading REG_POP returns the status word {empty, tlast of the head
// frame, 14'b0, fill level[15:0]}; writing REG_POP removes the head frame (err if the FIFO is
// empty). The paper gives only the slave's name and its place in the data path; the register
// map is this design's.
//
// IPBus timing: acted on in the first strobe cycle, ack or err one cycle later, with the read
// data captured in the strobe cycle.
module ipb_read_fifo_slave
  import ipbus_pkg::*;
#(
  parameter int unsigned N = 1141,
  localparam int unsigned WORDS = (N + 31) / 32
) (
  input  logic         clk,
  input  logic         rst,
  input  ipb_wbus_t    ipb_in,
  output ipb_rbus_t    ipb_out,
  input  logic [N-1:0] fifo_data,
  input  logic         fifo_last,
  input  logic         fifo_empty,
  input  logic [15:0]  fifo_count,
  output logic         fifo_pop
);

  logic [WORDS*32-1:0] wide;
  logic                ack_q, err_q;
  logic [31:0]         rdata_q, rdata;
  logic                act, bad;
  logic [5:0]          a;

  assign wide = (WORDS * 32)'(fifo_data);
  assign a    = ipb_in.ipb_addr[5:0];
  assign act  = ipb_in.ipb_strobe && !ack_q;

  always_comb begin
    bad   = 1'b0;
    rdata = '0;
    if (32'(a) < WORDS) begin
      rdata = wide[32*a +: 32];
      bad   = ipb_in.ipb_write;
    end else if (a == REG_POP) begin
      rdata = {fifo_empty, fifo_last, 14'd0, fifo_count};
      bad   = ipb_in.ipb_write && fifo_empty;
    end else bad = 1'b1;
  end

  assign fifo_pop = act && ipb_in.ipb_write && (a == REG_POP) && !fifo_empty;

  always_ff @(posedge clk) begin
    if (rst) begin
      ack_q   <= 1'b0;
      err_q   <= 1'b0;
      rdata_q <= '0;
    end else begin
      ack_q   <= act;
      err_q   <= act && bad;
      rdata_q <= rdata;
    end
  end

  assign ipb_out = '{ipb_rdata: rdata_q, ipb_ack: ack_q && !err_q, ipb_err: ack_q && err_q};

endmodule
