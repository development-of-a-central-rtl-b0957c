// ipb_counter_slave: IPBus register slave for the latency counter.
//
// REG_COUNT (local address 0) reads the 32-bit cycle count; writing it clears the counter
// (one-cycle clear pulse). REG_FRAMES (address 1) reads the number of frames that left the
// TDSCAN core. Other addresses answer err. The paper names the slave and its 32-bit input; the
// clear-on-write and the frame count are this design's choices.
//
// IPBus timing: acted on in the first strobe cycle, ack or err one cycle later.
module ipb_counter_slave
  import ipbus_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  ipb_wbus_t   ipb_in,
  output ipb_rbus_t   ipb_out,
  input  logic [31:0] count,
  input  logic [31:0] frames,
  output logic        clear
);

  logic        ack_q, err_q, act, bad;
  logic [31:0] rdata_q, rdata;
  logic [5:0]  a;

  assign a   = ipb_in.ipb_addr[5:0];
  assign act = ipb_in.ipb_strobe && !ack_q;

  always_comb begin
    bad   = 1'b0;
    rdata = '0;
    unique case (a)
      REG_COUNT:  rdata = count;
      REG_FRAMES: begin
        rdata = frames;
        bad   = ipb_in.ipb_write;
      end
      default:    bad = 1'b1;
    endcase
  end

  assign clear = act && ipb_in.ipb_write && (a == REG_COUNT);

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
