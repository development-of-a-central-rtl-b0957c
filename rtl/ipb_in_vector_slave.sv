// ipb_in_vector_slave: IPBus slave that loads L1 frames into the TDSCAN input FIFO.
//
// A 1141-bit frame is too wide for one 32-bit IPBus word, so the host writes it as 36 words
// into a staging register (word k holds frame bits 32k+31 .. 32k; local addresses 0 .. 35,
// readable back), then writes REG_PUSH to copy the staged frame into the FIFO, with wdata[0]
// as the frame's tlast (end of batch) flag. REG_CTRL holds run (bit 0) and minPts
// (bits 15:8, 7 after reset as in the paper's worked example). run lets the FIFO feed the
// TDSCAN core; it clears itself when the tlast frame leaves the FIFO (batch_done), so the host
// loads a batch, sets run, and the batch streams at one frame per clock. REG_STATUS reads the
// FIFO fill level. The paper gives only the slave's name and its place in the data path; the
// register map is this design's.
//
// IPBus timing: a transaction is acted on in the first cycle its strobe is seen and
// acknowledged one cycle later (ack, or err for an unknown address or a push into a full FIFO).
module ipb_in_vector_slave
  import ipbus_pkg::*;
#(
  parameter int unsigned N = 1141,
  localparam int unsigned WORDS = (N + 31) / 32
) (
  input  logic         clk,
  input  logic         rst,
  input  ipb_wbus_t    ipb_in,
  output ipb_rbus_t    ipb_out,
  output logic [N-1:0] frame_data,
  output logic         frame_last,
  output logic         frame_push,
  input  logic         fifo_full,
  input  logic [15:0]  fifo_count,
  output logic         run,
  input  logic         batch_done,
  output logic [7:0]   min_pts
);

  logic [WORDS-1:0][31:0] stage;
  logic                   ack_q, err_q;
  logic [31:0]            rdata_q;
  logic                   act, bad;
  logic [5:0]             a;
  logic [31:0]            rdata;

  assign a          = ipb_in.ipb_addr[5:0];
  assign act        = ipb_in.ipb_strobe && !ack_q;
  assign frame_data = N'(stage);

  always_comb begin
    bad   = 1'b0;
    rdata = '0;
    if (32'(a) < WORDS)   rdata = stage[a];
    else if (a == REG_PUSH)   bad = !ipb_in.ipb_write || fifo_full;
    else if (a == REG_CTRL)   rdata = {16'd0, min_pts, 7'd0, run};
    else if (a == REG_STATUS) begin
      rdata = {16'd0, fifo_count};
      bad   = ipb_in.ipb_write;
    end else bad = 1'b1;
  end

  assign frame_push = act && ipb_in.ipb_write && (a == REG_PUSH) && !fifo_full;
  assign frame_last = ipb_in.ipb_wdata[0];

  always_ff @(posedge clk) begin
    if (rst) begin
      ack_q   <= 1'b0;
      err_q   <= 1'b0;
      rdata_q <= '0;
      stage   <= '0;
      run     <= 1'b0;
      min_pts <= 8'd7;
    end else begin
      ack_q   <= act;
      err_q   <= act && bad;
      rdata_q <= rdata;
      if (act && ipb_in.ipb_write && 32'(a) < WORDS) stage[a] <= ipb_in.ipb_wdata;
      if (act && ipb_in.ipb_write && a == REG_CTRL) begin
        run     <= ipb_in.ipb_wdata[0];
        min_pts <= ipb_in.ipb_wdata[15:8];
      end else if (batch_done) begin
        run <= 1'b0;
      end
    end
  end

  assign ipb_out = '{ipb_rdata: rdata_q, ipb_ack: ack_q && !err_q, ipb_err: ack_q && err_q};

endmodule
