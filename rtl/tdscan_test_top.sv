// tdscan_test_top: the TDSCAN test firmware - one TDSCAN instance between two frame FIFOs,
// loaded and read by a host over IPBus, with a latency counter.
//
// Data path, as in the paper's framework diagram: host -> IPBus -> In Vector slave (assembles
// 1141-bit frames from 32-bit words) -> input FIFO (500 x 1141) -> TDSCAN -> output FIFO
// (500 x 1141) -> Read FIFO slave -> IPBus -> host. The latency counter watches the TDSCAN
// core's input and output handshakes and is read through the Counter reg. slave. The IPBus
// protocol core (Ethernet/UDP to bus) is not part of this module: its slave bus is the
// ipb_in / ipb_out port pair. One clock drives everything; the paper's firmware runs TDSCAN
// and the FIFOs at 400 MHz and has clock-domain crossings toward IPBus that it does not show.
//
// Operation: the host writes up to FIFO_DEPTH frames (the last with tlast), sets run, and the
// batch streams through TDSCAN at one frame per clock while the output FIFO has room. Register
// map (word addresses): 0x00-0x26 In Vector slave, 0x40-0x64 Read FIFO slave, 0x80-0x81
// Counter reg. slave; see ipbus_pkg and the slave modules.
module tdscan_test_top
  import ipbus_pkg::*;
  import tdscan_pkg::*;
#(
  parameter int unsigned HEX_RADIUS = CAMERA_RADIUS,  // 19 -> 1141 clusters
  parameter int unsigned EPS_XY     = 1,
  parameter int unsigned EPS_T      = 1,
  parameter int unsigned FIFO_DEPTH = 500,
  localparam int unsigned N = hex_cells(HEX_RADIUS),
  localparam int unsigned CNTW = $clog2(FIFO_DEPTH + 1)
) (
  input  logic      clk,
  input  logic      rst,
  input  ipb_wbus_t ipb_in,
  output ipb_rbus_t ipb_out
);

  ipb_wbus_t ipb_w [N_SLAVES];
  ipb_rbus_t ipb_r [N_SLAVES];

  ipb_fabric #(.NSLV(N_SLAVES)) u_fabric (
    .clk, .rst, .ipb_in, .ipb_out,
    .ipb_to_slaves(ipb_w), .ipb_from_slaves(ipb_r)
  );

  // ---------------- input side ----------------
  logic [N-1:0]    in_frame;
  logic            in_last, in_push, in_full, in_empty, in_pop;
  logic [N:0]      in_dout;
  logic [CNTW-1:0] in_count;
  logic            run, batch_done;
  logic [7:0]      min_pts;

  ipb_in_vector_slave #(.N(N)) u_in_slave (
    .clk, .rst,
    .ipb_in(ipb_w[SLV_IN_VECTOR]), .ipb_out(ipb_r[SLV_IN_VECTOR]),
    .frame_data(in_frame), .frame_last(in_last), .frame_push(in_push),
    .fifo_full(in_full), .fifo_count(16'(in_count)),
    .run, .batch_done, .min_pts
  );

  sync_fifo #(.WIDTH(N + 1), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst,
    .push(in_push), .din({in_last, in_frame}), .full(in_full),
    .pop(in_pop), .dout(in_dout), .empty(in_empty), .count(in_count)
  );

  // ---------------- TDSCAN ----------------
  logic         s_valid, s_ready, m_valid, m_ready, m_last;
  logic [N-1:0] m_data;

  assign s_valid    = run && !in_empty;
  assign in_pop     = s_valid && s_ready;
  assign batch_done = in_pop && in_dout[N];

  tdscan #(.HEX_RADIUS(HEX_RADIUS), .EPS_XY(EPS_XY), .EPS_T(EPS_T)) u_tdscan (
    .clk, .rst, .min_pts,
    .s_axis_tvalid(s_valid), .s_axis_tready(s_ready),
    .s_axis_tdata(in_dout[N-1:0]), .s_axis_tlast(in_dout[N]),
    .m_axis_tvalid(m_valid), .m_axis_tready(m_ready),
    .m_axis_tdata(m_data), .m_axis_tlast(m_last)
  );

  // ---------------- output side ----------------
  logic            out_full, out_empty, out_pop;
  logic [N:0]      out_dout;
  logic [CNTW-1:0] out_count;

  assign m_ready = !out_full;

  sync_fifo #(.WIDTH(N + 1), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst,
    .push(m_valid && m_ready), .din({m_last, m_data}), .full(out_full),
    .pop(out_pop), .dout(out_dout), .empty(out_empty), .count(out_count)
  );

  ipb_read_fifo_slave #(.N(N)) u_rd_slave (
    .clk, .rst,
    .ipb_in(ipb_w[SLV_READ_FIFO]), .ipb_out(ipb_r[SLV_READ_FIFO]),
    .fifo_data(out_dout[N-1:0]), .fifo_last(out_dout[N]),
    .fifo_empty(out_empty), .fifo_count(16'(out_count)), .fifo_pop(out_pop)
  );

  // ---------------- latency measurement ----------------
  logic        cnt_clear, busy;
  logic [31:0] lat_count, frames;

  latency_counter u_lat (
    .clk, .rst, .clear(cnt_clear),
    .frame_in(s_valid && s_ready), .frame_out(m_valid && m_ready),
    .count(lat_count), .frames, .busy
  );

  ipb_counter_slave u_cnt_slave (
    .clk, .rst,
    .ipb_in(ipb_w[SLV_COUNTER]), .ipb_out(ipb_r[SLV_COUNTER]),
    .count(lat_count), .frames, .clear(cnt_clear)
  );

endmodule
