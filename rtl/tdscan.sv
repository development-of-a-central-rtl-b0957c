// tdscan: the TDSCAN L2 trigger core (Trigger Distributed Spatial Convolution Accelerator
// Network), a fixed-latency, DBSCAN-like density filter for a stream of camera L1 frames.
//
// A cluster of the output frame is set when the number of set L1 bits around it, counted in a
// hexagonal kernel of radius EPS_XY in its own frame and in the EPS_T frames before and after,
// is above minPts. The pipeline follows the paper's block diagram: a 1141-bit input register;
// the 2D hexagonal convolution (hex_convolve) giving a small count per cluster; a window of
// 2*EPS_T+1 registers holding the counts of consecutive frames (three for EPS_T = 1); an adder
// that sums each cluster's counts across the window; the comparison sum > minPts; and a
// 1141-bit output register. The frame in the middle of the window is the one computed.
//
// Stream interface (AXI4-Stream style, names as in the paper's diagram): s_axis_* carries one
// L1 frame per beat, m_axis_* one L2 frame per beat, output frames in input order, one per
// input frame. The core accepts a frame every clock. m_axis_tready low stalls the whole
// pipeline. The window only moves when a frame arrives, so gaps in the input stream do not
// count as empty frames.
//
// Batches (this design's choice): the test firmware feeds data in batches, and tlast marks the
// last frame of one. After a tlast frame the core shifts EPS_T empty frames into the window so
// that the last frames are computed, then clears the window for one cycle. Frames at the edges
// of a batch therefore see empty frames beyond the batch, and each batch costs EPS_T + 1 extra
// cycles; s_axis_tready is low during those cycles. m_axis_tlast marks the last frame out.
//
// Latency: a frame accepted at clock edge e appears on m_axis after edge e + EPS_T + 2 when the
// stream is continuous (it must wait for the EPS_T frames after it). minPts is sampled when
// the window sum is registered.
module tdscan
  import tdscan_pkg::*;
#(
  parameter int unsigned HEX_RADIUS = CAMERA_RADIUS,  // 19 -> 1141 clusters
  parameter int unsigned EPS_XY     = 1,              // kernel radius (7-cell kernel)
  parameter int unsigned EPS_T      = 1,              // frames before and after (window of 3)
  localparam int unsigned N  = hex_cells(HEX_RADIUS),
  localparam int unsigned K  = hex_cells(EPS_XY),
  localparam int unsigned CW = bits_for(K),
  localparam int unsigned W  = 2 * EPS_T + 1,
  localparam int unsigned SW = bits_for(W * K)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [7:0]   min_pts,
  input  logic         s_axis_tvalid,
  output logic         s_axis_tready,
  input  logic [N-1:0] s_axis_tdata,
  input  logic         s_axis_tlast,
  output logic         m_axis_tvalid,
  input  logic         m_axis_tready,
  output logic [N-1:0] m_axis_tdata,
  output logic         m_axis_tlast
);

  typedef enum logic [1:0] {RUN, DRAIN, CLEAR} state_t;
  state_t state;
  logic [bits_for(W)-1:0] drain_cnt;

  // Input register
  logic         a_v, a_last;
  logic [N-1:0] a_data;

  // Window of per-frame convolution counts; slot 0 is the newest frame.
  logic [W-1:0][N-1:0][CW-1:0] win;
  logic [W-1:0]                win_v, win_last;
  logic                        win_new;   // window moved in the previous enabled cycle

  logic [N-1:0][CW-1:0] conv;
  logic [N-1:0]         trig;
  logic                 en, a_take, shift;

  assign en            = !m_axis_tvalid || m_axis_tready;
  assign a_take        = en && (state == RUN) && a_v;
  assign shift         = a_take || (en && (state == DRAIN));
  assign s_axis_tready = en && (!a_v || a_take);

  hex_convolve #(.HEX_RADIUS(HEX_RADIUS), .EPS_XY(EPS_XY)) u_conv (
    .frame_i(a_data),
    .count_o(conv)
  );

  // Sum of each cluster's counts over the window, then the threshold.
  for (genvar i = 0; i < N; i++) begin : g_sum
    logic [SW-1:0] sum;
    always_comb begin
      sum = '0;
      for (int w = 0; w < W; w++) sum = sum + SW'(win[w][i]);
    end
    assign trig[i] = ({{(32 - SW) {1'b0}}, sum} > {24'd0, min_pts});
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      a_v           <= 1'b0;
      a_last        <= 1'b0;
      a_data        <= '0;
      for (int w = 0; w < W; w++) win[w] <= '0;
      win_v         <= '0;
      win_last      <= '0;
      win_new       <= 1'b0;
      m_axis_tvalid <= 1'b0;
      m_axis_tdata  <= '0;
      m_axis_tlast  <= 1'b0;
      state         <= RUN;
      drain_cnt     <= '0;
    end else begin
      // input register
      if (s_axis_tvalid && s_axis_tready) begin
        a_v    <= 1'b1;
        a_data <= s_axis_tdata;
        a_last <= s_axis_tlast;
      end else if (a_take) begin
        a_v <= 1'b0;
      end

      // window
      if (en && state == CLEAR) begin
        for (int w = 0; w < W; w++) win[w] <= '0;
        win_v    <= '0;
        win_last <= '0;
      end else if (shift) begin
        win[0]      <= a_take ? conv : '0;
        win_v[0]    <= a_take;
        win_last[0] <= a_take && a_last;
        for (int w = 1; w < W; w++) begin
          win[w]      <= win[w-1];
          win_v[w]    <= win_v[w-1];
          win_last[w] <= win_last[w-1];
        end
      end

      if (en) begin
        win_new       <= shift;
        m_axis_tvalid <= win_new && win_v[EPS_T];
        m_axis_tdata  <= trig;
        m_axis_tlast  <= win_last[EPS_T];
      end

      // batch end: drain EPS_T empty frames, then clear the window
      if (en) begin
        unique case (state)
          RUN: if (a_take && a_last) begin
            state     <= (EPS_T > 0) ? DRAIN : CLEAR;
            drain_cnt <= '0;
          end
          DRAIN: begin
            if (32'(drain_cnt) == EPS_T - 1) state <= CLEAR;
            drain_cnt <= drain_cnt + 1'b1;
          end
          CLEAR: state <= RUN;
          default: state <= RUN;
        endcase
      end
    end
  end

  // AXI4-Stream rule: a presented output beat holds until it is taken.
  property p_hold;
    @(posedge clk) disable iff (rst)
      (m_axis_tvalid && !m_axis_tready) |=> (m_axis_tvalid && $stable(m_axis_tdata));
  endproperty
  assert property (p_hold);

endmodule
