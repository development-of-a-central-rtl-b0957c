// latency_counter: measures how many clock cycles the TDSCAN core needs for the frames fed to it.
//
// It counts every cycle in which at least one frame is inside the core: from the cycle a frame
// is accepted at the core's input to the cycle the last outstanding frame leaves its output,
// both included. Cycles in which the core is empty (the host still loading the next batch) are
// not counted, so after a run of batches the count is the total processing time, which for a
// continuous stream is the frame count plus the pipeline and per-batch overhead. It also counts
// the frames that came out. Both counters are 32 bits, as in the paper's diagram, and clear on
// clear. What exactly starts and stops the paper's counter is not given; this is this design's
// choice.
//
// Interface: frame_in / frame_out are one-cycle pulses for each input and output handshake of
// the core. Clear it only while no frame is inside, or the in-flight count loses track. Timing: count and frames update one edge after the events.
module latency_counter #(
  parameter int unsigned INFLIGHT_W = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        clear,
  input  logic        frame_in,
  input  logic        frame_out,
  output logic [31:0] count,
  output logic [31:0] frames,
  output logic        busy
);

  logic [INFLIGHT_W-1:0] inflight;

  assign busy = (inflight != '0);

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      inflight <= '0;
      count    <= '0;
      frames   <= '0;
    end else begin
      inflight <= inflight + INFLIGHT_W'(frame_in) - INFLIGHT_W'(frame_out);
      if (busy || frame_in) count <= count + 32'd1;
      if (frame_out) frames <= frames + 32'd1;
    end
  end

  // A frame cannot leave the core before it entered it.
  assert property (@(posedge clk) disable iff (rst || clear) frame_out |-> (busy || frame_in));

endmodule
