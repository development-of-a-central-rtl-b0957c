// latency_counter_tb: checks the cycle and frame counts of the latency counter.
//
// Frames enter and leave as random pulses with a fixed pipeline delay, with idle gaps between
// bursts; a model counts the cycles in which a frame is n_in (entering cycle and leaving
// cycle included) and the frames that left. A clear in the middle, issued while no frame is
// inside, restarts both counts.
module latency_counter_tb;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, clear, frame_in, frame_out, busy;
  logic [31:0] count, frames;
  int checks = 0, failures = 0;
  int m_count = 0, m_frames = 0, n_in = 0;
  bit pipe[$];

  latency_counter dut (.*);

  task automatic cycle_step(bit in);
    frame_in  = in;
    frame_out = pipe.pop_front();
    #1;
    @(posedge clk);
    if (clear) begin m_count = 0; m_frames = 0; n_in = 0; end
    else begin
      if (n_in > 0 || frame_in) m_count++;
      if (frame_out) m_frames++;
      n_in += int'(frame_in) - int'(frame_out);
    end
    pipe.push_back(in);
    @(negedge clk);
    checks++;
    if (count != 32'(m_count) || frames != 32'(m_frames) || busy != (n_in > 0)) begin
      failures++; $display("count %0d/%0d frames %0d/%0d", count, m_count, frames, m_frames);
    end
  endtask

  initial begin
    int len;
    rst = 1; clear = 0; frame_in = 0; frame_out = 0;
    repeat (5) pipe.push_back(1'b0);     // pipeline delay of 5 cycles
    repeat (2) @(negedge clk);
    rst = 0;
    for (int b = 0; b < 20; b++) begin
      len = $urandom_range(1, 30);
      for (int k = 0; k < len; k++) cycle_step($urandom_range(0, 3) != 0);
      repeat ($urandom_range(0, 12)) cycle_step(1'b0);
      if (b == 10) begin
        repeat (6) cycle_step(1'b0);   // let the frames inside leave first
        clear = 1; cycle_step(1'b0); clear = 0;
      end
    end
    repeat (8) cycle_step(1'b0);
    checks++;
    if (m_count == 0 || m_frames == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
