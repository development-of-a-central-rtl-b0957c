// tdscan_stream_tb: the TDSCAN core on the workload of the published latency test, at full
// size: 10^6 frames of 1141 clusters, eps_xy = 1, eps_t = 1, in batches of 500 frames.
//
// The batches follow each other with no pause, as a continuous stream from a full FIFO would
// deliver them, and nothing back-pressures the output. A latency_counter watches the core's
// handshakes as in the test firmware. Checks:
// - every output frame carries the right tlast and arrives in order (count of frames out);
// - every output frame is compared with an independent model of the TDSCAN rule; each batch
//   has its own random L1 occupancy between 2 % and 25 %;
// - the cycle count. Each batch end costs eps_t + 1 = 2 input cycles (drain and clear), and the
//   last frame leaves eps_t + 3 = 4 edges after it entered, so the counter must read
//   10^6 + 2 * 1999 + 4 = 1,004,002 cycles. The published firmware measured 1,014,000 for the
//   same number of frames with batches loaded one by one; the difference is printed.
module tdscan_stream_tb;
  localparam int R = 19, N = 3 * R * (R + 1) + 1, EPS_T = 1;
  localparam int F = 500, B = 2000;
  typedef logic [N-1:0] frame_t;

  logic clk = 0;
  always #1 clk = ~clk;
  logic rst;
  logic s_valid, s_ready, s_last, m_valid, m_last, busy;
  frame_t s_data, m_data;
  logic [31:0] count, frames;
  int checks = 0, failures = 0, n_out = 0, n_compared = 0;

  tdscan dut (.clk, .rst, .min_pts(8'd7),
    .s_axis_tvalid(s_valid), .s_axis_tready(s_ready), .s_axis_tdata(s_data), .s_axis_tlast(s_last),
    .m_axis_tvalid(m_valid), .m_axis_tready(1'b1), .m_axis_tdata(m_data), .m_axis_tlast(m_last));

  latency_counter u_lat (.clk, .rst, .clear(1'b0), .frame_in(s_valid && s_ready),
    .frame_out(m_valid), .count, .frames, .busy);

  // ---------------- model ----------------
  int cq[N], cr[N];
  int nb[N][7];
  function automatic int absi(int v); return v < 0 ? -v : v; endfunction

  task automatic build_geometry();
    int n = 0;
    for (int r = -R; r <= R; r++)
      for (int q = -R; q <= R; q++)
        if (absi(q + r) <= R) begin cq[n] = q; cr[n] = r; n++; end
    for (int i = 0; i < N; i++) begin
      int k = 0;
      for (int j = 0; j < N; j++) begin
        int dq = cq[j] - cq[i], dr = cr[j] - cr[i];
        if ((absi(dq) + absi(dr) + absi(dq + dr)) / 2 <= 1) begin nb[i][k] = j; k++; end
      end
      for (; k < 7; k++) nb[i][k] = -1;
    end
  endtask

  frame_t batch_in[F];
  frame_t exp_frames[int];    // expected output by global output index

  task automatic expect_batch(int b);
    byte cnt[F][N];
    for (int t = 0; t < F; t++)
      for (int i = 0; i < N; i++) begin
        cnt[t][i] = 0;
        for (int k = 0; k < 7; k++) if (nb[i][k] >= 0) cnt[t][i] += byte'(batch_in[t][nb[i][k]]);
      end
    for (int t = 0; t < F; t++) begin
      frame_t o;
      for (int i = 0; i < N; i++) begin
        int s = int'(cnt[t][i]);
        if (t > 0) s += int'(cnt[t-1][i]);
        if (t < F - 1) s += int'(cnt[t+1][i]);
        o[i] = (s > 7);
      end
      exp_frames[b * F + t] = o;
    end
  endtask

  // ---------------- monitor ----------------
  always @(posedge clk) if (!rst && m_valid) begin : monitor
    if (m_last !== ((n_out % F) == F - 1)) begin
      failures++; $display("tlast wrong on output frame %0d", n_out);
    end
    if (!exp_frames.exists(n_out)) begin
      failures++; $display("unexpected output frame %0d", n_out);
    end else begin
      checks++; n_compared++;
      if (m_data !== exp_frames[n_out]) begin
        failures++; $display("output frame %0d differs from the model", n_out);
      end
      exp_frames.delete(n_out);
    end
    n_out <= n_out + 1;
  end

  // ---------------- stream ----------------
  function automatic frame_t rand_frame(int pct);
    frame_t f;
    for (int i = 0; i < N; i++) f[i] = ($urandom_range(0, 999) < pct);
    return f;
  endfunction

  initial begin : stream
    int pct;
    rst = 1; s_valid = 0; s_last = 0; s_data = '0;
    build_geometry();
    repeat (3) @(negedge clk);
    rst = 0;
    for (int b = 0; b < B; b++) begin
      // the whole batch is drawn and its results predicted before it is sent
      pct = $urandom_range(20, 250);
      for (int t = 0; t < F; t++) batch_in[t] = rand_frame(pct);
      expect_batch(b);
      for (int t = 0; t < F; t++) begin
        s_valid = 1'b1; s_data = batch_in[t]; s_last = (t == F - 1);
        do @(posedge clk); while (!s_ready);
        @(negedge clk);
      end
    end
    s_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (n_out != F * B) begin failures++; $display("%0d frames out, expected %0d", n_out, F * B); end
    checks++;
    if (frames != 32'(F * B)) failures++;
    checks++;
    if (count != 32'(F * B + (EPS_T + 1) * (B - 1) + EPS_T + 3)) begin
      failures++; $display("cycle count %0d, expected %0d", count, F * B + (EPS_T + 1) * (B - 1) + EPS_T + 3);
    end
    checks++;
    if (n_compared != F * B || exp_frames.size() != 0) failures++;
    $display("%0d frames in %0d batches: %0d cycles counted (published measurement 1014000), %0d frames compared",
             n_out, B, count, n_compared);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
