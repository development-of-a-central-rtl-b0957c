// tdscan_check: self-checking harness for one tdscan configuration, used by tdscan_tb.
//
// It drives the core with batches of random L1 frames (random density, random gaps between
// input frames, random output back-pressure), computes the expected L2 frames with its own
// model of the camera and the TDSCAN rule, and compares every output frame in order. The model
// builds the cluster coordinates by walking the hexagon row by row and finds neighbours by
// hexagon distance, independently of the constant functions the RTL uses. It also runs the
// worked example of the paper's kernel figure (counts 5, 3 and 0 in frames N-1, N, N+1: the
// sum 8 triggers with minPts = 7 but not with minPts = 8) and one timed batch, with no gaps
// and no back-pressure, in which each frame must be taken at the output exactly EPS_T + 3
// clock edges after the edge that accepted it (valid from edge + EPS_T + 2), and frames must be
// accepted on consecutive cycles.
module tdscan_check #(
  parameter int unsigned HEX_RADIUS = 19,
  parameter int unsigned EPS_XY     = 1,
  parameter int unsigned EPS_T      = 1,
  parameter int unsigned N_BATCHES  = 12
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output bit   done,
  output int   n_stalls,
  output int   n_gaps,
  output int   n_batches,
  output int   n_trig
);
  localparam int N = 3 * HEX_RADIUS * (HEX_RADIUS + 1) + 1;
  typedef logic [N-1:0] frame_t;

  logic       rst;
  logic [7:0] min_pts;
  logic       s_valid, s_ready, s_last, m_valid, m_ready, m_last;
  frame_t     s_data, m_data;

  tdscan #(.HEX_RADIUS(HEX_RADIUS), .EPS_XY(EPS_XY), .EPS_T(EPS_T)) dut (
    .clk, .rst, .min_pts,
    .s_axis_tvalid(s_valid), .s_axis_tready(s_ready), .s_axis_tdata(s_data),
    .s_axis_tlast(s_last),
    .m_axis_tvalid(m_valid), .m_axis_tready(m_ready), .m_axis_tdata(m_data),
    .m_axis_tlast(m_last)
  );

  // ---------------- reference model ----------------
  int cq[N], cr[N];
  int nb[N][$];

  function automatic int absi(int v); return v < 0 ? -v : v; endfunction

  task automatic build_geometry();
    int n = 0;
    for (int r = -int'(HEX_RADIUS); r <= int'(HEX_RADIUS); r++)
      for (int q = -int'(HEX_RADIUS); q <= int'(HEX_RADIUS); q++)
        if (absi(q + r) <= int'(HEX_RADIUS)) begin
          cq[n] = q; cr[n] = r; n++;
        end
    if (n != N) begin failures++; $display("geometry: %0d cells, expected %0d", n, N); end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        int dq = cq[j] - cq[i], dr = cr[j] - cr[i];
        if ((absi(dq) + absi(dr) + absi(dq + dr)) / 2 <= int'(EPS_XY)) nb[i].push_back(j);
      end
  endtask

  function automatic int kcount(frame_t f, int i);
    int c = 0;
    foreach (nb[i][k]) c += int'(f[nb[i][k]]);
    return c;
  endfunction

  // Expected output of one batch
  frame_t exp_q[$];
  bit     exp_last_q[$];
  int     acc_cycle_q[$];
  bit     timed;
  int     cycle, last_acc;

  task automatic expect_batch(frame_t fr[$], int mp);
    int F = fr.size();
    int cnt[][];
    cnt = new[F];
    foreach (fr[t]) begin
      cnt[t] = new[N];
      for (int i = 0; i < N; i++) cnt[t][i] = kcount(fr[t], i);
    end
    for (int t = 0; t < F; t++) begin
      frame_t o = '0;
      for (int i = 0; i < N; i++) begin
        int s = 0;
        for (int u = t - int'(EPS_T); u <= t + int'(EPS_T); u++)
          if (u >= 0 && u < F) s += cnt[u][i];
        o[i] = (s > mp);
      end
      exp_q.push_back(o);
      exp_last_q.push_back(t == F - 1);
    end
  endtask

  // ---------------- output monitor ----------------
  bit stall_mode;
  always @(negedge clk) m_ready = stall_mode ? ($urandom_range(0, 2) != 0) : 1'b1;

  always @(posedge clk) begin : monitor
    frame_t e;
    bit     el;
    int     a;
    cycle <= cycle + 1;
    if (!rst && m_valid && !m_ready) n_stalls++;
    if (!rst && m_valid && m_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output frame");
      end else begin
        e  = exp_q.pop_front();
        el = exp_last_q.pop_front();
        if (m_data !== e || m_last !== el) begin
          failures++;
          $display("R=%0d: output frame mismatch (last %b/%b) at cycle %0d: %0d bits differ, %0d set, %0d expected",
                   HEX_RADIUS, m_last, el, cycle, $countones(m_data ^ e), $countones(m_data), $countones(e));
        end
        n_trig += $countones(m_data);
        if (timed) begin
          a = acc_cycle_q.pop_front();
          checks++;
          if (cycle - a != int'(EPS_T) + 3) begin
            failures++; $display("latency %0d, expected %0d", cycle - a, EPS_T + 3);
          end
        end
      end
    end
  end

  // ---------------- driver ----------------
  task automatic send_batch(frame_t fr[$], bit gaps);
    foreach (fr[t]) begin
      if (gaps && $urandom_range(0, 2) == 0) begin
        n_gaps++;
        repeat ($urandom_range(1, 4)) @(negedge clk);
      end
      s_valid = 1'b1; s_data = fr[t]; s_last = (t == fr.size() - 1);
      do @(posedge clk); while (!s_ready);
      if (timed) begin
        if (t > 0) begin
          checks++;
          if (cycle != last_acc + 1) begin
            failures++; $display("input frame %0d accepted %0d cycles after the previous one", t, cycle - last_acc);
          end
        end
        last_acc = cycle;
        acc_cycle_q.push_back(cycle);
      end
      @(negedge clk);
      s_valid = 1'b0;
    end
    n_batches++;
  endtask

  task automatic wait_empty();
    int guard = 0;
    while (exp_q.size() != 0 && guard < 100000) begin @(negedge clk); guard++; end
    repeat (EPS_T + 4) @(negedge clk);
  endtask

  function automatic frame_t rand_frame(int pct);
    frame_t f;
    for (int i = 0; i < N; i++) f[i] = ($urandom_range(0, 99) < pct);
    return f;
  endfunction

  initial begin : stimulus
    frame_t fr[$];
    frame_t f0, f1, f2;
    int center, F, pct;
    checks = 0; failures = 0; done = 0; n_stalls = 0; n_gaps = 0; n_batches = 0; n_trig = 0;
    cycle = 0; timed = 0; stall_mode = 0;
    rst = 1; s_valid = 0; s_last = 0; s_data = '0; min_pts = 8'd7;
    build_geometry();
    repeat (4) @(negedge clk);
    rst = 0;

    // Worked example of the kernel figure: window sum 8 at the centre cluster.
    center = 0;
    for (int i = 0; i < N; i++) if (cq[i] == 0 && cr[i] == 0) center = i;
    for (int mp = 7; mp <= 8; mp++) begin
      f0 = '0; f1 = '0; f2 = '0;
      // frame N-1: five of the seven kernel cells set, frame N: three, frame N+1: none
      for (int k = 0; k < 5; k++) f0[nb[center][k]] = 1'b1;
      f1[nb[center][0]] = 1'b1; f1[nb[center][3]] = 1'b1; f1[nb[center][6 % nb[center].size()]] = 1'b1;
      min_pts = 8'(mp);
      fr = '{f0, f1, f2};
      expect_batch(fr, mp);
      checks++;
      if (EPS_XY == 1 && kcount(f0, center) + kcount(f1, center) != 8) failures++;
      send_batch(fr, 0);
      wait_empty();
    end

    // Random batches, with gaps and back-pressure, changing minPts between batches.
    stall_mode = 1;
    for (int b = 0; b < int'(N_BATCHES); b++) begin
      F   = (b == 0) ? 1 : $urandom_range(1, 8);
      pct = $urandom_range(5, 45);
      fr = {};
      for (int t = 0; t < F; t++) fr.push_back(rand_frame(pct));
      min_pts = 8'($urandom_range(1, 12));
      expect_batch(fr, int'(min_pts));
      send_batch(fr, 1);
      // next batch may follow at once unless minPts changes: wait for this one to drain
      wait_empty();
    end
    // Two batches back to back with the same minPts: no wait between them.
    for (int b = 0; b < 2; b++) begin
      fr = {};
      for (int t = 0; t < 5; t++) fr.push_back(rand_frame(30));
      expect_batch(fr, int'(min_pts));
      send_batch(fr, 0);
    end
    wait_empty();

    // Timed batch: no gaps, no back-pressure.
    stall_mode = 0;
    repeat (2) @(negedge clk);
    timed = 1;
    fr = {};
    for (int t = 0; t < 10; t++) fr.push_back(rand_frame(25));
    expect_batch(fr, int'(min_pts));
    acc_cycle_q = {};
    send_batch(fr, 0);
    wait_empty();
    timed = 0;

    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d frames never came out", exp_q.size()); end
    done = 1;
  end
endmodule
