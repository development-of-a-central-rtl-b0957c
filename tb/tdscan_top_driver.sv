// tdscan_top_driver: host model and checker for the TDSCAN test firmware, used by the
// end-to-end testbenches.
//
// It plays the host of the paper's test set-up: over IPBus it loads a batch of random L1 frames
// into the input FIFO (36 words and a push per frame, tlast on the last), sets minPts and run,
// waits for the batch to come out, reads every L2 frame back through the Read FIFO slave and
// compares it with its own model of TDSCAN (hexagon geometry and rule written independently of
// the RTL), and reads the latency counter. For a batch of F frames streamed with no output
// back-pressure the count must be F + EPS_T + 3 cycles (first frame in to last frame out,
// both included).
//
// Mechanisms exercised when the knobs ask for them: a push into a full input FIFO (err), output
// FIFO overflow avoided by back-pressure (a batch is started while the previous results are
// still unread, so the output FIFO fills and TDSCAN stalls), minPts changes between batches,
// batch ends, and accesses to unmapped addresses (err). The testbench module counts the
// internal events (stall cycles) and passes them in; the driver fails any that never happened.
module tdscan_top_driver
  import ipbus_pkg::*;
#(
  parameter int unsigned HEX_RADIUS  = 19,
  parameter int unsigned EPS_XY      = 1,
  parameter int unsigned EPS_T       = 1,
  parameter int unsigned FIFO_DEPTH  = 500,
  parameter int unsigned N_BATCHES   = 1,
  parameter int unsigned BATCH       = 500,   // frames per batch (<= FIFO_DEPTH)
  parameter bit          MECHANISMS  = 1'b0   // also run the overflow / back-pressure tests
) (
  input  logic      clk,
  output logic      rst,
  output ipb_wbus_t ipb_out,
  input  ipb_rbus_t ipb_in,
  input  int        n_stall_cycles,
  output int        checks,
  output int        failures,
  output bit        done
);
  localparam int N = 3 * HEX_RADIUS * (HEX_RADIUS + 1) + 1;
  localparam int WORDS = (N + 31) / 32;
  localparam logic [31:0] IN_BASE = 32'h00, RD_BASE = 32'h40, CNT_BASE = 32'h80;
  typedef logic [N-1:0] frame_t;

  ipb_master_bfm bfm (.clk, .ipb_out, .ipb_in);

  // ---------------- model ----------------
  int cq[N], cr[N];
  int nb[N][$];
  function automatic int absi(int v); return v < 0 ? -v : v; endfunction

  task automatic build_geometry();
    int n = 0;
    for (int r = -int'(HEX_RADIUS); r <= int'(HEX_RADIUS); r++)
      for (int q = -int'(HEX_RADIUS); q <= int'(HEX_RADIUS); q++)
        if (absi(q + r) <= int'(HEX_RADIUS)) begin cq[n] = q; cr[n] = r; n++; end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        int dq = cq[j] - cq[i], dr = cr[j] - cr[i];
        if ((absi(dq) + absi(dr) + absi(dq + dr)) / 2 <= int'(EPS_XY)) nb[i].push_back(j);
      end
  endtask

  task automatic model(input frame_t fr[$], input int mp, output frame_t out[$]);
    int F = fr.size();
    int cnt[][];
    cnt = new[F];
    foreach (fr[t]) begin
      cnt[t] = new[N];
      for (int i = 0; i < N; i++) begin
        cnt[t][i] = 0;
        foreach (nb[i][k]) cnt[t][i] += int'(fr[t][nb[i][k]]);
      end
    end
    out = {};
    for (int t = 0; t < F; t++) begin
      frame_t o;
      for (int i = 0; i < N; i++) begin
        int s = 0;
        for (int u = t - int'(EPS_T); u <= t + int'(EPS_T); u++)
          if (u >= 0 && u < F) s += cnt[u][i];
        o[i] = (s > mp);
      end
      out.push_back(o);
    end
  endtask

  // ---------------- host operations ----------------
  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load_batch(input frame_t fr[$]);
    bit err;
    foreach (fr[t]) begin
      for (int w = 0; w < WORDS; w++) begin
        bfm.write(IN_BASE + 32'(w), 32'(fr[t] >> (32 * w)), err);
        if (err) failures++;
      end
      bfm.write(IN_BASE + 32'(REG_PUSH), {31'd0, t == fr.size() - 1}, err);
      expect_true(!err, "frame push");
    end
  endtask

  task automatic read_status(input logic [31:0] base, input logic [5:0] reg_a, output int v);
    logic [31:0] d;
    bit err;
    bfm.read(base + 32'(reg_a), d, err);
    if (err) failures++;
    v = int'(d[15:0]);
  endtask

  // wait until the output FIFO holds n frames
  task automatic wait_out(int n);
    int c = 0, guard = 0;
    while (c < n && guard < 2000) begin read_status(RD_BASE, REG_POP, c); guard++; end
    expect_true(c >= n, "results arrived");
  endtask

  task automatic read_results(input frame_t expd[$], input int first, input int n);
    logic [31:0] d;
    logic [WORDS*32-1:0] got;
    bit err;
    for (int t = first; t < first + n; t++) begin
      bfm.read(RD_BASE + 32'(REG_POP), d, err);
      expect_true(!err && d[31] == 1'b0 && d[30] == (t == expd.size() - 1), "output status / tlast");
      for (int w = 0; w < WORDS; w++) begin
        bfm.read(RD_BASE + 32'(w), d, err);
        got[32 * w +: 32] = d;
      end
      expect_true(got[N-1:0] == expd[t], $sformatf("output frame %0d", t));
      bfm.write(RD_BASE + 32'(REG_POP), 32'd0, err);
      if (err) failures++;
    end
  endtask

  function automatic frame_t rand_frame(int pct);
    frame_t f;
    for (int i = 0; i < N; i++) f[i] = ($urandom_range(0, 99) < pct);
    return f;
  endfunction

  task automatic run_batch(input int F, input int mp, input bit check_latency);
    frame_t fr[$], expd[$];
    logic [31:0] d;
    bit err;
    int pct, lvl;
    pct = $urandom_range(8, 40);
    for (int t = 0; t < F; t++) fr.push_back(rand_frame(pct));
    model(fr, mp, expd);
    load_batch(fr);
    read_status(IN_BASE, REG_STATUS, lvl);
    expect_true(lvl == F, "input FIFO level");
    bfm.write(CNT_BASE + 32'(REG_COUNT), 32'd0, err);          // clear the latency counter
    bfm.write(IN_BASE + 32'(REG_CTRL), {16'd0, 8'(mp), 8'd1}, err);  // minPts, run
    wait_out(F);
    bfm.read(IN_BASE + 32'(REG_CTRL), d, err);
    expect_true(!err && d[0] == 1'b0, "run cleared at batch end");
    read_results(expd, 0, F);
    bfm.read(CNT_BASE + 32'(REG_COUNT), d, err);
    if (check_latency)
      expect_true(!err && d == 32'(F + int'(EPS_T) + 3),
                  $sformatf("latency count %0d, expected %0d", d, F + int'(EPS_T) + 3));
    $display("batch of %0d frames: latency count %0d cycles", F, d);
    bfm.read(CNT_BASE + 32'(REG_FRAMES), d, err);
    expect_true(!err && d == 32'(F), "frame count");
  endtask

  // Two batches back to back without reading in between: the output FIFO fills up and TDSCAN
  // has to stall until the host reads.
  task automatic backpressure_test();
    frame_t fa[$], fb[$], ea[$], eb[$];
    logic [31:0] d;
    bit err;
    int F = int'(FIFO_DEPTH) - 2;
    // batch a leaves 2 free places in the output FIFO; batch b (a full FIFO's worth) then
    // cannot fit into those places and the pipeline, so its tail must wait in the input FIFO
    for (int t = 0; t < F; t++) fa.push_back(rand_frame(30));
    for (int t = 0; t < int'(FIFO_DEPTH); t++) fb.push_back(rand_frame(30));
    model(fa, 5, ea);
    model(fb, 5, eb);
    load_batch(fa);
    bfm.write(IN_BASE + 32'(REG_CTRL), 32'h0000_0501, err);
    wait_out(F);
    load_batch(fb);
    bfm.write(IN_BASE + 32'(REG_CTRL), 32'h0000_0501, err);
    repeat (50) @(negedge clk);
    read_status(RD_BASE, REG_POP, F);
    expect_true(F == int'(FIFO_DEPTH), "output FIFO filled");
    read_status(IN_BASE, REG_STATUS, F);
    expect_true(F > 0, "input FIFO held back while TDSCAN stalls");
    F = int'(FIFO_DEPTH) - 2;
    read_results(ea, 0, F);
    wait_out(int'(FIFO_DEPTH));
    read_results(eb, 0, int'(FIFO_DEPTH));
    bfm.read(RD_BASE + 32'(REG_POP), d, err);
    expect_true(d[31] == 1'b1, "output FIFO empty at the end");
  endtask

  // Fill the input FIFO to the brim: one more push must be refused.
  task automatic overflow_test();
    frame_t fr[$], expd[$];
    bit err;
    int lvl;
    for (int t = 0; t < int'(FIFO_DEPTH); t++) fr.push_back(rand_frame(20));
    model(fr, 7, expd);
    load_batch(fr);
    bfm.write(IN_BASE + 32'(REG_PUSH), 32'd1, err);
    expect_true(err, "push into full input FIFO refused");
    read_status(IN_BASE, REG_STATUS, lvl);
    expect_true(lvl == int'(FIFO_DEPTH), "input FIFO full");
    bfm.write(IN_BASE + 32'(REG_CTRL), 32'h0000_0701, err);
    wait_out(int'(FIFO_DEPTH));
    read_results(expd, 0, int'(FIFO_DEPTH));
  endtask

  initial begin : main
    logic [31:0] d;
    bit err;
    checks = 0; failures = 0; done = 0;
    rst = 1;
    build_geometry();
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (2) @(negedge clk);
    for (int b = 0; b < int'(N_BATCHES); b++)
      run_batch(int'(BATCH) - (b % 3), (b == 0) ? 7 : $urandom_range(2, 12), 1'b1);
    if (MECHANISMS) begin
      bfm.read(32'h0000_00C0, d, err);
      expect_true(err, "unmapped slave answers err");
      bfm.read(32'h0000_0100, d, err);
      expect_true(err, "address above the map answers err");
      run_batch(1, 3, 1'b1);            // single-frame batch
      overflow_test();
      backpressure_test();
      expect_true(n_stall_cycles > 0, "TDSCAN stalled by a full output FIFO");
    end
    done = 1;
  end
endmodule
