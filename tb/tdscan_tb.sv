// tdscan_tb: testbench of the TDSCAN core.
//
// Runs the full camera configuration of the paper's test (1141 clusters, eps_xy = 1,
// eps_t = 1) and a small camera with a wider kernel and window (radius 4, eps_xy = 2,
// eps_t = 2, the 5-frame window the paper mentions) through tdscan_check, which compares
// every output frame with an independent model. Each mechanism of the core - back-pressure
// stalls, gaps in the input stream, batch ends - must have happened at least once.
module tdscan_tb;
  logic clk = 0;
  always #5 clk = ~clk;

  int c0, f0, s0, g0, b0, t0, c1, f1, s1, g1, b1, t1;
  bit d0, d1;
  int checks, failures;

  tdscan_check #(.HEX_RADIUS(19), .EPS_XY(1), .EPS_T(1), .N_BATCHES(10)) u_full (
    .clk, .checks(c0), .failures(f0), .done(d0), .n_stalls(s0), .n_gaps(g0),
    .n_batches(b0), .n_trig(t0));
  tdscan_check #(.HEX_RADIUS(4), .EPS_XY(2), .EPS_T(2), .N_BATCHES(30)) u_small (
    .clk, .checks(c1), .failures(f1), .done(d1), .n_stalls(s1), .n_gaps(g1),
    .n_batches(b1), .n_trig(t1));

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    wait (d0 && d1);
    checks = c0 + c1; failures = f0 + f1;
    need("stall, full camera", s0); need("gap, full camera", g0);
    need("batch end, full camera", b0); need("trigger, full camera", t0);
    need("stall, small camera", s1); need("gap, small camera", g1);
    need("batch end, small camera", b1); need("trigger, small camera", t1);
    $display("stalls %0d/%0d gaps %0d/%0d batches %0d/%0d triggered bits %0d/%0d",
             s0, s1, g0, g1, b0, b1, t0, t1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end
endmodule
