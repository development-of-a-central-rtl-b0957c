// tdscan_test_top_full_tb: the TDSCAN test firmware at full size, with every parameter at its
// default: 1141 clusters, eps_xy = 1, eps_t = 1, FIFOs of 500 frames.
//
// The host model loads a 500-frame batch (the batch size of the paper's test) and then a
// 499-frame one, streams each through TDSCAN, reads all 999 output frames back, compares
// them with an independent model and checks that each batch of F frames takes F + EPS_T + 3
// cycles (504 for 500 frames) on the latency counter.
module tdscan_test_top_full_tb;
  import ipbus_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, done;
  ipb_wbus_t wbus;
  ipb_rbus_t rbus;
  int checks, failures, n_stall = 0;

  tdscan_test_top dut (.clk, .rst, .ipb_in(wbus), .ipb_out(rbus));

  always @(posedge clk) if (!rst && dut.m_valid && !dut.m_ready) n_stall++;

  tdscan_top_driver #(.N_BATCHES(2), .BATCH(500)) drv (
    .clk, .rst, .ipb_out(wbus), .ipb_in(rbus), .n_stall_cycles(n_stall),
    .checks, .failures, .done);

  initial begin
    repeat (2) @(posedge clk);
    wait (done);
    $display("IPBus transactions %0d", drv.bfm.n_trans);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
