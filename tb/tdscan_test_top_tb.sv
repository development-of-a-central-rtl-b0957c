// tdscan_test_top_tb: end-to-end test of the TDSCAN test firmware at reduced size.
//
// A camera of radius 4 (61 clusters) and FIFOs of 8 frames keep the run short while every
// mechanism happens: batches streamed through TDSCAN with the latency count checked, minPts
// changes, a single-frame batch, a push into a full input FIFO, output back-pressure stalling
// TDSCAN, and unmapped addresses. Every output frame is checked against an independent model.
module tdscan_test_top_tb;
  import ipbus_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, done;
  ipb_wbus_t wbus;
  ipb_rbus_t rbus;
  int checks, failures, n_stall = 0;

  tdscan_test_top #(.HEX_RADIUS(4), .EPS_XY(1), .EPS_T(1), .FIFO_DEPTH(8)) dut (
    .clk, .rst, .ipb_in(wbus), .ipb_out(rbus));

  always @(posedge clk) if (!rst && dut.m_valid && !dut.m_ready) n_stall++;

  tdscan_top_driver #(.HEX_RADIUS(4), .EPS_XY(1), .EPS_T(1), .FIFO_DEPTH(8), .N_BATCHES(6),
                      .BATCH(8), .MECHANISMS(1'b1)) drv (
    .clk, .rst, .ipb_out(wbus), .ipb_in(rbus), .n_stall_cycles(n_stall),
    .checks, .failures, .done);

  initial begin
    repeat (2) @(posedge clk);
    wait (done);
    $display("IPBus transactions %0d (%0d answered err), TDSCAN stall cycles %0d",
             drv.bfm.n_trans, drv.bfm.n_err, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
