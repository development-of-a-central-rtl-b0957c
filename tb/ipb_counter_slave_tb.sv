// ipb_counter_slave_tb: checks reads of the count and frame registers, the clear pulse on a
// write to the count register (exactly one cycle long) and err for bad accesses.
module ipb_counter_slave_tb;
  import ipbus_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, clear;
  ipb_wbus_t wbus;
  ipb_rbus_t rbus;
  logic [31:0] count, frames;
  int checks = 0, failures = 0, clears = 0;

  ipb_master_bfm bfm (.clk, .ipb_out(wbus), .ipb_in(rbus));
  ipb_counter_slave dut (.clk, .rst, .ipb_in(wbus), .ipb_out(rbus), .count, .frames, .clear);

  always @(posedge clk) if (clear) clears++;

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] d;
    bit err;
    rst = 1; count = 0; frames = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 8; k++) begin
      count = $urandom; frames = $urandom;
      bfm.read(32'(REG_COUNT), d, err);
      expect_true(!err && d == count, "count read");
      bfm.read(32'(REG_FRAMES), d, err);
      expect_true(!err && d == frames, "frames read");
    end
    bfm.write(32'(REG_COUNT), 32'd0, err);
    expect_true(!err && clears == 1, "one clear pulse");
    bfm.write(32'(REG_FRAMES), 32'd0, err);
    expect_true(err && clears == 1, "frames register is read-only");
    bfm.read(32'd9, d, err);
    expect_true(err, "unknown address");
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
