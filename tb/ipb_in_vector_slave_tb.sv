// ipb_in_vector_slave_tb: checks frame assembly, push, control and status of the In Vector
// slave through IPBus transactions.
//
// Random 1141-bit frames are written as 36 words and pushed (some with tlast); each push must
// produce exactly one frame_push pulse carrying the frame and its flag. Read-back of the
// staging words, the control register (run, minPts with its reset value 7), the status word,
// err for unknown addresses and for a push into a full FIFO, and the self-clearing of run on
// batch_done are checked.
module ipb_in_vector_slave_tb;
  import ipbus_pkg::*;
  localparam int N = 1141, WORDS = 36;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst;
  ipb_wbus_t wbus;
  ipb_rbus_t rbus;
  logic [N-1:0] frame_data;
  logic frame_last, frame_push, fifo_full, run, batch_done;
  logic [15:0] fifo_count;
  logic [7:0] min_pts;
  int checks = 0, failures = 0;
  logic [N-1:0] pushed_q[$];
  bit pushed_last_q[$];

  ipb_master_bfm bfm (.clk, .ipb_out(wbus), .ipb_in(rbus));
  ipb_in_vector_slave #(.N(N)) dut (.clk, .rst, .ipb_in(wbus), .ipb_out(rbus), .frame_data,
    .frame_last, .frame_push, .fifo_full, .fifo_count, .run, .batch_done, .min_pts);

  always @(posedge clk) if (frame_push) begin
    pushed_q.push_back(frame_data);
    pushed_last_q.push_back(frame_last);
  end

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [N-1:0] f;
    logic [31:0] d;
    bit err, last;
    rst = 1; fifo_full = 0; fifo_count = 16'd0; batch_done = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    bfm.read(32'(REG_CTRL), d, err);
    expect_true(!err && d == 32'h0000_0700, "control reset value");
    for (int k = 0; k < 6; k++) begin
      for (int i = 0; i < N; i++) f[i] = $urandom_range(0, 1);
      for (int w = 0; w < WORDS; w++) begin
        bfm.write(32'(w), 32'(f >> (32 * w)), err);
        expect_true(!err, "word write");
      end
      bfm.read(32'($urandom_range(0, WORDS - 1)), d, err);
      expect_true(!err, "word read");
      last = (k % 3 == 2);
      bfm.write(32'(REG_PUSH), {31'd0, last}, err);
      expect_true(!err, "push");
      expect_true(pushed_q.size() == 1, "one push pulse");
      if (pushed_q.size() == 1) begin
        expect_true(pushed_q.pop_front() == f, "pushed frame");
        expect_true(pushed_last_q.pop_front() == last, "pushed last flag");
      end
    end
    // word read-back
    bfm.write(32'd5, 32'hCAFE_0005, err);
    bfm.read(32'd5, d, err);
    expect_true(!err && d == 32'hCAFE_0005, "word read-back");
    // push into a full FIFO
    fifo_full = 1;
    bfm.write(32'(REG_PUSH), 32'd0, err);
    expect_true(err && pushed_q.size() == 0, "push into full FIFO refused");
    fifo_full = 0;
    // control and status
    bfm.write(32'(REG_CTRL), 32'h0000_0301, err);
    expect_true(!err && run && min_pts == 8'd3, "run and minPts set");
    fifo_count = 16'd123;
    bfm.read(32'(REG_STATUS), d, err);
    expect_true(!err && d == 32'd123, "status");
    @(negedge clk); batch_done = 1; @(negedge clk); batch_done = 0;
    expect_true(!run && min_pts == 8'd3, "run cleared by batch end");
    bfm.read(32'd50, d, err);
    expect_true(err, "unknown address answers err");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
