// ipb_read_fifo_slave_tb: checks that the Read FIFO slave returns the head frame word by word,
// reports status and pops exactly once per pop write.
//
// A small FIFO model behind the slave holds random 1141-bit frames; the testbench reads all 36
// words of each, compares the reassembled frame and its tlast with what it put in, then pops.
// A pop of an empty FIFO, a write to a data word and an unknown address must answer err.
module ipb_read_fifo_slave_tb;
  import ipbus_pkg::*;
  localparam int N = 1141, WORDS = 36;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst;
  ipb_wbus_t wbus;
  ipb_rbus_t rbus;
  logic [N:0] q[$];
  logic [N-1:0] fifo_data;
  logic fifo_last, fifo_empty, fifo_pop;
  logic [15:0] fifo_count;
  int checks = 0, failures = 0, pops = 0;

  ipb_master_bfm bfm (.clk, .ipb_out(wbus), .ipb_in(rbus));
  ipb_read_fifo_slave #(.N(N)) dut (.clk, .rst, .ipb_in(wbus), .ipb_out(rbus), .fifo_data,
    .fifo_last, .fifo_empty, .fifo_count, .fifo_pop);

  always_comb begin
    fifo_empty = (q.size() == 0);
    fifo_count = 16'(q.size());
    fifo_data  = fifo_empty ? '0 : q[0][N-1:0];
    fifo_last  = fifo_empty ? 1'b0 : q[0][N];
  end
  always @(posedge clk) if (fifo_pop) begin
    pops++;
    if (q.size() > 0) void'(q.pop_front());
  end

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [N:0] f[5];
    logic [WORDS*32-1:0] got;
    logic [31:0] d;
    bit err;
    rst = 1;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 5; k++) begin
      for (int i = 0; i <= N; i++) f[k][i] = $urandom_range(0, 1);
      q.push_back(f[k]);
    end
    for (int k = 0; k < 5; k++) begin
      bfm.read(32'(REG_POP), d, err);
      expect_true(!err && d[31] == 1'b0 && d[30] == f[k][N] && d[15:0] == 16'(5 - k), "status word");
      for (int w = 0; w < WORDS; w++) begin
        bfm.read(32'(w), d, err);
        expect_true(!err, "word read");
        got[32 * w +: 32] = d;
      end
      expect_true(got[N-1:0] == f[k][N-1:0], "frame read back");
      bfm.write(32'(REG_POP), 32'd0, err);
      expect_true(!err && pops == k + 1, "one pop per pop write");
    end
    bfm.read(32'(REG_POP), d, err);
    expect_true(!err && d[31] == 1'b1, "empty flag");
    bfm.write(32'(REG_POP), 32'd0, err);
    expect_true(err && pops == 5, "pop of empty FIFO refused");
    bfm.write(32'd3, 32'd0, err);
    expect_true(err, "write to data word refused");
    bfm.read(32'd60, d, err);
    expect_true(err, "unknown address");
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
