// sync_fifo_tb: checks the frame FIFO at its full size (500 words of 1142 bits).
//
// Random pushes and pops are compared with a queue model: data order, fill level, full and
// empty. The FIFO is filled to 500 to see full, and the pointers wrap several times since the
// depth is not a power of two. Pushes while full and pops while empty are never issued, as the
// FIFO asserts against them.
module sync_fifo_tb;
  localparam int W = 1142, D = 500;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] model[$];
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic step(int push_pct, int pop_pct);
    push = ($urandom_range(0, 99) < push_pct) && (model.size() < D);
    pop  = ($urandom_range(0, 99) < pop_pct) && (model.size() > 0);
    din  = rnd();
    #1;
    checks++;
    if (int'(count) != model.size() || full != (model.size() == D) || empty != (model.size() == 0)) begin
      failures++; $display("count %0d full %b empty %b, model %0d", count, full, empty, model.size());
    end
    if (full) n_full++;
    if (empty) n_empty++;
    if (model.size() > 0) begin
      checks++;
      if (dout != model[0]) begin failures++; $display("head word wrong"); end
    end
    @(posedge clk);
    if (pop) void'(model.pop_front());
    if (push) model.push_back(din);
    @(negedge clk);
  endtask

  initial begin
    rst = 1; push = 0; pop = 0; din = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 3; k++) begin
      repeat (700) step(90, 10);   // fill to full
      repeat (700) step(10, 90);   // drain to empty
    end
    repeat (2000) step(50, 50);
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("full or empty never reached"); end
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
