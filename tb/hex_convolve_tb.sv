// hex_convolve_tb: checks the hexagonal convolution counts of the full 1141-cluster camera.
//
// Random frames of several densities, plus the all-ones frame (every inner cluster counts 7,
// the corner clusters 4 and the other edge clusters 5) and single set bits (exactly the 7
// kernel cells around the bit count 1). Expected counts come from a model that lays out the
// hexagon row by row and measures hexagon distance; it shares no code with the RTL.
module hex_convolve_tb;
  localparam int R = 19;
  localparam int N = 3 * R * (R + 1) + 1;

  logic [N-1:0]      frame;
  logic [N-1:0][2:0] count;
  int checks = 0, failures = 0;
  int cq[N], cr[N];

  hex_convolve #(.HEX_RADIUS(R), .EPS_XY(1)) dut (.frame_i(frame), .count_o(count));

  function automatic int absi(int v); return v < 0 ? -v : v; endfunction

  task automatic check_frame();
    int bad = 0;
    #1;
    for (int i = 0; i < N; i++) begin
      int c = 0;
      for (int j = 0; j < N; j++) begin
        int dq = cq[j] - cq[i], dr = cr[j] - cr[i];
        if ((absi(dq) + absi(dr) + absi(dq + dr)) / 2 <= 1) c += int'(frame[j]);
      end
      if (int'(count[i]) != c) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("%0d cluster counts wrong", bad); end
  endtask

  initial begin
    int n, corners, edges, full, b, ones, pct;
    n = 0; corners = 0; edges = 0; full = 0;
    for (int r = -R; r <= R; r++)
      for (int q = -R; q <= R; q++)
        if (absi(q + r) <= R) begin cq[n] = q; cr[n] = r; n++; end

    frame = '1;
    check_frame();
    for (int i = 0; i < N; i++) begin
      if (count[i] == 3'd4) corners++;
      else if (count[i] == 3'd5) edges++;
      else if (count[i] == 3'd7) full++;
    end
    checks++;
    if (corners != 6 || edges != 6 * (R - 1) || full != N - 6 * R) begin
      failures++; $display("all-ones frame: %0d corners %0d edges %0d inner", corners, edges, full);
    end

    for (int k = 0; k < 4; k++) begin
      b = $urandom_range(0, N - 1); ones = 0;
      frame = '0; frame[b] = 1'b1;
      check_frame();
      for (int i = 0; i < N; i++) ones += int'(count[i]);
      checks++;
      if (ones > 7 || ones < 3) begin failures++; $display("single bit spreads to %0d", ones); end
    end

    for (int k = 0; k < 12; k++) begin
      pct = $urandom_range(1, 90);
      for (int i = 0; i < N; i++) frame[i] = ($urandom_range(0, 99) < pct);
      check_frame();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
