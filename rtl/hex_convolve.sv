// hex_convolve: the "Convolve 2D" stage of TDSCAN.
//
// For every cluster of the camera it counts how many L1 trigger bits are set inside the
// hexagonal kernel of radius EPS_XY centred on it, in one frame: with EPS_XY = 1 the kernel
// is the cluster and its 6 neighbours, so each count is 0..7 and takes 3 bits, which is why
// the convolution output of the paper's TDSCAN pipeline is 1141*3 bits wide. The kernel is all
// ones, as in the paper's worked example, so the convolution is a population count. Kernel
// cells that fall outside the camera count as 0. The neighbour wiring is computed at
// elaboration from the hexagon geometry in tdscan_pkg; the bit order of the frame is this
// design's choice (see tdscan_pkg).
//
// Interface: frame_i is one L1 frame, bit i = cluster i. count_o[i] is cluster i's count.
// Timing: purely combinational; the surrounding TDSCAN pipeline registers input and output.
module hex_convolve
  import tdscan_pkg::*;
#(
  parameter int unsigned HEX_RADIUS = CAMERA_RADIUS,   // camera size: 19 rings -> 1141 clusters
  parameter int unsigned EPS_XY     = 1,               // kernel radius: 1 -> 7 cells
  localparam int unsigned N  = hex_cells(HEX_RADIUS),
  localparam int unsigned K  = hex_cells(EPS_XY),
  localparam int unsigned CW = bits_for(K)
) (
  input  logic [N-1:0]         frame_i,
  output logic [N-1:0][CW-1:0] count_o
);

  for (genvar i = 0; i < N; i++) begin : g_cell
    localparam int QI = hex_q_of(HEX_RADIUS, i);
    localparam int RI = hex_r_of(HEX_RADIUS, i);
    logic [K-1:0] nb;
    for (genvar k = 0; k < K; k++) begin : g_tap
      localparam int J = hex_index(HEX_RADIUS, QI + kernel_dq(EPS_XY, k),
                                   RI + kernel_dr(EPS_XY, k));
      if (J >= 0) begin : g_in
        assign nb[k] = frame_i[J];
      end else begin : g_out
        assign nb[k] = 1'b0;
      end
    end
    logic [CW-1:0] cnt;
    always_comb begin
      cnt = '0;
      for (int k = 0; k < K; k++) cnt = cnt + CW'(nb[k]);
    end
    assign count_o[i] = cnt;
  end

endmodule
